// mem_switch: address decoder between the local bus and the eight parameter
// memories (the second half of the memory controller).
//
// The 14-bit word address of each local-bus access is split as in the
// published design: the 3 MSBs select one of the eight memories and the 11
// LSBs address a word in it. The switch raises en (and we, for a write) on
// port A of the selected memory only, and returns read data to the bus
// converter with a read-valid strobe. Accesses flagged ctrl_sel go to the
// stitch control registers instead; that register space is this design's own
// addition for loading the scheduler's control codes.
//
// The word address and write data go to all memories in parallel; only
// the enables are decoded. Reset is synchronous and active low.
//
// Timing: combinational decode in the access cycle; memories and control
// registers answer one cycle later, when the registered select picks the
// read data and lb_rvalid is high for one cycle.
module mem_switch
  import stitch_pkg::*;
#(
  parameter int unsigned N = NQ
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // from the AXI to local bus converter
  input  lb_req_t                lb_req,
  output logic [DATA_W-1:0]      lb_rdata,
  output logic                   lb_rvalid,
  // port A of each parameter memory
  output mem_port_t [N-1:0]      mem_a,
  input  logic [N-1:0][DATA_W-1:0] mem_a_rdata,
  // stitch control registers
  output lb_req_t                ctrl_req,
  input  logic [DATA_W-1:0]      ctrl_rdata
);

  logic [SEL_W-1:0] sel;
  assign sel = lb_req.addr[LB_AW-1:MEM_AW];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      mem_a[i].en    = (lb_req.re || lb_req.we) && !lb_req.ctrl_sel && (sel == SEL_W'(i));
      mem_a[i].we    = lb_req.we && !lb_req.ctrl_sel && (sel == SEL_W'(i));
      mem_a[i].addr  = lb_req.addr[MEM_AW-1:0];
      mem_a[i].wdata = lb_req.wdata;
    end
    ctrl_req          = lb_req;
    ctrl_req.re       = lb_req.re && lb_req.ctrl_sel;
    ctrl_req.we       = lb_req.we && lb_req.ctrl_sel;
  end

  // Registered read select: which source answers next cycle.
  logic [SEL_W-1:0] sel_q;
  logic             ctrl_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lb_rvalid <= 1'b0;
      sel_q     <= '0;
      ctrl_q    <= 1'b0;
    end else begin
      lb_rvalid <= lb_req.re;
      if (lb_req.re) begin
        sel_q  <= sel;
        ctrl_q <= lb_req.ctrl_sel;
      end
    end
  end

  always_comb begin
    lb_rdata = '0;
    for (int i = 0; i < N; i++)
      if (sel_q == SEL_W'(i)) lb_rdata = mem_a_rdata[i];
    if (ctrl_q) lb_rdata = ctrl_rdata;
  end

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) !(lb_req.re && lb_req.we))
    else $error("mem_switch: read and write in the same cycle");

endmodule
