// stitch_logic: parameter server for the distributed processor.
//
// N parallel stitch channels (stitch_channel), one per physical qubit, each
// with its own fproc interface to a processor core, its own port B of that
// qubit's parameter memory and its own pass-through to the measurement
// function processor. Parameter requests (ID 10) are served from the
// memory through a prefetch buffer within two clock cycles; measurement
// requests (IDs 0..7) go to the existing function processor.
//
// The scheduler's control codes are held in a small register file here,
// written from the local bus before a run (the register map and encoding
// are this design's own; see stitch_pkg::ctrl_reg_e). Control word address:
// bits [13:11] = qubit, bits [2:0] = register.
//   BASE   first word of the parameter set         (reset 0)
//   COUNT  parameters per circuit, 0..2048          (reset 0 = idle)
//   SHOTS  shots per set                            (reset 1)
//   SETS   consecutive sets of COUNT words          (reset 1)
//   CTRL   write bit 0 = 1: start (re-arm) the channel with the above
//   STATUS read {29'b0, overrun, done, running}
//   DELIVERED / STALLS  read-only event counters
// A control-register read returns its data one cycle after the access.
module stitch_logic
  import stitch_pkg::*;
#(
  parameter int unsigned N = NQ
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  fproc_req_t  [N-1:0]    fproc_req,
  output fproc_resp_t [N-1:0]    fproc_resp,
  output fproc_req_t  [N-1:0]    meas_req,
  input  fproc_resp_t [N-1:0]    meas_resp,
  output mem_port_t   [N-1:0]    mem_b,
  input  logic [N-1:0][DATA_W-1:0] mem_b_rdata,
  input  lb_req_t                ctrl_req,
  output logic [DATA_W-1:0]      ctrl_rdata
);

  chan_cfg_t   [N-1:0] cfg;
  logic        [N-1:0] start, running, done, overrun;
  logic [N-1:0][31:0]  delivered, stalls;

  logic [SEL_W-1:0] c_q;
  ctrl_reg_e        c_reg;
  assign c_q   = ctrl_req.addr[LB_AW-1:MEM_AW];
  assign c_reg = ctrl_reg_e'(ctrl_req.addr[2:0]);

  // control-register writes
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        cfg[i].base  <= '0;
        cfg[i].count <= '0;
        cfg[i].shots <= SHOT_W'(1);
        cfg[i].sets  <= SET_W'(1);
      end
      start <= '0;
    end else begin
      start <= '0;
      for (int i = 0; i < N; i++) begin
        if (ctrl_req.we && c_q == SEL_W'(i)) begin
          unique case (c_reg)
            REG_BASE:  cfg[i].base  <= ctrl_req.wdata[MEM_AW-1:0];
            REG_COUNT: cfg[i].count <= ctrl_req.wdata[MEM_AW:0];
            REG_SHOTS: cfg[i].shots <= ctrl_req.wdata[SHOT_W-1:0];
            REG_SETS:  cfg[i].sets  <= ctrl_req.wdata[SET_W-1:0];
            REG_CTRL:  start[i]     <= ctrl_req.wdata[0];
            default: ;
          endcase
        end
      end
    end
  end

  // control-register reads, one cycle latency
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctrl_rdata <= '0;
    end else if (ctrl_req.re) begin
      ctrl_rdata <= '0;
      for (int i = 0; i < N; i++) begin
        if (c_q == SEL_W'(i)) begin
          unique case (c_reg)
            REG_BASE:      ctrl_rdata <= DATA_W'(cfg[i].base);
            REG_COUNT:     ctrl_rdata <= DATA_W'(cfg[i].count);
            REG_SHOTS:     ctrl_rdata <= DATA_W'(cfg[i].shots);
            REG_SETS:      ctrl_rdata <= DATA_W'(cfg[i].sets);
            REG_CTRL:      ctrl_rdata <= '0;
            REG_STATUS:    ctrl_rdata <= DATA_W'({overrun[i], done[i], running[i]});
            REG_DELIVERED: ctrl_rdata <= delivered[i];
            REG_STALLS:    ctrl_rdata <= stalls[i];
            default: ;
          endcase
        end
      end
    end
  end

  for (genvar g = 0; g < N; g++) begin : g_chan
    stitch_channel u_chan (
      .clk, .rst_n,
      .cfg       (cfg[g]),
      .start     (start[g]),
      .req       (fproc_req[g]),
      .resp      (fproc_resp[g]),
      .meas_req  (meas_req[g]),
      .meas_resp (meas_resp[g]),
      .mem_b     (mem_b[g]),
      .mem_rdata (mem_b_rdata[g]),
      .running   (running[g]),
      .done      (done[g]),
      .overrun   (overrun[g]),
      .delivered (delivered[g]),
      .stalls    (stalls[g])
    );
  end

endmodule
