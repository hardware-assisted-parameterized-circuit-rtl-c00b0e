// stitch_top: the Stitch module of hardware-assisted parameterized circuit
// execution.
//
// Idea: many quantum circuits of an experiment (randomized compiling,
// benchmarking, tomography) share one pulse structure and differ only in
// the virtual-Z phases of their single-qubit gates. Software compiles one
// template per structure, with every virtual-Z replaced by a request for a
// phase (alu_fproc, function ID 10), and loads the phases of each circuit
// into this module. During execution each processor core asks for its
// next phase and this module "stitches" it in, in hardware, within two
// 500 MHz cycles.
//
// Structure, as published: a memory controller (AXI to local bus converter
// + memory switch) through which the ARM writes parameters, eight
// true-dual-port parameter memories of 2048 x 32 bits (one per qubit), and
// the stitch logic with eight fproc interfaces to the cores. Requests with
// IDs other than 10 (mid-circuit measurement) pass through to the existing
// measurement function processor, whose ports appear here as meas_req /
// meas_resp. The control-register space (AXI address bit 16), the shot and
// set sequencing encoding and the handshakes are this design's own choices.
//
// Clocks: aclk (AXI, 100 MHz in the original) and clk (500 MHz, memories,
// stitch logic and cores). Resets are synchronous, active low, per domain.
module stitch_top
  import stitch_pkg::*;
#(
  parameter int unsigned N      = NQ,
  parameter int unsigned DEPTH  = 2**MEM_AW,
  parameter int unsigned AXI_AW = 32
) (
  input  logic              aclk,
  input  logic              aresetn,
  input  logic [AXI_AW-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [DATA_W-1:0] s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [AXI_AW-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [DATA_W-1:0] s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  input  logic              clk,
  input  logic              rst_n,
  input  fproc_req_t  [N-1:0] fproc_req,
  output fproc_resp_t [N-1:0] fproc_resp,
  output fproc_req_t  [N-1:0] meas_req,
  input  fproc_resp_t [N-1:0] meas_resp
);

  mem_port_t   [N-1:0]         mem_a, mem_b;
  logic [N-1:0][DATA_W-1:0]    mem_a_rdata, mem_b_rdata;
  lb_req_t                     ctrl_req;
  logic [DATA_W-1:0]           ctrl_rdata;

  mem_controller #(.N(N), .AXI_AW(AXI_AW)) u_mc (
    .aclk, .aresetn,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .clk, .rst_n, .mem_a, .mem_a_rdata, .ctrl_req, .ctrl_rdata
  );

  for (genvar g = 0; g < N; g++) begin : g_mem
    param_mem #(.DEPTH(DEPTH), .DATA_W(DATA_W)) u_mem (
      .clk,
      .a_en (mem_a[g].en), .a_we (mem_a[g].we), .a_addr (mem_a[g].addr[$clog2(DEPTH)-1:0]),
      .a_wdata (mem_a[g].wdata), .a_rdata (mem_a_rdata[g]),
      .b_en (mem_b[g].en), .b_we (mem_b[g].we), .b_addr (mem_b[g].addr[$clog2(DEPTH)-1:0]),
      .b_wdata (mem_b[g].wdata), .b_rdata (mem_b_rdata[g])
    );
  end

  stitch_logic #(.N(N)) u_stitch (
    .clk, .rst_n, .fproc_req, .fproc_resp, .meas_req, .meas_resp,
    .mem_b, .mem_b_rdata, .ctrl_req, .ctrl_rdata
  );

endmodule
