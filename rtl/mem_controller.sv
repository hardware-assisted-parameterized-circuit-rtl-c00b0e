// mem_controller: the Stitch module's memory controller.
//
// As in the published design it has two parts: the AXI to local bus
// converter (axi_local_bus), which brings each 32-bit AXI4-Lite access from
// the 100 MHz ARM bus into the 500 MHz domain as one access on a 14-bit
// local bus, and the memory switch (mem_switch), which decodes that address
// into one of the eight parameter memories (3 MSBs) and a word in it (11
// LSBs). The control-register path (ctrl_req/ctrl_rdata) is this design's
// addition, used by the scheduler to load control codes.
//
// Interface: AXI4-Lite slave on aclk; port A of each parameter memory and
// the control-register bus on clk. Timing is that of the two parts.
module mem_controller
  import stitch_pkg::*;
#(
  parameter int unsigned N      = NQ,
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
  output mem_port_t [N-1:0] mem_a,
  input  logic [N-1:0][DATA_W-1:0] mem_a_rdata,
  output lb_req_t           ctrl_req,
  input  logic [DATA_W-1:0] ctrl_rdata
);

  lb_req_t           lb_req;
  logic [DATA_W-1:0] lb_rdata;
  logic              lb_rvalid;

  axi_local_bus #(.AXI_AW(AXI_AW)) u_bus (
    .aclk, .aresetn,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .clk, .rst_n, .lb_req, .lb_rdata, .lb_rvalid
  );

  mem_switch #(.N(N)) u_switch (
    .clk, .rst_n, .lb_req, .lb_rdata, .lb_rvalid,
    .mem_a, .mem_a_rdata, .ctrl_req, .ctrl_rdata
  );

endmodule
