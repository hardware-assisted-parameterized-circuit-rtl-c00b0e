// tb_axi_local_bus: self-checking test of the AXI4-Lite to local-bus
// converter with its 100 MHz -> 500 MHz crossing.
//
// The bench plays the ARM as AXI master (including W n0 AW, AW n0
// W, and slow BREADY/RREADY) and models the local-bus target as a word
// memory with one-cycle read data and read-valid. It checks that every AXI
// write becomes exactly one local write with address = byte address
// [15:2], ctrl_sel = bit 16 and the right data, that reads return the
// target's word, that responses are OKAY, and that a write completes within
// a bounded number of AXI cycles.
module tb_axi_local_bus;
  import stitch_pkg::*;

  logic aclk = 0, clk = 0;
  always #5 aclk = ~aclk;   // 100 MHz
  always #1 clk  = ~clk;    // 500 MHz
  logic aresetn, rst_n;

  logic [31:0] s_axi_awaddr, s_axi_araddr, s_axi_wdata, s_axi_rdata;
  logic        s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready;
  logic [3:0]  s_axi_wstrb;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  logic        s_axi_bvalid, s_axi_bready, s_axi_arvalid, s_axi_arready;
  logic        s_axi_rvalid, s_axi_rready;
  lb_req_t     lb_req;
  logic [31:0] lb_rdata;
  logic        lb_rvalid;

  axi_local_bus dut (.*);

  // local-bus target model
  logic [31:0] tgt [2][16384];
  int          n_lb_writes = 0, n_lb_reads = 0;
  always_ff @(posedge clk) begin
    lb_rvalid <= lb_req.re;
    if (lb_req.re) lb_rdata <= tgt[lb_req.ctrl_sel][lb_req.addr];
    if (lb_req.we) begin
      tgt[lb_req.ctrl_sel][lb_req.addr] <= lb_req.wdata;
      n_lb_writes <= n_lb_writes + 1;
    end
    if (lb_req.re) n_lb_reads <= n_lb_reads + 1;
  end

  int checks = 0, failures = 0;
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // AXI master; order 0: AW with W, 1: W first, 2: AW first
  task automatic axi_write(logic [31:0] a, logic [31:0] d, int order, int bdelay, output int cycles);
    cycles = 0;
    @(negedge aclk);
    s_axi_wstrb = 4'hF;
    if (order != 2) begin s_axi_wvalid = 1; s_axi_wdata = d; end
    if (order != 1) begin s_axi_awvalid = 1; s_axi_awaddr = a; end
    fork
      begin
        if (order == 2) begin
          do @(posedge aclk); while (!s_axi_awready);
          @(negedge aclk); s_axi_awvalid = 0; repeat (2) @(negedge aclk);
          s_axi_wvalid = 1; s_axi_wdata = d;
          do @(posedge aclk); while (!s_axi_wready);
          @(negedge aclk); s_axi_wvalid = 0;
        end else if (order == 1) begin
          do @(posedge aclk); while (!s_axi_wready);
          @(negedge aclk); s_axi_wvalid = 0; repeat (2) @(negedge aclk);
          s_axi_awvalid = 1; s_axi_awaddr = a;
          do @(posedge aclk); while (!s_axi_awready);
          @(negedge aclk); s_axi_awvalid = 0;
        end else begin
          do @(posedge aclk); while (!(s_axi_awready && s_axi_wready));
          @(negedge aclk); s_axi_awvalid = 0; s_axi_wvalid = 0;
        end
      end
    join
    while (!s_axi_bvalid) begin @(negedge aclk); cycles++; end
    repeat (bdelay) @(negedge aclk);
    check("bvalid held", 32'(s_axi_bvalid), 1);
    check("bresp OKAY", 32'(s_axi_bresp), 0);
    s_axi_bready = 1;
    @(negedge aclk);
    s_axi_bready = 0;
  endtask

  task automatic axi_read(logic [31:0] a, int rdelay, output logic [31:0] d);
    @(negedge aclk);
    s_axi_arvalid = 1; s_axi_araddr = a;
    do @(posedge aclk); while (!s_axi_arready);
    @(negedge aclk); s_axi_arvalid = 0;
    while (!s_axi_rvalid) @(negedge aclk);
    repeat (rdelay) @(negedge aclk);
    check("rresp OKAY", 32'(s_axi_rresp), 0);
    d = s_axi_rdata;
    s_axi_rready = 1;
    @(negedge aclk);
    s_axi_rready = 0;
  endtask

  logic [31:0] ref_m [2][16384];
  bit          written [2][16384];

  initial begin
    int cyc, max_cyc = 0;
    logic [31:0] d;
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = 0; s_axi_wstrb = 0;
    aresetn = 0; rst_n = 0;
    repeat (4) @(negedge aclk);
    aresetn = 1; rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      automatic logic [31:0] a = {15'($urandom), 17'($urandom) & 17'h1FFFC};
      automatic logic [31:0] v = $urandom;
      automatic int n0 = n_lb_writes;
      axi_write(a, v, n % 3, n % 4, cyc);
      if (cyc > max_cyc) max_cyc = cyc;
      @(negedge clk);
      check("one local write per AXI write", 32'(n_lb_writes - n0), 1);
      check("local word landed", tgt[a[16]][a[15:2]], v);
      ref_m[a[16]][a[15:2]] = v; written[a[16]][a[15:2]] = 1;
    end
    check("write latency bound (AXI cycles)", 32'(max_cyc <= 6), 1);
    for (int s = 0; s < 2; s++)
      for (int w = 0; w < 16384; w++)
        if (written[s][w]) begin
          automatic int n0 = n_lb_reads;
          axi_read({15'($urandom), 1'(s), 14'(w), 2'b00}, w % 3, d);
          check("read data", d, ref_m[s][w]);
          check("one local read per AXI read", 32'(n_lb_reads - n0), 1);
        end
    $display("max write latency %0d AXI cycles", max_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge aclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
