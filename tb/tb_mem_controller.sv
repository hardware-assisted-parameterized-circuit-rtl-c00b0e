// tb_mem_controller: self-checking test of the memory controller (AXI to
// local bus converter + memory switch) driven from the AXI side.
//
// The bench is the ARM (AXI4-Lite master at 100 MHz) and models the eight
// parameter memories and the control-register target in the 500 MHz
// domain. It writes random words at random byte addresses, checks that
// each lands in memory (AXI addr[15:13]) at word (AXI addr[12:2]) and
// nowhere else, reads them back over AXI, and checks the control space
// (AXI addr bit 16).
module tb_mem_controller;
  import stitch_pkg::*;

  logic aclk = 0, clk = 0;
  always #5 aclk = ~aclk;
  always #1 clk  = ~clk;
  logic aresetn, rst_n;

  logic [31:0] s_axi_awaddr, s_axi_araddr, s_axi_wdata, s_axi_rdata;
  logic        s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready;
  logic [3:0]  s_axi_wstrb;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  logic        s_axi_bvalid, s_axi_bready, s_axi_arvalid, s_axi_arready;
  logic        s_axi_rvalid, s_axi_rready;
  mem_port_t   [NQ-1:0]       mem_a;
  logic [NQ-1:0][DATA_W-1:0]  mem_a_rdata;
  lb_req_t                    ctrl_req;
  logic [DATA_W-1:0]          ctrl_rdata;

  mem_controller dut (.*);

  logic [31:0] mem [NQ][2048];
  logic [31:0] creg [8];
  int n_mem_writes = 0;
  always_ff @(posedge clk) begin
    for (int i = 0; i < NQ; i++)
      if (mem_a[i].en) begin
        mem_a_rdata[i] <= mem[i][mem_a[i].addr];
        if (mem_a[i].we) begin
          mem[i][mem_a[i].addr] <= mem_a[i].wdata;
          n_mem_writes <= n_mem_writes + 1;
        end
      end
    if (ctrl_req.re) ctrl_rdata <= creg[ctrl_req.addr[2:0]];
    if (ctrl_req.we) creg[ctrl_req.addr[2:0]] <= ctrl_req.wdata;
  end

  int checks = 0, failures = 0;
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic axi_write(logic [31:0] a, logic [31:0] d);
    @(negedge aclk);
    s_axi_awvalid = 1; s_axi_awaddr = a; s_axi_wvalid = 1; s_axi_wdata = d; s_axi_wstrb = 4'hF;
    fork
      begin do @(posedge aclk); while (!s_axi_awready); @(negedge aclk); s_axi_awvalid = 0; end
      begin do @(posedge aclk); while (!s_axi_wready);  @(negedge aclk); s_axi_wvalid = 0; end
    join
    s_axi_bready = 1;
    do @(posedge aclk); while (!s_axi_bvalid);
    @(negedge aclk); s_axi_bready = 0;
  endtask

  task automatic axi_read(logic [31:0] a, output logic [31:0] d);
    @(negedge aclk);
    s_axi_arvalid = 1; s_axi_araddr = a; s_axi_rready = 1;
    do @(posedge aclk); while (!s_axi_arready);
    @(negedge aclk); s_axi_arvalid = 0;
    while (!s_axi_rvalid) @(negedge aclk);
    d = s_axi_rdata;
    @(negedge aclk); s_axi_rready = 0;
  endtask

  logic [31:0] ref_m [NQ][2048];
  bit          wr [NQ][2048];

  initial begin
    logic [31:0] d;
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = 0; s_axi_wstrb = 0;
    for (int i = 0; i < NQ; i++) for (int w = 0; w < 2048; w++) mem[i][w] = 0;
    aresetn = 0; rst_n = 0;
    repeat (4) @(negedge aclk);
    aresetn = 1; rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      automatic logic [2:0]  q = 3'($urandom);
      automatic logic [10:0] w = 11'($urandom);
      automatic logic [31:0] v = $urandom;
      automatic int n0 = n_mem_writes;
      axi_write({16'h8000, 1'b0, q, w, 2'b00}, v);
      repeat (2) @(negedge clk);
      check("one memory write", 32'(n_mem_writes - n0), 1);
      check("word in selected memory", mem[q][w], v);
      ref_m[q][w] = v; wr[q][w] = 1;
    end
    for (int i = 0; i < NQ; i++)
      for (int w = 0; w < 2048; w++) begin
        if (wr[i][w]) begin
          check("memory content", mem[i][w], ref_m[i][w]);
          if ((w % 4) == 0 || i == 7) begin
            axi_read({16'h0000, 1'b0, 3'(i), 11'(w), 2'b00}, d);
            check("AXI readback", d, ref_m[i][w]);
          end
        end else check("untouched word", mem[i][w], 0);
      end
    axi_write({15'h0, 1'b1, 3'd2, 8'd0, 3'd5, 2'b00}, 32'h0C0DE);
    check("control write reaches control space", creg[5], 32'h0C0DE);
    axi_read({15'h0, 1'b1, 3'd2, 8'd0, 3'd5, 2'b00}, d);
    check("control readback", d, 32'h0C0DE);
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
