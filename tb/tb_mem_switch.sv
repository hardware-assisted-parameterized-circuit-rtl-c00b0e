// tb_mem_switch: self-checking test of the local-bus address decoder.
//
// Drives local-bus writes and reads to every memory and to the control
// space, models the eight memories and the control registers in the bench,
// and checks: which memory's enable/write-enable fire (3 address MSBs), the
// 11-bit word address, the read-data mux and the one-cycle read-valid.
module tb_mem_switch;
  import stitch_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  lb_req_t                    lb_req;
  logic [DATA_W-1:0]          lb_rdata;
  logic                       lb_rvalid;
  mem_port_t   [NQ-1:0]       mem_a;
  logic [NQ-1:0][DATA_W-1:0]  mem_a_rdata;
  lb_req_t                    ctrl_req;
  logic [DATA_W-1:0]          ctrl_rdata;

  mem_switch dut (.*);

  // bench models: memories and a control register file, one-cycle read
  logic [31:0] mem [NQ][2048];
  logic [31:0] creg [64];
  always_ff @(posedge clk) begin
    for (int i = 0; i < NQ; i++)
      if (mem_a[i].en) begin
        mem_a_rdata[i] <= mem[i][mem_a[i].addr];
        if (mem_a[i].we) mem[i][mem_a[i].addr] <= mem_a[i].wdata;
      end
    if (ctrl_req.re) ctrl_rdata <= creg[{ctrl_req.addr[13:11], ctrl_req.addr[2:0]}];
    if (ctrl_req.we) creg[{ctrl_req.addr[13:11], ctrl_req.addr[2:0]}] <= ctrl_req.wdata;
  end

  int checks = 0, failures = 0;
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [31:0] ref_mem [NQ][2048];

  task automatic lb_write(bit csel, logic [13:0] a, logic [31:0] d);
    lb_req = '0; lb_req.we = 1; lb_req.ctrl_sel = csel; lb_req.addr = a; lb_req.wdata = d;
    #1;
    // decode check in the access cycle
    for (int i = 0; i < NQ; i++) begin
      check("we decode", 32'(mem_a[i].we), 32'(!csel && a[13:11] == 3'(i)));
      check("en decode", 32'(mem_a[i].en), 32'(!csel && a[13:11] == 3'(i)));
    end
    check("word addr", 32'(mem_a[a[13:11]].addr), 32'(a[10:0]));
    check("ctrl we", 32'(ctrl_req.we), 32'(csel));
    @(negedge clk);
    lb_req = '0;
  endtask

  task automatic lb_read(bit csel, logic [13:0] a, output logic [31:0] d);
    lb_req = '0; lb_req.re = 1; lb_req.ctrl_sel = csel; lb_req.addr = a;
    @(negedge clk);
    lb_req = '0;
    check("rvalid after one cycle", 32'(lb_rvalid), 1);
    d = lb_rdata;
    @(negedge clk);
    check("rvalid one cycle only", 32'(lb_rvalid), 0);
  endtask

  initial begin
    logic [31:0] d;
    lb_req = '0; rst_n = 0;
    for (int i = 0; i < NQ; i++)
      for (int w = 0; w < 2048; w++) begin mem[i][w] = 0; ref_mem[i][w] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("no rvalid after reset", 32'(lb_rvalid), 0);
    for (int n = 0; n < 600; n++) begin
      automatic logic [13:0] a = 14'($urandom);
      automatic logic [31:0] v = $urandom;
      lb_write(0, a, v);
      ref_mem[a[13:11]][a[10:0]] = v;
    end
    // a write to each memory at one fixed offset must not alias
    for (int i = 0; i < NQ; i++) begin
      lb_write(0, {3'(i), 11'h7FF}, 32'h1000 + i);
      ref_mem[i][11'h7FF] = 32'h1000 + i;
    end
    for (int i = 0; i < NQ; i++) begin
      lb_read(0, {3'(i), 11'h7FF}, d);
      check("no alias between memories", d, 32'h1000 + i);
    end
    for (int n = 0; n < 400; n++) begin
      automatic logic [13:0] a = 14'($urandom);
      lb_read(0, a, d);
      check("random read", d, ref_mem[a[13:11]][a[10:0]]);
    end
    // control space
    lb_write(1, {3'd3, 8'd0, 3'd2}, 32'hCAFE0002);
    check("ctrl write not in memory", mem[3][2], ref_mem[3][2]);
    lb_read(1, {3'd3, 8'd0, 3'd2}, d);
    check("ctrl readback", d, 32'hCAFE0002);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
