// tb_param_mem: self-checking test of the dual-port parameter memory.
//
// Fills the whole memory through port A, reads it back through port B and
// A, then runs random mixed traffic on both ports (never writing one word
// from both ports at once) against a reference array, and checks the
// read-first behaviour and the one-cycle read latency.
module tb_param_mem;
  localparam int DEPTH = 2048;
  localparam int AW    = 11;

  logic clk = 0;
  always #1 clk = ~clk;   // 500 MHz

  logic          a_en, a_we, b_en, b_we;
  logic [AW-1:0] a_addr, b_addr;
  logic [31:0]   a_wdata, b_wdata, a_rdata, b_rdata;
  logic [31:0]   ref_mem [DEPTH];

  int checks = 0, failures = 0;

  param_mem dut (.*);   // default size: 2048 x 32

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  function automatic logic [31:0] pat(int i);
    return 32'hA5000000 ^ (i * 32'h9E3779B1);
  endfunction

  initial begin
    a_en = 0; a_we = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    @(negedge clk);
    // fill through port A
    for (int i = 0; i < DEPTH; i++) begin
      a_en = 1; a_we = 1; a_addr = AW'(i); a_wdata = pat(i); ref_mem[i] = pat(i);
      @(negedge clk);
    end
    a_en = 0; a_we = 0;
    // read all through port B, one cycle latency
    for (int i = 0; i < DEPTH; i++) begin
      b_en = 1; b_addr = AW'(i);
      @(negedge clk);
      check("portB fill readback", b_rdata, ref_mem[i]);
    end
    b_en = 0;
    // read-first on port A: write new data, old word comes out
    a_en = 1; a_we = 1; a_addr = 11'd5; a_wdata = 32'hDEADBEEF;
    @(negedge clk);
    check("read-first old word", a_rdata, ref_mem[5]);
    ref_mem[5] = 32'hDEADBEEF;
    a_we = 0;
    @(negedge clk);
    check("new word after write", a_rdata, 32'hDEADBEEF);
    // rdata holds when the port is idle
    a_en = 0; a_addr = 11'd6;
    @(negedge clk);
    check("hold when disabled", a_rdata, 32'hDEADBEEF);
    // random mixed traffic
    for (int n = 0; n < 4000; n++) begin
      logic [31:0] ea, eb;
      a_en = 1'($urandom); a_we = 1'($urandom); a_addr = AW'($urandom); a_wdata = $urandom;
      b_en = 1'($urandom); b_we = 1'($urandom); b_addr = AW'($urandom); b_wdata = $urandom;
      if (a_en && a_we && b_en && b_we && a_addr == b_addr) b_we = 0;
      ea = ref_mem[a_addr]; eb = ref_mem[b_addr];
      @(negedge clk);
      if (a_en) check("random portA read", a_rdata, ea);
      if (b_en) check("random portB read", b_rdata, eb);
      if (a_en && a_we) ref_mem[a_addr] = a_wdata;
      if (b_en && b_we) ref_mem[b_addr] = b_wdata;
    end
    a_en = 0; b_en = 0;
    // final sweep through port A
    for (int i = 0; i < DEPTH; i++) begin
      a_en = 1; a_we = 0; a_addr = AW'(i);
      @(negedge clk);
      check("final sweep", a_rdata, ref_mem[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
