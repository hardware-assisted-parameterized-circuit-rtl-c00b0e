// tb_stitch_logic: self-checking test of the stitch logic (eight channels
// plus control registers).
//
// The bench models the eight parameter memories (one-cycle read on port B),
// the eight processor cores and the measurement function processor. For
// every qubit it programs BASE/COUNT/SHOTS/SETS, starts the channel and
// lets its core request parameters with random gaps, with measurement
// requests mixed in. It checks:
//   - each parameter equals memory[BASE + set*COUNT + index], repeated for
//     every shot, sets advancing (sequence computed from the bench's memory);
//   - a parameter request is answered one cycle after it is made whenever
//     the prefetch buffer holds the word (<= 2 cycles, the published figure),
//     including back-to-back requests;
//   - the first request right after start stalls and is still answered;
//   - measurement requests (ID = qubit) reach the measurement port and its
//     reply comes back unchanged;
//   - a request past the last parameter returns 0 and sets overrun; STATUS,
//     DELIVERED and STALLS read back as expected;
//   - a second run with a new BASE and a partial COUNT (switch set).
module tb_stitch_logic;
  import stitch_pkg::*;

  logic clk = 0;
  always #1 clk = ~clk;
  logic rst_n;

  fproc_req_t  [NQ-1:0]       fproc_req;
  fproc_resp_t [NQ-1:0]       fproc_resp;
  fproc_req_t  [NQ-1:0]       meas_req;
  fproc_resp_t [NQ-1:0]       meas_resp;
  mem_port_t   [NQ-1:0]       mem_b;
  logic [NQ-1:0][DATA_W-1:0]  mem_b_rdata;
  lb_req_t                    ctrl_req;
  logic [DATA_W-1:0]          ctrl_rdata;

  stitch_logic dut (.*);

  // memory model
  logic [31:0] mem [NQ][2048];
  always_ff @(posedge clk)
    for (int i = 0; i < NQ; i++)
      if (mem_b[i].en) mem_b_rdata[i] <= mem[i][mem_b[i].addr];

  // measurement function processor model: replies 3 cycles later with a
  // value derived from the ID
  logic [NQ-1:0][2:0] m_pipe;
  logic [NQ-1:0][ID_W-1:0] m_id;
  always_ff @(posedge clk)
    for (int i = 0; i < NQ; i++) begin
      m_pipe[i] <= {m_pipe[i][1:0], meas_req[i].valid};
      if (meas_req[i].valid) m_id[i] <= meas_req[i].id;
    end
  always_comb
    for (int i = 0; i < NQ; i++) begin
      meas_resp[i].ready = rst_n && m_pipe[i][2];
      meas_resp[i].data  = 32'h5EA50000 | 32'(m_id[i]);
    end

  int checks = 0, failures = 0;
  int n_fast = 0, n_stall_seen = 0, n_meas = 0, n_overrun = 0, n_b2b = 0;
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h @%0t", what, got, exp, $time);
    end
  endtask

  task automatic creg_write(int q, ctrl_reg_e r, logic [31:0] d);
    @(negedge clk);
    ctrl_req = '0; ctrl_req.we = 1; ctrl_req.ctrl_sel = 1;
    ctrl_req.addr = {3'(q), 8'd0, 3'(r)}; ctrl_req.wdata = d;
    @(negedge clk);
    ctrl_req = '0;
  endtask

  task automatic creg_read(int q, ctrl_reg_e r, output logic [31:0] d);
    @(negedge clk);
    ctrl_req = '0; ctrl_req.re = 1; ctrl_req.ctrl_sel = 1;
    ctrl_req.addr = {3'(q), 8'd0, 3'(r)};
    @(negedge clk);
    ctrl_req = '0;
    d = ctrl_rdata;
  endtask

  // one core: issue a request, wait for the reply, return data and latency
  task automatic core_req(int q, logic [7:0] id, output logic [31:0] d, output int lat);
    fproc_req[q].valid = 1; fproc_req[q].id = id;
    lat = 0;
    @(negedge clk);
    fproc_req[q].valid = 0;
    lat = 1;
    while (!fproc_resp[q].ready) begin @(negedge clk); lat++; end
    d = fproc_resp[q].data;
  endtask

  task automatic run_core(int q, int base, int count, int shots, int sets, int maxgap, bit meas_mix);
    logic [31:0] d;
    int lat;
    for (int s = 0; s < sets; s++)
      for (int k = 0; k < shots; k++)
        for (int i = 0; i < count; i++) begin
          if (meas_mix && ($urandom % 4 == 0)) begin
            core_req(q, 8'(q), d, lat);
            check("measurement reply passed back", d, 32'h5EA50000 | q);
            n_meas++;
          end
          core_req(q, PARAM_ID, d, lat);
          check("parameter value", d, mem[q][11'(base + s*count + i)]);
          if (lat == 1) n_fast++; else n_stall_seen++;
          if (!(s == 0 && k == 0 && i == 0)) check("latency <= 2 cycles", 32'(lat <= 2), 1);
          if (maxgap == 0) n_b2b++;
          else repeat ($urandom % (maxgap + 1)) @(negedge clk);
        end
    // one too many
    core_req(q, PARAM_ID, d, lat);
    check("overrun returns 0", d, 0);
    n_overrun++;
  endtask

  int base[NQ], count[NQ], shots[NQ], sets[NQ];

  initial begin
    logic [31:0] d;
    fproc_req = '0; ctrl_req = '0; rst_n = 0;
    for (int i = 0; i < NQ; i++)
      for (int w = 0; w < 2048; w++) mem[i][w] = $urandom;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // reset values
    creg_read(2, REG_SHOTS, d); check("reset SHOTS", d, 1);
    creg_read(2, REG_STATUS, d); check("reset STATUS", d, 0);
    // run 1: every qubit a different set, several shots and sets
    for (int q = 0; q < NQ; q++) begin
      base[q] = 100 * q + 2040 * (q == 7);   // qubit 7 wraps round the memory end
      count[q] = 3 + q; shots[q] = 2 + q % 3; sets[q] = 1 + q % 2;
      creg_write(q, REG_BASE, base[q]);
      creg_write(q, REG_COUNT, count[q]);
      creg_write(q, REG_SHOTS, shots[q]);
      creg_write(q, REG_SETS, sets[q]);
      creg_read(q, REG_COUNT, d); check("COUNT readback", d, count[q]);
    end
    for (int q = 0; q < NQ; q++) begin
      creg_write(q, REG_CTRL, 1);
    end
    @(negedge clk);
    for (int q = 0; q < NQ; q++) begin
      creg_read(q, REG_STATUS, d); check("running after start", d & 3, 1);
    end
    // all cores at once; qubit 0 requests back to back
    for (int q = 0; q < NQ; q++) begin
      fork
        automatic int qq = q;
        run_core(qq, base[qq], count[qq], shots[qq], sets[qq], qq == 0 ? 0 : 3, qq != 0);
      join_none
    end
    wait fork;
    for (int q = 0; q < NQ; q++) begin
      creg_read(q, REG_STATUS, d);    check("STATUS running+done+overrun", d, 7);
      creg_read(q, REG_DELIVERED, d); check("DELIVERED", d, count[q] * shots[q] * sets[q]);
    end
    // run 2 on qubit 3: switch to another set, partial count; request
    // immediately after start to exercise a stall
    creg_write(3, REG_BASE, 1500);
    creg_write(3, REG_COUNT, 2);
    creg_write(3, REG_SHOTS, 4);
    creg_write(3, REG_SETS, 1);
    @(negedge clk);
    ctrl_req = '0; ctrl_req.we = 1; ctrl_req.ctrl_sel = 1;
    ctrl_req.addr = {3'd3, 8'd0, 3'(REG_CTRL)}; ctrl_req.wdata = 1;
    @(negedge clk);
    ctrl_req = '0;
    run_core(3, 1500, 2, 4, 1, 1, 0);   // first request in the start cycle
    creg_read(3, REG_STALLS, d); check("STALLS counted", 32'(d >= 1), 1);
    creg_read(3, REG_DELIVERED, d); check("DELIVERED run 2", d, 8);
    // a channel never started answers 0
    begin
      int lat;
      logic [31:0] dd;
      rst_n = 0; @(negedge clk); rst_n = 1; @(negedge clk);
      core_req(5, PARAM_ID, dd, lat);
      check("idle channel returns 0", dd, 0);
      creg_read(5, REG_STATUS, d); check("idle overrun flagged", d, 4);
    end
    $display("fast=%0d stalled=%0d back_to_back=%0d meas=%0d overrun=%0d", n_fast, n_stall_seen, n_b2b, n_meas, n_overrun);
    check("back-to-back requests exercised", 32'(n_b2b > 0), 1);
    check("measurement pass-through exercised", 32'(n_meas > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired"); for (int i = 0; i < NQ; i++) $display("q%0d run=%b done=%b deliv=%0d pend=%b qcnt=%0d", i, dut.running[i], dut.done[i], dut.delivered[i], 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
