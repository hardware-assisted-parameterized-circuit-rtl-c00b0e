// tb_workloads: the evaluated protocols run through the full-size Stitch
// module (default parameters: 8 qubits, 2048 words per qubit).
//
// Each workload is one row of a table: qubits used, phases per qubit per
// circuit, shots per circuit, circuits simulated, and how many circuits are
// stored back to back and run as consecutive sets. The scheduler model
// loads each batch over AXI, programs BASE/COUNT/SHOTS/SETS and starts the
// channels; the cores then run the template: per shot, one parameter
// request per replaced virtual-Z (each followed by the template's 4 ns
// delay) and a measurement request. Every phase returned is compared with
// what was loaded, and every reply after the first must come within two
// cycles. Shots and widths are the published experiment settings; phases
// per qubit are derived from the 3-virtual-Z-per-gate decomposition
// (3(m+1) for depth-m RB, about 3 x 101 for depth-100 RC) or from the
// published parameter totals divided by circuits and width (CB, GST). Only
// a few circuits of each batch are simulated: all circuits of a structure
// use the hardware identically, so more adds time but no new behaviour.
module tb_workloads;
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
  fproc_req_t  [NQ-1:0] fproc_req;
  fproc_resp_t [NQ-1:0] fproc_resp;
  fproc_req_t  [NQ-1:0] meas_req;
  fproc_resp_t [NQ-1:0] meas_resp;

  stitch_top dut (.*);

  logic [NQ-1:0][1:0] m_pipe;
  always_ff @(posedge clk)
    for (int i = 0; i < NQ; i++) m_pipe[i] <= {m_pipe[i][0], meas_req[i].valid};
  always_comb
    for (int i = 0; i < NQ; i++) begin
      meas_resp[i].ready = rst_n && m_pipe[i][1];
      meas_resp[i].data  = 32'(i);
    end

  int checks = 0, failures = 0;
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h @%0t", what, got, exp, $time);
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

  function automatic logic [31:0] reg_addr(int q, ctrl_reg_e r);
    return {15'h0, 1'b1, 3'(q), 8'd0, 3'(r), 2'b00};
  endfunction

  logic [31:0] phase [NQ][2048];

  task automatic core_run(int q, int count, int shots, int sets, output int slow);
    logic [31:0] d;
    int lat;
    slow = 0;
    for (int s = 0; s < sets; s++)
      for (int k = 0; k < shots; k++) begin
        for (int i = 0; i < count; i++) begin
          @(negedge clk);
          fproc_req[q].valid = 1; fproc_req[q].id = PARAM_ID;
          @(negedge clk);
          fproc_req[q].valid = 0;
          lat = 1;
          while (!fproc_resp[q].ready) begin @(negedge clk); lat++; end
          check("phase", fproc_resp[q].data, phase[q][s * count + i]);
          if (lat > 2) slow++;
        end
        @(negedge clk);
        fproc_req[q].valid = 1; fproc_req[q].id = 8'(q);
        @(negedge clk);
        fproc_req[q].valid = 0;
        while (!fproc_resp[q].ready) @(negedge clk);
        check("measurement", fproc_resp[q].data, q);
      end
  endtask

  // one workload: circuits loaded in batches of 'sets' circuits
  task automatic run_workload(string name, int nq, int count, int shots, int circuits, int sets);
    longint t0, cycles = 0;
    int slow_total = 0;
    logic [31:0] d;
    for (int c = 0; c < circuits; c += sets) begin
      for (int q = 0; q < nq; q++) begin
        for (int w = 0; w < sets * count; w++) begin
          phase[q][w] = $urandom;
          axi_write({15'h0, 1'b0, 3'(q), 11'(w), 2'b00}, phase[q][w]);
        end
        axi_write(reg_addr(q, REG_BASE), 0);
        axi_write(reg_addr(q, REG_COUNT), count);
        axi_write(reg_addr(q, REG_SHOTS), shots);
        axi_write(reg_addr(q, REG_SETS), sets);
        axi_write(reg_addr(q, REG_CTRL), 1);
      end
      repeat (4) @(negedge clk);
      t0 = longint'($time);
      for (int q = 0; q < nq; q++)
        fork
          automatic int qq = q;
          automatic int sl;
          begin core_run(qq, count, shots, sets, sl); slow_total += sl; end
        join_none
      wait fork;
      cycles += (longint'($time) - t0) / 2;
      for (int q = 0; q < nq; q++) begin
        axi_read(reg_addr(q, REG_STATUS), d);
        check("channel done, no overrun", d, 3);
        axi_read(reg_addr(q, REG_DELIVERED), d);
        check("delivered", d, sets * shots * count);
      end
    end
    check("replies within two cycles", slow_total, 0);
    $display("%-4s qubits=%0d phases/qubit=%0d shots=%0d circuits=%0d: %0d phases stitched per core in %0d cycles",
             name, nq, count, shots, circuits, circuits * shots * count, cycles);
  endtask

  initial begin
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = 0; s_axi_wstrb = 0;
    fproc_req = '0;
    aresetn = 0; rst_n = 0;
    repeat (4) @(negedge aclk);
    aresetn = 1; rst_n = 1;
    //            name   qubits phases shots circuits sets
    run_workload("RB",   8, 3 * (384 + 1), 100, 1, 1);   // deepest RB circuit, 8 qubits
    run_workload("RC20", 8, 3 * 101,        50, 2, 1);   // depth 100, 50 shots per randomization
    run_workload("FRC",  8, 3 * 101,         1, 6, 6);   // 1 shot per randomization, 6 preloaded
    run_workload("CB",   8, 18,            100, 2, 1);   // 462,840 / 3,240 / 8 qubits = 18
    run_workload("GST",  2, 105,          1000, 1, 1);   // 4,091,346 / 19,488 / 2 qubits = 105
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge aclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
