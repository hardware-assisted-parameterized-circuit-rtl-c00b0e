// tb_stitch_top: end-to-end test of the Stitch module at its default size
// (8 qubits, 2048 x 32-bit parameters per qubit), used both as the
// top-level test and as the full-size test.
//
// The bench plays three outside parties:
//   - the scheduler on the ARM, which loads peeled phases and control codes
//     over AXI4-Lite (100 MHz) and starts each run;
//   - eight processor cores (500 MHz) running a circuit template: for every
//     shot they issue one parameter request (ID 10) per replaced virtual-Z,
//     two cycles apart (the request plus the 4 ns delay of the template),
//     and a mid-circuit measurement request (ID = qubit) at the end;
//   - the measurement function processor, replying a few cycles later.
// Phases are random 32-bit words generated here; the expected stream for
// each core is computed from them independently of the design.
//
// Runs: (1) one circuit per qubit, 3(m+1) phases for an m = 4+q RB-style
// circuit, several shots; (2) a structurally equivalent circuit loaded in
// another region and selected by a new BASE (switch set); (3) three
// circuits preloaded back to back and run as SETS = 3; (4) a partial
// repeat (COUNT below what was loaded); (5) qubit 0 with all 2048 words of
// its memory used. Each mechanism is counted and must occur at least once:
// prefetch hit, stall, measurement pass-through, shot repeat, set advance,
// base switch, partial set, overrun, AXI read-back of a memory word, full
// memory depth.
module tb_stitch_top;
  import stitch_pkg::*;

  logic aclk = 0, clk = 0;
  always #5 aclk = ~aclk;   // 100 MHz AXI
  always #1 clk  = ~clk;    // 500 MHz fabric
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

  // measurement function processor model
  logic [NQ-1:0][3:0] m_pipe;
  logic [NQ-1:0][7:0] m_id;
  always_ff @(posedge clk)
    for (int i = 0; i < NQ; i++) begin
      m_pipe[i] <= {m_pipe[i][2:0], meas_req[i].valid};
      if (meas_req[i].valid) m_id[i] <= meas_req[i].id;
    end
  always_comb
    for (int i = 0; i < NQ; i++) begin
      meas_resp[i].ready = rst_n && m_pipe[i][3];
      meas_resp[i].data  = 32'h0000_0F00 | 32'(m_id[i]);
    end

  int checks = 0, failures = 0;
  int ev_hit = 0, ev_stall = 0, ev_meas = 0, ev_shot_repeat = 0, ev_set_advance = 0;
  int ev_base_switch = 0, ev_partial = 0, ev_overrun = 0, ev_readback = 0, ev_full_depth = 0;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h @%0t", what, got, exp, $time);
    end
  endtask

  // ------------------------------------------------ scheduler (AXI master)
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

  function automatic logic [31:0] mem_addr(int q, int w);
    return {15'h0, 1'b0, 3'(q), 11'(w), 2'b00};
  endfunction
  function automatic logic [31:0] reg_addr(int q, ctrl_reg_e r);
    return {15'h0, 1'b1, 3'(q), 8'd0, 3'(r), 2'b00};
  endfunction

  logic [31:0] phase [NQ][2048];   // what the scheduler loaded

  task automatic load_phases(int q, int base, int n);
    for (int i = 0; i < n; i++) begin
      phase[q][(base + i) % 2048] = $urandom;
      axi_write(mem_addr(q, (base + i) % 2048), phase[q][(base + i) % 2048]);
    end
  endtask

  task automatic program_chan(int q, int base, int count, int shots, int sets);
    axi_write(reg_addr(q, REG_BASE), base);
    axi_write(reg_addr(q, REG_COUNT), count);
    axi_write(reg_addr(q, REG_SHOTS), shots);
    axi_write(reg_addr(q, REG_SETS), sets);
  endtask

  // ------------------------------------------------ processor cores
  task automatic core_req(int q, logic [7:0] id, output logic [31:0] d, output int lat);
    @(negedge clk);
    fproc_req[q].valid = 1; fproc_req[q].id = id;
    @(negedge clk);
    fproc_req[q].valid = 0;
    lat = 1;
    while (!fproc_resp[q].ready) begin @(negedge clk); lat++; end
    d = fproc_resp[q].data;
  endtask

  // run the template: sets x shots x count phases, measurement per shot
  task automatic run_circuit(int q, int base, int count, int shots, int sets, bit overrun);
    logic [31:0] d;
    int lat;
    for (int s = 0; s < sets; s++) begin
      if (s > 0) ev_set_advance++;
      for (int k = 0; k < shots; k++) begin
        if (k > 0) ev_shot_repeat++;
        for (int i = 0; i < count; i++) begin
          core_req(q, PARAM_ID, d, lat);
          check("stitched phase", d, phase[q][(base + s * count + i) % 2048]);
          if (lat == 1) ev_hit++; else ev_stall++;
          if (k > 0 || i > 0) check("phase within two cycles", 32'(lat <= 2), 1);
          @(negedge clk);   // the template's 4 ns delay after alu_fproc
        end
        core_req(q, 8'(q), d, lat);   // mid-circuit measurement of qubit q
        check("measurement result", d, 32'h0F00 | q);
        ev_meas++;
      end
    end
    if (overrun) begin
      core_req(q, PARAM_ID, d, lat);
      check("request past the end returns 0", d, 0);
      ev_overrun++;
    end
  endtask

  task automatic start_all(int nq);
    for (int q = 0; q < nq; q++) axi_write(reg_addr(q, REG_CTRL), 1);
    repeat (20) @(negedge clk);   // let the prefetch fill before the cores run
  endtask

  int base[NQ], count[NQ];

  initial begin
    logic [31:0] d;
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = 0; s_axi_wstrb = 0;
    fproc_req = '0;
    aresetn = 0; rst_n = 0;
    repeat (4) @(negedge aclk);
    aresetn = 1; rst_n = 1;

    // (1) one RB-style circuit per qubit: 3(m+1) phases, 4 shots
    for (int q = 0; q < NQ; q++) begin
      count[q] = 3 * (4 + q + 1);
      base[q]  = 0;
      load_phases(q, 0, count[q]);
      program_chan(q, 0, count[q], 4, 1);
    end
    start_all(NQ);
    for (int q = 0; q < NQ; q++)
      fork automatic int qq = q; run_circuit(qq, 0, count[qq], 4, 1, qq == 2); join_none
    wait fork;
    for (int q = 0; q < NQ; q++) begin
      axi_read(reg_addr(q, REG_DELIVERED), d); check("DELIVERED run 1", d, 4 * count[q]);
      axi_read(reg_addr(q, REG_STATUS), d);    check("STATUS run 1", d, q == 2 ? 7 : 3);
    end
    // scheduler debug read of a few loaded words
    for (int q = 0; q < NQ; q++) begin
      axi_read(mem_addr(q, 3), d); check("AXI read-back of a phase", d, phase[q][3]);
      ev_readback++;
    end

    // (2) an equivalent circuit in another region: switch set by BASE
    for (int q = 0; q < NQ; q++) begin
      load_phases(q, 1024, count[q]);
      program_chan(q, 1024, count[q], 3, 1);
    end
    start_all(NQ);
    for (int q = 0; q < NQ; q++)
      fork automatic int qq = q; run_circuit(qq, 1024, count[qq], 3, 1, 0); join_none
    wait fork;
    ev_base_switch++;

    // (3) three equivalent circuits preloaded back to back, run as SETS = 3
    for (int q = 0; q < 4; q++) begin
      load_phases(q, 200, 3 * 12);
      program_chan(q, 200, 12, 2, 3);
    end
    start_all(4);
    for (int q = 0; q < 4; q++)
      fork automatic int qq = q; run_circuit(qq, 200, 12, 2, 3, 1); join_none
    wait fork;

    // (4) partial repeat: only the first 5 of the 12 words at 200
    program_chan(5, 200, 5, 3, 1);
    load_phases(5, 200, 12);
    start_all(6);   // re-arms 0..5; only qubit 5 runs
    run_circuit(5, 200, 5, 3, 1, 1);
    ev_partial++;
    axi_read(reg_addr(5, REG_STATUS), d); check("partial run done+overrun", d, 7);

    // (5) qubit 0 uses its whole memory: 2048 phases, one shot
    load_phases(0, 0, 2048);
    program_chan(0, 0, 2048, 1, 1);
    start_all(1);
    run_circuit(0, 0, 2048, 1, 1, 1);
    ev_full_depth++;
    axi_read(reg_addr(0, REG_DELIVERED), d); check("DELIVERED full depth", d, 2048);

    // a stall: request at once after start, before the prefetch has filled
    program_chan(1, 1024, count[1], 1, 1);
    fork
      axi_write(reg_addr(1, REG_CTRL), 1);
      begin
        // issue the request in the first cycle after the start pulse
        while (dut.u_stitch.start[1] !== 1'b1) @(negedge clk);
        fproc_req[1].valid = 1; fproc_req[1].id = PARAM_ID;
        @(negedge clk);
        fproc_req[1].valid = 0;
        while (!fproc_resp[1].ready) @(negedge clk);
        check("stalled request answered", fproc_resp[1].data, phase[1][1024]);
      end
    join
    axi_read(reg_addr(1, REG_STALLS), d);
    if (d > 0) ev_stall++;

    $display("events: hit=%0d stall=%0d meas=%0d shot_repeat=%0d set_advance=%0d base_switch=%0d partial=%0d overrun=%0d readback=%0d full_depth=%0d",
             ev_hit, ev_stall, ev_meas, ev_shot_repeat, ev_set_advance, ev_base_switch, ev_partial, ev_overrun, ev_readback, ev_full_depth);
    check("prefetch hit seen",      32'(ev_hit > 0), 1);
    check("stall seen",             32'(ev_stall > 0), 1);
    check("measurement seen",       32'(ev_meas > 0), 1);
    check("shot repeat seen",       32'(ev_shot_repeat > 0), 1);
    check("set advance seen",       32'(ev_set_advance > 0), 1);
    check("base switch seen",       32'(ev_base_switch > 0), 1);
    check("partial set seen",       32'(ev_partial > 0), 1);
    check("overrun seen",           32'(ev_overrun > 0), 1);
    check("read-back seen",         32'(ev_readback > 0), 1);
    check("full depth seen",        32'(ev_full_depth > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge aclk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
