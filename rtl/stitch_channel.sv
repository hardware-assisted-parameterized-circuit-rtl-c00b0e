// stitch_channel: the stitch logic for one physical qubit.
//
// The qubit's processor core asks for its next virtual-Z phase with an fproc
// request whose ID is 10 (the alu_fproc instruction that replaced each
// virtual-Z gate of the circuit template). The channel answers with the
// next word of the qubit's parameter memory, in program order. Any other ID
// (0..7 are mid-circuit measurement requests) is passed straight through to
// the existing measurement function processor and its reply is merged back,
// so feed-forward keeps working.
//
// Sequencing, set by the scheduler's control codes before a run (cfg, then
// a start pulse): a circuit uses COUNT parameters starting at word BASE; the
// same COUNT words are delivered again for each of SHOTS shots; then, if
// SETS > 1, the channel moves on to the next COUNT words (BASE += COUNT) and
// repeats, so several structurally-equivalent circuits can be preloaded
// back to back. A COUNT smaller than what was loaded repeats a partial set;
// a new BASE switches to another set. This register-level encoding is this
// design's own; the published design states only that the stitch logic
// counts the parameters of a circuit, repeats them for the given number of
// shots, and can repeat a partial set or switch set from control codes.
//
// Prefetch: a fetch engine keeps a two-entry buffer filled from memory port
// B ahead of the requests, so a request is answered on the next cycle
// (request at cycle t, resp.ready at t+1), within the two cycles (4 ns) the
// published design quotes, and back-to-back requests on successive cycles
// are sustained. A request that finds nothing buffered waits (counted as a
// stall) and is answered as soon as the word arrives. A request after the
// last parameter of the last set, or before start, is answered with 0 and
// sets the sticky overrun flag, so the core never hangs.
//
// Interface: one outstanding request per core (checked by an assertion).
// All state is reset synchronously (rst_n low) and re-armed by start.
module stitch_channel
  import stitch_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  chan_cfg_t         cfg,
  input  logic              start,
  // fproc interface to the processor core
  input  fproc_req_t        req,
  output fproc_resp_t       resp,
  // pass-through to the measurement function processor
  output fproc_req_t        meas_req,
  input  fproc_resp_t       meas_resp,
  // port B of the parameter memory
  output mem_port_t         mem_b,
  input  logic [DATA_W-1:0] mem_rdata,
  // status
  output logic              running,
  output logic              done,
  output logic              overrun,
  output logic [31:0]       delivered,
  output logic [31:0]       stalls
);

  // ---------------------------------------------------------- fetch engine
  logic [MEM_AW:0]   f_idx;    // index inside the current set
  logic [SHOT_W-1:0] f_shot;
  logic [SET_W-1:0]  f_set;
  logic [MEM_AW-1:0] f_base;
  logic              f_done;   // every word of every shot and set fetched
  logic              inflight; // a read was issued last cycle

  // ---------------------------------------------------------- prefetch buffer
  logic [DATA_W-1:0] q0, q1;
  logic [1:0]        q_cnt;

  // ---------------------------------------------------------- request side
  logic              is_param, pending, want, avail, pop, fetch, give_zero;
  logic [DATA_W-1:0] head;
  logic              p_ready;
  logic [DATA_W-1:0] p_data;

  assign is_param  = req.valid && (req.id == PARAM_ID);
  assign want      = pending || is_param;
  assign avail     = (q_cnt != 2'd0) || inflight;
  assign head      = (q_cnt != 2'd0) ? q0 : mem_rdata;
  assign pop       = want && avail;
  // nothing buffered, nothing coming: answer 0 and flag the overrun
  assign give_zero = want && !avail && (!running || f_done);
  assign fetch     = running && !f_done &&
                     ({1'b0, q_cnt} + {2'b0, inflight} - {2'b0, pop}) < 3'd2;

  assign mem_b.en    = fetch;
  assign mem_b.we    = 1'b0;
  assign mem_b.addr  = f_base + f_idx[MEM_AW-1:0];
  assign mem_b.wdata = '0;

  assign done = running && f_done && (q_cnt == 2'd0) && !inflight;

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      f_idx     <= '0;
      f_shot    <= '0;
      f_set     <= '0;
      f_base    <= start ? cfg.base : '0;
      f_done    <= 1'b0;
      inflight  <= 1'b0;
      q0        <= '0;
      q1        <= '0;
      q_cnt     <= '0;
      pending   <= start && is_param;  // a request in the start cycle waits
      p_ready   <= 1'b0;
      p_data    <= '0;
      overrun   <= 1'b0;
      delivered <= '0;
      stalls    <= {31'b0, start && is_param};
      running   <= start && (cfg.count != '0) && (cfg.shots != '0) && (cfg.sets != '0);
    end else begin
      // fetch pointer
      inflight <= fetch;
      if (fetch) begin
        if (f_idx == cfg.count - 1'b1) begin
          f_idx <= '0;
          if (f_shot == cfg.shots - 1'b1) begin
            f_shot <= '0;
            if (f_set == cfg.sets - 1'b1) f_done <= 1'b1;
            else begin
              f_set  <= f_set + 1'b1;
              f_base <= f_base + cfg.count[MEM_AW-1:0];
            end
          end else begin
            f_shot <= f_shot + 1'b1;
          end
        end else begin
          f_idx <= f_idx + 1'b1;
        end
      end

      // prefetch buffer: push the word read last cycle, pop the head
      unique case ({pop, inflight})
        2'b01: begin  // push only
          if (q_cnt == 2'd0) q0 <= mem_rdata; else q1 <= mem_rdata;
          q_cnt <= q_cnt + 1'b1;
        end
        2'b10: begin  // pop only
          q0    <= q1;
          q_cnt <= q_cnt - 1'b1;
        end
        2'b11: begin  // push and pop
          if (q_cnt == 2'd1)      q0 <= mem_rdata;
          else if (q_cnt == 2'd2) begin q0 <= q1; q1 <= mem_rdata; end
          // q_cnt == 0: the arriving word is handed straight out
        end
        default: ;
      endcase

      // reply to the core
      p_ready <= pop || give_zero;
      p_data  <= pop ? head : '0;
      if (pop) delivered <= delivered + 1'b1;
      if (give_zero) overrun <= 1'b1;
      pending <= want && !pop && !give_zero;
      if (is_param && !pending && !avail && !give_zero) stalls <= stalls + 1'b1;
    end
  end

  // ---------------------------------------------------------- measurement
  assign meas_req.valid = req.valid && (req.id != PARAM_ID);
  assign meas_req.id    = req.id;

  assign resp.ready = p_ready || meas_resp.ready;
  assign resp.data  = p_ready ? p_data : meas_resp.data;

  a_one_outstanding: assert property (@(posedge clk) disable iff (!rst_n)
    !(pending && req.valid))
    else $error("stitch_channel: new request while a parameter request is pending");
  a_no_reply_clash: assert property (@(posedge clk) disable iff (!rst_n)
    !(p_ready && meas_resp.ready))
    else $error("stitch_channel: parameter and measurement replies collide");
  a_buffer_bound: assert property (@(posedge clk) disable iff (!rst_n) q_cnt <= 2'd2);

endmodule
