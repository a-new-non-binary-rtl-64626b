// nbpuf_eval_ctrl -- sequencer of enrolment and extraction.
//
// Enrolment (start_enroll): clears the one-frequency counters, then makes K
// evaluations of the whole PUF array. Each evaluation is a one-cycle puf_eval
// pulse; the array answers with puf_valid (any number of cycles later, at least
// one), in which cycle cnt_acc makes the counters take its bits. After the K-th
// answer the sequencer goes straight on to extraction.
// Extraction (start_extract, or the end of an enrolment): clears the key buffer
// (key_clr) and reads the counters of cells 0 .. N-1, one per cycle (rd_en,
// rd_idx); two cycles after the last read done pulses for one cycle.
// Extraction alone re-uses the counts of the last enrolment, so the same
// observations can be turned into 4-, 8- and 16-ary responses in turn.
//
// Timing: with a PUF array answering one cycle after puf_eval, done
// pulses 2K + N + 3 cycles after the start_enroll cycle, N + 3 after start_extract.
// Collecting K outputs per cell and extracting afterwards follows the paper;
// the handshake, the one-evaluation-at-a-time pacing and the re-extraction
// command are this design's. The mode is sampled at start and held in mode_q;
// values outside 2..4 are clamped to the nearest alphabet.
module nbpuf_eval_ctrl
  import nbpuf_pkg::*;
#(
  parameter int unsigned N_CELLS = N_CELLS_DEF,
  parameter int unsigned K_EVAL  = K_EVAL_DEF,
  parameter int unsigned IDX_W   = $clog2(N_CELLS),
  parameter int unsigned EVC_W   = $clog2(K_EVAL + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_enroll,
  input  logic             start_extract,
  input  logic [2:0]       mode,
  output mode_e            mode_q,
  output logic             busy,
  output logic             done,
  // PUF array
  output logic             puf_eval,
  input  logic             puf_valid,
  // one-frequency counters
  output logic             cnt_clr,
  output logic             cnt_acc,
  output logic             rd_en,
  output logic [IDX_W-1:0] rd_idx,
  // key buffer
  output logic             key_clr,
  output logic [EVC_W-1:0] evals_done
);
  typedef enum logic [2:0] {S_IDLE, S_ISSUE, S_WAIT, S_SCAN, S_DRAIN, S_DONE} state_e;

  state_e           state_q, state_d;
  logic [IDX_W-1:0] idx_q, idx_d;
  logic [EVC_W-1:0] ev_q, ev_d;
  logic [1:0]       drain_q, drain_d;
  mode_e            mode_d;

  function automatic mode_e clamp_mode(input logic [2:0] m);
    if (m <= 3'd2)      return MODE_Q4;
    else if (m == 3'd3) return MODE_O8;
    else                return MODE_H16;
  endfunction

  always_comb begin
    state_d  = state_q;
    idx_d    = idx_q;
    ev_d     = ev_q;
    drain_d  = drain_q;
    mode_d   = mode_q;
    puf_eval = 1'b0;
    cnt_clr  = 1'b0;
    cnt_acc  = 1'b0;
    rd_en    = 1'b0;
    key_clr  = 1'b0;
    done     = 1'b0;
    unique case (state_q)
      S_IDLE: begin
        if (start_enroll) begin
          mode_d  = clamp_mode(mode);
          cnt_clr = 1'b1;
          ev_d    = '0;
          state_d = S_ISSUE;
        end else if (start_extract) begin
          mode_d  = clamp_mode(mode);
          key_clr = 1'b1;
          idx_d   = '0;
          state_d = S_SCAN;
        end
      end
      S_ISSUE: begin
        puf_eval = 1'b1;
        state_d  = S_WAIT;
      end
      S_WAIT: begin
        if (puf_valid) begin
          cnt_acc = 1'b1;
          ev_d    = ev_q + 1'b1;
          if (ev_q == EVC_W'(K_EVAL - 1)) begin
            key_clr = 1'b1;
            idx_d   = '0;
            state_d = S_SCAN;
          end else begin
            state_d = S_ISSUE;
          end
        end
      end
      S_SCAN: begin
        rd_en = 1'b1;
        idx_d = idx_q + 1'b1;
        if (idx_q == IDX_W'(N_CELLS - 1)) begin
          drain_d = 2'd1;
          state_d = S_DRAIN;
        end
      end
      S_DRAIN: begin
        // one cycle in the counter read port, one in the key buffer
        drain_d = drain_q - 1'b1;
        if (drain_q == 2'd0) state_d = S_DONE;
      end
      S_DONE: begin
        done    = 1'b1;
        state_d = S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      idx_q   <= '0;
      ev_q    <= '0;
      drain_q <= '0;
      mode_q  <= MODE_Q4;
    end else begin
      state_q <= state_d;
      idx_q   <= idx_d;
      ev_q    <= ev_d;
      drain_q <= drain_d;
      mode_q  <= mode_d;
    end
  end

  assign busy       = (state_q != S_IDLE);
  assign rd_idx     = idx_q;
  assign evals_done = ev_q;

  // The PUF array may only answer an evaluation that was asked for.
  a_valid_when_waiting: assert property (@(posedge clk) disable iff (!rst_n)
                                         puf_valid |-> state_q == S_WAIT);
endmodule
