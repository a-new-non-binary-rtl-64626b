// threshold_regs -- register file holding the count thresholds of the three
// alphabets (3 quaternary, 7 8-ary, 15 16-ary entries, 25 in all).
//
// The thresholds come from a beta-distribution fit of each device's
// one-probabilities, made outside this circuit, so they are writable. At reset
// every register takes the paper's value for its alphabet, converted to a count
// for K evaluations: ceil(T * K) (see nbpuf_pkg::thr_count). The values are the
// paper's; storing them as counts, the flat register layout and the write port
// are this design's.
//
// Interface: one write port (we, waddr 0..24 in the flat layout of nbpuf_pkg,
// wdata a count), written on the rising clock edge. thr presents the thresholds
// of the bank selected by mode, combinationally; entries above 2^t - 1 read as
// all-ones and are ignored by section_quantizer.
module threshold_regs
  import nbpuf_pkg::*;
#(
  parameter int unsigned K_EVAL = K_EVAL_DEF,
  parameter int unsigned CNT_W  = $clog2(K_EVAL + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [4:0]       waddr,
  input  logic [CNT_W-1:0] wdata,
  input  mode_e            mode,
  output logic [CNT_W-1:0] thr [N_THR_MAX]
);
  logic [CNT_W-1:0] regs_q [N_THR_TOTAL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_THR_TOTAL; i++)
        regs_q[i] <= CNT_W'(thr_count(THR_Q32[i], longint'(K_EVAL)));
    end else if (we && (32'(waddr) < N_THR_TOTAL)) begin
      regs_q[waddr] <= wdata;
    end
  end

  always_comb begin
    int unsigned base, nthr;
    base = bank_base(bank_of(mode));
    nthr = n_thr(int'(mode));
    for (int j = 0; j < N_THR_MAX; j++) begin
      if (j < nthr) thr[j] = regs_q[(base + j) % N_THR_TOTAL];
      else          thr[j] = '1;
    end
  end
endmodule
