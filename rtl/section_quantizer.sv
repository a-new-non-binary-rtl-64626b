// section_quantizer -- finds the section of the one-probability range a cell's
// one-frequency falls in.
//
// The 2^t - 1 thresholds split [min, max] into 2^t sections of equal area under
// the fitted one-probability density. A cell with m ones in K evaluations has
// one-frequency m/K; it belongs to section i when T(i-1) <= m/K < T(i), with
// section 0 starting at min and the last section closed at max (paper, Fig. 2).
// The comparison is done on integer counts: thr[j] holds ceil(T(j) * K), so
// m >= thr[j] is exactly m/K >= T(j). The section index is the number of
// thresholds the count reaches, which equals the index for ascending thresholds.
// The comparison rule is the paper's; integer thresholds are this design's.
//
// Interface: count (m), mode (t = 2, 3 or 4), thr (the 15 count thresholds of
// the selected alphabet, only the first 2^t - 1 are used), symbol out.
// Combinational: 15 comparators and a population count.
module section_quantizer
  import nbpuf_pkg::*;
#(
  parameter int unsigned CNT_W = 20
) (
  input  logic [CNT_W-1:0] count,
  input  mode_e            mode,
  input  logic [CNT_W-1:0] thr [N_THR_MAX],
  output logic [T_MAX-1:0] symbol
);
  logic [N_THR_MAX-1:0] reached;
  int unsigned          nthr;

  always_comb begin
    nthr   = n_thr(int'(mode));
    symbol = '0;
    for (int j = 0; j < N_THR_MAX; j++) begin
      reached[j] = (j < nthr) && (count >= thr[j]);
      symbol     = symbol + T_MAX'(reached[j]);
    end
  end
endmodule
