// one_freq_counters -- one counter per PUF cell, counting the 1s the cell gives
// over K evaluations (m, so that its one-frequency is m/K).
//
// All cells of the array are evaluated together, so all counters step in the
// same cycle: on acc each counter adds its cell's bit. clr zeroes them before an
// enrolment. The counts are read one cell at a time for extraction: rd_en with
// rd_idx returns that cell's count in rd_count, with rd_valid and rd_idx_q, one
// cycle later. Counting ones per cell follows the paper; the parallel counter
// bank and the registered read port are this design's. K = 2^20 - 1 in the
// paper, so 20-bit counters never wrap; an assertion checks that no counter
// passes K.
module one_freq_counters
  import nbpuf_pkg::*;
#(
  parameter int unsigned N_CELLS = N_CELLS_DEF,
  parameter int unsigned K_EVAL  = K_EVAL_DEF,
  parameter int unsigned CNT_W   = $clog2(K_EVAL + 1),
  parameter int unsigned IDX_W   = $clog2(N_CELLS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic               acc,
  input  logic [N_CELLS-1:0] bits,
  input  logic               rd_en,
  input  logic [IDX_W-1:0]   rd_idx,
  output logic               rd_valid,
  output logic [IDX_W-1:0]   rd_idx_q,
  output logic [CNT_W-1:0]   rd_count
);
  // packed, so that the bank is a set of registers rather than a RAM with N write ports
  logic [N_CELLS-1:0][CNT_W-1:0] cnt_q;

  // one counter per cell, each in its own process
  for (genvar i = 0; i < N_CELLS; i++) begin : g_cnt
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)   cnt_q[i] <= '0;
      else if (clr) cnt_q[i] <= '0;
      else if (acc) cnt_q[i] <= cnt_q[i] + CNT_W'(bits[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_idx_q <= '0;
      rd_count <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) begin
        rd_idx_q <= rd_idx;
        rd_count <= cnt_q[rd_idx];
      end
    end
  end

  // A counter stepping past K means more evaluations than the scheme defines.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  (rd_en |=> rd_count <= CNT_W'(K_EVAL)));
endmodule
