// nbpuf_keygen -- non-binary PUF response generator, top level.
//
// The PUF array lies outside this module: puf_eval asks it for one evaluation
// of all N_CELLS cells, and it answers with puf_bits and a one-cycle puf_valid.
// An enrolment (start_enroll) counts, per cell, the 1s of K_EVAL evaluations,
// then extracts; start_extract extracts again from the same counts, for example
// with another alphabet. Extraction walks the cells in order, one per cycle:
//
//   count m --> rescale_classifier: m = 0 or m = K -> stable cell, 1 key bit
//           \-> section_quantizer (thresholds of the selected alphabet)
//                 --> gray_encoder --> t key bits
//
// and key_assembler strings the bits together in cell order. Each cell's
// result also appears on the res_* outputs in the cycle it is appended, so a
// host can record which cells were stable and which symbol each gave.
//
// Ports: mode selects t (2: quaternary, 3: 8-ary, 4: 16-ary) and is sampled at
// start; thr_we/thr_waddr/thr_wdata overwrite a count threshold (flat layout
// in nbpuf_pkg), for a device whose beta fit differs from the paper's; key
// words are read through key_rd_addr/key_rd_data, key_len bits being valid.
// Timing, with a PUF array answering one cycle after puf_eval: done pulses
// 2*K_EVAL + N_CELLS + 3 cycles after the start_enroll cycle, and
// N_CELLS + 3 cycles after a start_extract cycle; res_valid runs for N_CELLS
// consecutive cycles before that.
//
// The defaults are the paper's FPGA build: 1024 cells, K = 1048575, its three
// threshold tables. The sequencing, handshake and key layout are this design's.
module nbpuf_keygen
  import nbpuf_pkg::*;
#(
  parameter int unsigned N_CELLS = N_CELLS_DEF,
  parameter int unsigned K_EVAL  = K_EVAL_DEF,
  parameter int unsigned CNT_W   = $clog2(K_EVAL + 1),
  parameter int unsigned IDX_W   = $clog2(N_CELLS),
  parameter int unsigned KEY_MAX = N_CELLS * T_MAX,
  parameter int unsigned LEN_W   = $clog2(KEY_MAX + 1),
  parameter int unsigned CEL_W   = $clog2(N_CELLS + 1),
  parameter int unsigned N_WORDS = (KEY_MAX + 31) / 32,
  parameter int unsigned WA_W    = (N_WORDS > 1) ? $clog2(N_WORDS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // control
  input  logic               start_enroll,
  input  logic               start_extract,
  input  logic [2:0]         mode,
  output logic               busy,
  output logic               done,
  output logic [CNT_W-1:0]   evals_done,
  // PUF array
  output logic               puf_eval,
  input  logic [N_CELLS-1:0] puf_bits,
  input  logic               puf_valid,
  // threshold programming
  input  logic               thr_we,
  input  logic [4:0]         thr_waddr,
  input  logic [CNT_W-1:0]   thr_wdata,
  // per-cell results
  output logic               res_valid,
  output logic [IDX_W-1:0]   res_idx,
  output logic [CNT_W-1:0]   res_count,
  output cell_class_e        res_cls,
  output logic [T_MAX-1:0]   res_symbol,
  output logic [T_MAX-1:0]   res_gray,
  // key
  input  logic [WA_W-1:0]    key_rd_addr,
  output logic [31:0]        key_rd_data,
  output logic [LEN_W-1:0]   key_len,
  output logic [CEL_W-1:0]   n_stable0,
  output logic [CEL_W-1:0]   n_stable1,
  output logic [CEL_W-1:0]   n_nonbin
);
  mode_e            mode_q;
  logic             cnt_clr, cnt_acc, rd_en, key_clr;
  logic [IDX_W-1:0] rd_idx;
  logic [CNT_W-1:0] thr [N_THR_MAX];

  nbpuf_eval_ctrl #(.N_CELLS(N_CELLS), .K_EVAL(K_EVAL), .IDX_W(IDX_W), .EVC_W(CNT_W)) u_ctrl (
    .clk, .rst_n, .start_enroll, .start_extract, .mode, .mode_q, .busy, .done,
    .puf_eval, .puf_valid, .cnt_clr, .cnt_acc, .rd_en, .rd_idx, .key_clr, .evals_done
  );

  one_freq_counters #(.N_CELLS(N_CELLS), .K_EVAL(K_EVAL), .CNT_W(CNT_W), .IDX_W(IDX_W)) u_cnt (
    .clk, .rst_n, .clr(cnt_clr), .acc(cnt_acc), .bits(puf_bits),
    .rd_en, .rd_idx, .rd_valid(res_valid), .rd_idx_q(res_idx), .rd_count(res_count)
  );

  threshold_regs #(.K_EVAL(K_EVAL), .CNT_W(CNT_W)) u_thr (
    .clk, .rst_n, .we(thr_we), .waddr(thr_waddr), .wdata(thr_wdata), .mode(mode_q), .thr
  );

  rescale_classifier #(.CNT_W(CNT_W)) u_cls (
    .count(res_count), .k(CNT_W'(K_EVAL)), .cls(res_cls)
  );

  section_quantizer #(.CNT_W(CNT_W)) u_quant (
    .count(res_count), .mode(mode_q), .thr, .symbol(res_symbol)
  );

  gray_encoder #(.W(T_MAX)) u_gray (
    .symbol(res_symbol), .gray(res_gray)
  );

  key_assembler #(.N_CELLS(N_CELLS), .KEY_MAX(KEY_MAX), .LEN_W(LEN_W), .CEL_W(CEL_W),
                  .N_WORDS(N_WORDS), .WA_W(WA_W)) u_key (
    .clk, .rst_n, .clr(key_clr), .in_valid(res_valid), .cls(res_cls), .gray(res_gray),
    .mode(mode_q), .rd_addr(key_rd_addr), .rd_word(key_rd_data), .key_len,
    .n_stable0, .n_stable1, .n_nonbin
  );
endmodule
