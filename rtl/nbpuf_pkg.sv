// nbpuf_pkg -- shared types and constants of the non-binary PUF response generator.
//
// The generator counts how often each PUF cell evaluates to 1 over K evaluations
// (its one-frequency m/K), puts cells that were always 0 or always 1 aside as
// stable key bits, and maps every other cell to one of 2^t sections of the
// one-probability range, emitted as a t-bit Gray code.
//
// What follows the paper: 1024 cells, K = 1048575 evaluations (so a 20-bit
// count holds every possible m), alphabets of 4, 8 and 16 symbols (t = 2, 3, 4)
// and the threshold tables below, copied digit for digit from the paper's
// FPGA results (alpha = 0.0032, beta = 0.0028 beta-distribution fit).
//
// This design's own choice: thresholds are stored as unsigned Q0.32 fractions,
// THR_Q32 = round(T * 2^32), and converted to integer count thresholds with
// thr_count(): C = ceil(T_q32 * K / 2^32). A cell with m ones then falls in
// section i when exactly i thresholds satisfy m >= C. For K = 1048575 this gives
// the same C as ceil(T * K) in exact arithmetic for all 25 thresholds.
package nbpuf_pkg;

  // Paper's main configuration.
  localparam int unsigned N_CELLS_DEF = 1024;
  localparam int unsigned K_EVAL_DEF  = 1048575;
  localparam int unsigned T_MAX       = 4;                 // 16-ary is the largest alphabet
  localparam int unsigned N_THR_MAX   = (1 << T_MAX) - 1;  // 15 thresholds
  localparam int unsigned N_THR_TOTAL = 3 + 7 + 15;        // threshold registers in all banks

  // Alphabet selection: the value is t, the number of Gray bits per symbol.
  typedef enum logic [2:0] {
    MODE_Q4  = 3'd2,   // quaternary
    MODE_O8  = 3'd3,   // 8-ary
    MODE_H16 = 3'd4    // 16-ary
  } mode_e;

  // Outcome of the re-scaling step for one cell.
  typedef enum logic [1:0] {
    CLS_STABLE0 = 2'd0,  // all K evaluations gave 0
    CLS_STABLE1 = 2'd1,  // all K evaluations gave 1
    CLS_NONBIN  = 2'd2   // 0 < m < K: produces a non-binary symbol
  } cell_class_e;

  // Number of thresholds of an alphabet with t bits per symbol.
  function automatic int unsigned n_thr(input int unsigned t);
    return (1 << t) - 1;
  endfunction

  // Bank number of a mode (0: quaternary, 1: 8-ary, 2: 16-ary).
  function automatic int unsigned bank_of(input mode_e m);
    return int'(m) - 2;
  endfunction

  // First register of a bank in the flat threshold register file.
  function automatic int unsigned bank_base(input int unsigned bank);
    case (bank)
      0:       return 0;
      1:       return 3;
      default: return 10;
    endcase
  endfunction

  // Threshold tables of the paper, Q0.32. Index = flat register number:
  // 0..2 quaternary, 3..9 8-ary, 10..24 16-ary.
  localparam logic [31:0] THR_Q32 [N_THR_TOTAL] = '{
    // quaternary {0.0010616, 0.5049029, 0.998969}
    32'h004592b1, 32'h81415103, 32'hffbc6eb1,
    // 8-ary {0.000032, 0.001061, 0.032387, 0.504902, 0.968752, 0.998969, 0.999968}
    32'h000218df, 32'h004588a0, 32'h084a83b2, 32'h814141ea, 32'hf800218e, 32'hffbc6eb1,
    32'hfffde721,
    // 16-ary {0.000005, 0.000032, 0.000186, 0.001061, 0.005956, 0.032387, 0.156357,
    //         0.504902, 0.848678, 0.968752, 0.994241, 0.998969, 0.999817, 0.999968,
    //         0.999994}
    32'h000053e3, 32'h000218df, 32'h000c3090, 32'h004588a0, 32'h01865519, 32'h084a83b2,
    32'h2807032a, 32'h814141ea, 32'hd942f61f, 32'hf800218e, 32'hfe869403, 32'hffbc6eb1,
    32'hfff401c5, 32'hfffde721, 32'hffff9b56
  };

  // Count threshold for K evaluations: ceil(frac_q32 * K / 2^32).
  function automatic longint unsigned thr_count(input logic [31:0] frac_q32,
                                                input longint unsigned k);
    longint unsigned prod;
    prod = longint'(frac_q32) * k;
    return (prod + 64'hffff_ffff) >> 32;
  endfunction

endpackage
