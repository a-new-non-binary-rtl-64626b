// key_assembler -- builds the key from the per-cell results, in cell order.
//
// A stable cell contributes its constant bit; a non-binary cell contributes
// the t bits of its Gray-coded symbol, most significant bit first. Using the
// stable bits directly and the Gray bits of the other cells as key material
// follows the paper; putting them into one bit string in cell order is this
// design's choice (the paper does not fix a layout). Bit n of the key is
// key_q[n]; key_len says how many bits are valid. With N cells the key is at
// most N * T_MAX bits long.
//
// The assembler also counts stable-0, stable-1 and non-binary cells, the three
// populations the scheme is built around.
//
// Interface: clr empties the buffer and the counters; in_valid with cls, gray
// and t appends one cell's bits at the rising edge (one cell per cycle). The
// key is read in 32-bit words: rd_word = key bits 32*rd_addr .. 32*rd_addr+31,
// combinational.
module key_assembler
  import nbpuf_pkg::*;
#(
  parameter int unsigned N_CELLS = N_CELLS_DEF,
  parameter int unsigned KEY_MAX = N_CELLS * T_MAX,
  parameter int unsigned LEN_W   = $clog2(KEY_MAX + 1),
  parameter int unsigned CEL_W   = $clog2(N_CELLS + 1),
  parameter int unsigned N_WORDS = (KEY_MAX + 31) / 32,
  parameter int unsigned WA_W    = (N_WORDS > 1) ? $clog2(N_WORDS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             in_valid,
  input  cell_class_e      cls,
  input  logic [T_MAX-1:0] gray,
  input  mode_e            mode,
  input  logic [WA_W-1:0]  rd_addr,
  output logic [31:0]      rd_word,
  output logic [LEN_W-1:0] key_len,
  output logic [CEL_W-1:0] n_stable0,
  output logic [CEL_W-1:0] n_stable1,
  output logic [CEL_W-1:0] n_nonbin
);
  logic [N_WORDS*32-1:0] key_q;
  logic [LEN_W-1:0]      len_q;

  localparam int unsigned KEY_W = N_WORDS * 32;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_q     <= '0;
      len_q     <= '0;
      n_stable0 <= '0;
      n_stable1 <= '0;
      n_nonbin  <= '0;
    end else if (clr) begin
      key_q     <= '0;
      len_q     <= '0;
      n_stable0 <= '0;
      n_stable1 <= '0;
      n_nonbin  <= '0;
    end else if (in_valid) begin
      unique case (cls)
        CLS_STABLE0: begin
          key_q[32'(len_q) % KEY_W] <= 1'b0;
          len_q        <= len_q + 1'b1;
          n_stable0    <= n_stable0 + 1'b1;
        end
        CLS_STABLE1: begin
          key_q[32'(len_q) % KEY_W] <= 1'b1;
          len_q        <= len_q + 1'b1;
          n_stable1    <= n_stable1 + 1'b1;
        end
        default: begin
          for (int j = 0; j < T_MAX; j++)
            if (j < int'(mode)) key_q[(32'(len_q) + j) % KEY_W] <= gray[int'(mode) - 1 - j];
          len_q    <= len_q + LEN_W'(mode);
          n_nonbin <= n_nonbin + 1'b1;
        end
      endcase
    end
  end

  assign key_len = len_q;
  assign rd_word = key_q[32*rd_addr +: 32];

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  in_valid |-> 32'(len_q) + T_MAX <= KEY_MAX);
endmodule
