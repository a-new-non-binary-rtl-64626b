// gray_encoder -- maps a section index to its binary-reflected Gray code.
//
// Neighbouring sections of the one-probability range must differ in one key
// bit only, so that a cell whose one-frequency drifts across a threshold costs
// a single bit error. The paper prescribes Gray codes and lists the quaternary
// assignment 0->00, 1->01, 2->11, 3->10, which is the reflected code
// g = s ^ (s >> 1); this module uses that formula for every alphabet size.
//
// Interface: symbol in, gray out, both W bits, purely combinational (no clock).
// For a t-bit alphabet with t < W the upper bits of symbol are zero and so are
// the upper bits of gray.
module gray_encoder #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0] symbol,
  output logic [W-1:0] gray
);
  assign gray = symbol ^ (symbol >> 1);
endmodule
