// rescale_classifier -- the first step of the re-scaling: separates stable cells.
//
// A cell that produced only 0s or only 1s in all K evaluations is taken to be
// stable and supplies one key bit directly (its constant value). Every other
// cell (0 < m < K) goes on to non-binary extraction, whose range is therefore
// [1/K, (K-1)/K], the re-scaled min and max of the paper. Both rules follow the
// paper; the encoding of the class is this design's (see nbpuf_pkg).
//
// Interface: count is the number of 1s seen from the cell, k is the number of
// evaluations made; cls is a combinational output; for a stable cell its
// key bit is cls == CLS_STABLE1.
module rescale_classifier
  import nbpuf_pkg::*;
#(
  parameter int unsigned CNT_W = 20
) (
  input  logic [CNT_W-1:0] count,
  input  logic [CNT_W-1:0] k,
  output cell_class_e      cls
);
  always_comb begin
    if (count == '0)      cls = CLS_STABLE0;
    else if (count == k)  cls = CLS_STABLE1;
    else                  cls = CLS_NONBIN;
  end
endmodule
