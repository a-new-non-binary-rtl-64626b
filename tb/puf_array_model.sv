// puf_array_model -- behavioural model of an array of SR-latch PUF cells, for
// simulation only.
//
// A real SR-latch PUF cell is a cross-coupled latch that is forced into its
// forbidden state and released; manufacturing mismatch decides, more or less
// reliably, which state it settles in. Here each cell is given either
//   - a one-probability p (unsigned Q0.32): every evaluation gives 1 when a
//     fresh $urandom falls below p, or
//   - an exact number m of 1s per K evaluations: the cell then gives 1 in
//     exactly m of every K consecutive evaluations, spread evenly by a
//     Bresenham accumulator (acc += m; a 1 whenever acc reaches K).
// Cells with p = 0 / m = 0 always give 0, cells with p = 2^32-1 / m = K always
// give 1.
//
// Interface: a one-cycle eval pulse starts an evaluation of all cells; lat
// cycles after the eval cycle (lat >= 1, set with set_latency) bits holds the
// new outputs and valid is high for that one cycle. Cells are configured with set_prob / set_count before
// the first evaluation; all cells start as constant 0.
module puf_array_model #(
  parameter int unsigned N_CELLS = 1024,
  parameter int unsigned K_EVAL  = 1048575
) (
  input  logic               clk,
  input  logic               eval,
  output logic [N_CELLS-1:0] bits,
  output logic               valid
);
  typedef enum logic [1:0] {C_CONST, C_PROB, C_COUNT} cell_kind_e;

  cell_kind_e      kind     [N_CELLS];
  logic            constbit [N_CELLS];
  int unsigned     prob     [N_CELLS];
  longint unsigned target   [N_CELLS];
  longint unsigned acc      [N_CELLS];
  int unsigned     active   [$];      // cells that are not constant
  int unsigned     lat = 1;
  int unsigned     pending = 0;       // cycles until the answer, 0: none

  initial begin
    for (int i = 0; i < N_CELLS; i++) begin
      kind[i] = C_CONST; constbit[i] = 1'b0; prob[i] = 0; target[i] = 0; acc[i] = 0;
    end
    bits  = '0;
    valid = 1'b0;
  end

  function automatic void drop_active(int unsigned i);
    foreach (active[j]) if (active[j] == i) begin active.delete(j); return; end
  endfunction

  function automatic void set_latency(int unsigned l);
    lat = (l < 1) ? 1 : l;
  endfunction

  function automatic void set_prob(int unsigned i, int unsigned p_q32);
    drop_active(i);
    if (p_q32 == 0 || p_q32 == 32'hffff_ffff) begin
      kind[i] = C_CONST; constbit[i] = (p_q32 != 0); bits[i] = constbit[i];
    end else begin
      kind[i] = C_PROB; prob[i] = p_q32; active.push_back(i);
    end
  endfunction

  function automatic void set_count(int unsigned i, longint unsigned m);
    drop_active(i);
    if (m == 0 || m >= K_EVAL) begin
      kind[i] = C_CONST; constbit[i] = (m != 0); bits[i] = constbit[i];
    end else begin
      kind[i] = C_COUNT; target[i] = m; acc[i] = 0; active.push_back(i);
    end
  endfunction

  function automatic void evaluate();
    foreach (active[j]) begin
      int unsigned i;
      i = active[j];
      if (kind[i] == C_PROB) begin
        bits[i] = ($urandom < prob[i]);
      end else begin
        acc[i] += target[i];
        if (acc[i] >= K_EVAL) begin acc[i] -= K_EVAL; bits[i] = 1'b1; end
        else bits[i] = 1'b0;
      end
    end
  endfunction

  always @(posedge clk) begin
    valid <= 1'b0;
    if (eval) begin
      if (lat == 1) begin evaluate(); valid <= 1'b1; end
      pending <= lat - 1;
    end else if (pending > 0) begin
      if (pending == 1) begin evaluate(); valid <= 1'b1; end
      pending <= pending - 1;
    end
  end
endmodule
