// tb_section_quantizer -- drives the quantizer with the count thresholds of
// each alphabet (ceil(T * K) from the paper's fractions, K = 1048575) and
// compares its section index with one computed from m / K >= T in double
// precision: counts at and next to every threshold, at the ends of the
// re-scaled range, and random.
module tb_section_quantizer;
  import nbpuf_pkg::*;
  import nbpuf_tb_pkg::*;
  localparam int unsigned CNT_W = 20;
  localparam longint K = 1048575;
  int checks = 0, failures = 0;
  logic [CNT_W-1:0] count;
  mode_e            mode;
  logic [CNT_W-1:0] thr [N_THR_MAX];
  logic [T_MAX-1:0] symbol;

  section_quantizer #(.CNT_W(CNT_W)) dut (.count, .mode, .thr, .symbol);

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(int t, longint m);
    int exp;
    count = CNT_W'(m);
    #1;
    exp = ref_symbol_real(m, K, t);
    checks++;
    if (int'(symbol) != exp) begin
      failures++;
      $display("FAIL: t=%0d m=%0d symbol=%0d expected %0d", t, m, symbol, exp);
    end
  endtask

  initial begin
    for (int t = 2; t <= 4; t++) begin
      mode = mode_e'(t);
      for (int j = 0; j < N_THR_MAX; j++)
        thr[j] = (j < (1 << t) - 1) ? CNT_W'(ref_thr_count(paper_thr(t, j), K)) : CNT_W'(0);
      try(t, 1); try(t, K - 1);
      for (int j = 0; j < (1 << t) - 1; j++) begin
        automatic longint c = ref_thr_count(paper_thr(t, j), K);
        try(t, c - 1); try(t, c); try(t, c + 1);
      end
      repeat (300) try(t, longint'($urandom_range(K - 1, 1)));
      // low end, where the thresholds crowd together
      repeat (300) try(t, longint'($urandom_range(2000, 1)));
      repeat (300) try(t, K - longint'($urandom_range(2000, 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
