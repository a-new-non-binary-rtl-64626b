// tb_nbpuf_keygen_repeat -- repeated enrolments, a scaled-down form of the
// error-rate experiment: the same PUF array is enrolled 20 times and each
// enrolment's 16-ary responses are compared with the first one (the
// benchmark).
//
// 64 cells, K = 4095: 16 constant cells and 48 cells whose one-probability sits
// right on a 16-ary threshold, so that their section changes between
// enrolments. Every enrolment is checked cell by cell against the
// reference model (from the testbench's own count of the PUF outputs). Against
// the benchmark it checks that a stable cell stays stable with the same bit,
// and that a cell whose section moves by one changes exactly one Gray bit, so
// the key differs from the benchmark key in exactly as many bits as there are
// adjacent-section symbol errors. Symbol and bit errors are reported.
module tb_nbpuf_keygen_repeat;
  import nbpuf_pkg::*;
  import nbpuf_tb_pkg::*;
  localparam int unsigned N = 64, K = 4095, T = 4, RUNS = 20;
  localparam int unsigned CNT_W = 12, IDX_W = 6, KEY_MAX = N * T_MAX, N_WORDS = KEY_MAX / 32;
  localparam int unsigned WA_W = $clog2(N_WORDS), LEN_W = $clog2(KEY_MAX + 1), CEL_W = 7;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start_enroll = 0, start_extract = 0;
  logic [2:0] mode = 3'(T);
  logic busy, done, puf_eval, puf_valid;
  logic [CNT_W-1:0] evals_done;
  logic [N-1:0] puf_bits;
  logic thr_we = 0;
  logic [4:0] thr_waddr = '0;
  logic [CNT_W-1:0] thr_wdata = '0;
  logic res_valid;
  logic [IDX_W-1:0] res_idx;
  logic [CNT_W-1:0] res_count;
  cell_class_e res_cls;
  logic [T_MAX-1:0] res_symbol, res_gray;
  logic [WA_W-1:0] key_rd_addr = '0;
  logic [31:0] key_rd_data;
  logic [LEN_W-1:0] key_len;
  logic [CEL_W-1:0] n_stable0, n_stable1, n_nonbin;

  nbpuf_keygen #(.N_CELLS(N), .K_EVAL(K)) dut (.*);
  puf_array_model #(.N_CELLS(N), .K_EVAL(K)) u_puf (
    .clk, .eval(puf_eval), .bits(puf_bits), .valid(puf_valid));

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endfunction

  int unsigned ones [N];
  int unsigned n_answers;
  always @(posedge clk)
    if (puf_valid) begin
      n_answers <= n_answers + 1;
      for (int i = 0; i < N; i++) ones[i] <= ones[i] + puf_bits[i];
    end

  int got_n, got_cls [N], got_sym [N], got_gray [N];
  always @(posedge clk)
    if (res_valid) begin
      got_cls[got_n]  <= int'(res_cls);
      got_sym[got_n]  <= int'(res_symbol);
      got_gray[got_n] <= int'(res_gray);
      got_n           <= got_n + 1;
    end

  int bench_cls [N], bench_sym [N], bench_gray [N];
  logic [31:0] bench_key [N_WORDS], key [N_WORDS];
  int sym_err = 0, adj_err = 0, bit_err = 0, nb_cells = 0, bench_len, m_same_layout = 0;

  initial begin
    longint tc [15];
    for (int j = 0; j < 15; j++) tc[j] = ref_thr_count(THR_H16[j], K);
    // cells: 8 always 0, 8 always 1, 48 on the 16-ary thresholds 0.005956 .. 0.994241
    // (the outer ones are so close to 0 and 1 that K = 4095 would make such cells stable)
    for (int i = 0; i < N; i++) begin
      if (i < 8)       u_puf.set_prob(i, 0);
      else if (i < 16) u_puf.set_prob(i, 32'hffff_ffff);
      else             u_puf.set_prob(i, THR_Q32[10 + 4 + (i % 7)]);
    end
    u_puf.set_latency(1);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < RUNS; run++) begin
      @(negedge clk);
      foreach (ones[i]) ones[i] = 0;
      n_answers = 0;
      got_n = 0;
      start_enroll = 1;
      @(negedge clk);
      start_enroll = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      check(got_n == N, "result count");
      check(n_answers == K, $sformatf("%0d evaluations", n_answers));
      for (int w = 0; w < N_WORDS; w++) begin key_rd_addr = WA_W'(w); #1; key[w] = key_rd_data; end
      // against the reference model
      for (int c = 0; c < N; c++) begin
        automatic int m = int'(ones[c]);
        automatic int ecls = (m == 0) ? 0 : (m == int'(K)) ? 1 : 2;
        check(got_cls[c] == ecls, $sformatf("run %0d cell %0d class %0d expected %0d (m=%0d)", run, c, got_cls[c], ecls, m));
        if (ecls == 2) begin
          automatic int s = ref_symbol(m, K, T, tc);
          check(got_sym[c] == s && got_gray[c] == ref_gray(s, T),
                $sformatf("run %0d cell %0d m=%0d symbol %0d expected %0d", run, c, m, got_sym[c], s));
        end
      end
      if (run == 0) begin
        for (int c = 0; c < N; c++) begin
          bench_cls[c] = got_cls[c]; bench_sym[c] = got_sym[c]; bench_gray[c] = got_gray[c];
        end
        bench_key = key;
        bench_len = int'(key_len);
      end else begin
        automatic int run_adj = 0, run_bits = 0, kdist = 0;
        automatic bit same_layout = 1;
        for (int c = 0; c < N; c++) begin
          if (c < 16) check(got_cls[c] == bench_cls[c], $sformatf("stable cell %0d changed", c));
          if (got_cls[c] != bench_cls[c]) same_layout = 0;
          if (got_cls[c] == 2 && bench_cls[c] == 2) begin
            nb_cells++;
            if (got_sym[c] != bench_sym[c]) begin
              automatic int d = got_sym[c] - bench_sym[c];
              sym_err++;
              bit_err += $countones(4'(got_gray[c] ^ bench_gray[c]));
              run_bits += $countones(4'(got_gray[c] ^ bench_gray[c]));
              if (d == 1 || d == -1) begin
                adj_err++; run_adj++;
                check($countones(4'(got_gray[c] ^ bench_gray[c])) == 1,
                      $sformatf("cell %0d: sections %0d/%0d differ in more than one bit", c, bench_sym[c], got_sym[c]));
              end
            end
          end
        end
        // when every cell kept its class, the keys differ exactly in the Gray
        // bits that changed: one bit per adjacent-section error
        if (same_layout) begin
          for (int w = 0; w < N_WORDS; w++) kdist += $countones(key[w] ^ bench_key[w]);
          check(int'(key_len) == bench_len, "key length changed");
          check(kdist == run_bits, $sformatf("run %0d: keys differ in %0d bits, Gray codes in %0d", run, kdist, run_bits));
          m_same_layout++;
        end
      end
    end
    check(sym_err > 0, "no symbol error ever happened");
    check(adj_err > 0, "no adjacent-section error ever happened");
    check(m_same_layout > 0, "no enrolment kept the benchmark's cell classes");
    $display("%0d enrolments against the first: %0d symbol errors (%0d adjacent) and %0d bit errors in %0d non-binary responses",
             RUNS - 1, sym_err, adj_err, bit_err, nb_cells);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
