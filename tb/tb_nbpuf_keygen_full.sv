// tb_nbpuf_keygen_full -- the generator at its full size (1024 cells,
// K = 1048575 evaluations, default thresholds), run on a PUF population shaped
// like the measured FPGA array the thresholds were fitted to: 449 cells that
// always give 0, 520 that always give 1, and 55 cells with exact counts spread
// over the 16 sections of the 16-ary alphabet as {3,3,3,1,2,2,4,8,4,6,4,4,4,3,1,3}
// cells (each placed inside its section, away from the thresholds).
//
// One enrolment (with quaternary extraction) is followed by 8-ary and 16-ary
// extraction from the same counts. For each alphabet the testbench checks
// every cell's count, class, section index and Gray code against the
// reference model, the whole key bit by bit, the key length (969 + 55 t bits)
// and the section histogram, which must be {10,16,18,11} (quaternary),
// {6,4,4,12,10,8,7,4} (8-ary) and the 16-ary distribution above. The
// enrolment's cycle count (2K + N + 3) is checked too.
module tb_nbpuf_keygen_full;
  import nbpuf_pkg::*;
  import nbpuf_tb_pkg::*;
  localparam int unsigned N = 1024, K = 1048575;
  localparam int unsigned CNT_W = 20, IDX_W = 10, KEY_MAX = N * T_MAX, N_WORDS = KEY_MAX / 32;
  localparam int unsigned WA_W = $clog2(N_WORDS), LEN_W = $clog2(KEY_MAX + 1), CEL_W = 11;
  localparam int unsigned N_NB = 55;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start_enroll = 0, start_extract = 0;
  logic [2:0] mode = 3'd2;
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

  nbpuf_keygen dut (.*);
  puf_array_model #(.N_CELLS(N), .K_EVAL(K)) u_puf (
    .clk, .eval(puf_eval), .bits(puf_bits), .valid(puf_valid));

  always #5 clk = ~clk;

  initial begin
    #50000000;   // 5M cycles
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

  const int DIST16 [16] = '{3, 3, 3, 1, 2, 2, 4, 8, 4, 6, 4, 4, 4, 3, 1, 3};
  const int DIST8  [8]  = '{6, 4, 4, 12, 10, 8, 7, 4};
  const int DIST4  [4]  = '{10, 16, 18, 11};

  longint target [N];        // exact number of 1s of each cell
  int n_answers;
  always @(posedge clk) if (puf_valid) n_answers <= n_answers + 1;

  int got_n, got_idx [N], got_count [N], got_cls [N], got_sym [N], got_gray [N];
  always @(posedge clk)
    if (res_valid) begin
      got_idx[got_n]   <= int'(res_idx);
      got_count[got_n] <= int'(res_count);
      got_cls[got_n]   <= int'(res_cls);
      got_sym[got_n]   <= int'(res_symbol);
      got_gray[got_n]  <= int'(res_gray);
      got_n            <= got_n + 1;
    end

  int cyc;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic setup_cells();
    int nb = 0, ones_left = 520, rest = 969, k = 0;
    longint lo, hi;
    // non-binary cells at 7, 25, 43, ..., spread over the array
    for (int i = 0; i < N; i++) target[i] = -1;
    for (int s = 0; s < 16; s++) begin
      lo = (s == 0) ? 1 : ref_thr_count(THR_H16[s - 1], K);
      hi = (s == 15) ? K - 1 : ref_thr_count(THR_H16[s], K) - 1;
      for (int r = 0; r < DIST16[s]; r++) begin
        target[7 + 18 * nb] = lo + (hi - lo) * (r + 1) / (DIST16[s] + 1);
        nb++;
      end
    end
    // the 969 stable cells: 520 ones spread evenly among them
    for (int i = 0; i < N; i++)
      if (target[i] < 0) begin
        target[i] = (((k + 1) * 520) / 969 != (k * 520) / 969) ? K : 0;
        k++;
      end
    for (int i = 0; i < N; i++) u_puf.set_count(i, target[i]);
  endtask

  task automatic run(bit enroll, int t, int exp_cycles);
    int start;
    @(negedge clk);
    got_n = 0;
    if (enroll) begin n_answers = 0; start_enroll = 1; end
    else start_extract = 1;
    mode = 3'(t);
    start = cyc;
    @(negedge clk);
    start_enroll = 0; start_extract = 0;
    while (!done) @(negedge clk);
    check(cyc - start == exp_cycles, $sformatf("done after %0d cycles, expected %0d", cyc - start, exp_cycles));
    if (enroll) check(n_answers == K, $sformatf("%0d evaluations", n_answers));
    @(negedge clk);
    check_results(t);
  endtask

  task automatic check_results(int t);
    bit ref_bits [$];
    int r0 = 0, r1 = 0, rn = 0, hist [16];
    longint tc [15];
    for (int j = 0; j < 15; j++) tc[j] = (j < (1 << t) - 1) ? ref_thr_count(paper_thr(t, j), K) : 64'h7fff_ffff;
    foreach (hist[i]) hist[i] = 0;
    check(got_n == N, $sformatf("%0d results", got_n));
    for (int c = 0; c < N; c++) begin
      longint m = target[c];
      int ecls = (m == 0) ? 0 : (m == K) ? 1 : 2;
      check(got_idx[c] == c && longint'(got_count[c]) == m && got_cls[c] == ecls,
            $sformatf("cell %0d: idx %0d count %0d class %0d, expected count %0d class %0d",
                      c, got_idx[c], got_count[c], got_cls[c], m, ecls));
      if (ecls == 2) begin
        int s = ref_symbol(m, K, t, tc);
        int g = ref_gray(s, t);
        check(s == ref_symbol_real(m, K, t), "integer and real reference disagree");
        check(got_sym[c] == s && got_gray[c] == g,
              $sformatf("t=%0d cell %0d m=%0d symbol %0d gray %0d, expected %0d %0d", t, c, m, got_sym[c], got_gray[c], s, g));
        hist[got_sym[c]]++;
        for (int b = t - 1; b >= 0; b--) ref_bits.push_back(g[b]);
        rn++;
      end else begin
        ref_bits.push_back(ecls == 1);
        if (ecls == 1) r1++; else r0++;
      end
    end
    check(r0 == 449 && r1 == 520 && rn == N_NB, "population of the model");
    check(int'(n_stable0) == 449 && int'(n_stable1) == 520 && int'(n_nonbin) == N_NB,
          $sformatf("population counts %0d %0d %0d", n_stable0, n_stable1, n_nonbin));
    check(int'(key_len) == 969 + N_NB * t, $sformatf("key_len %0d expected %0d", key_len, 969 + N_NB * t));
    for (int s = 0; s < (1 << t); s++) begin
      int exp = (t == 2) ? DIST4[s] : (t == 3) ? DIST8[s] : DIST16[s];
      check(hist[s] == exp, $sformatf("t=%0d section %0d holds %0d cells, expected %0d", t, s, hist[s], exp));
    end
    begin
      string h = "";
      for (int s = 0; s < (1 << t); s++) h = {h, $sformatf(" %0d", hist[s])};
      $display("t=%0d: key_len=%0d, section histogram:%s", t, key_len, h);
    end
    for (int w = 0; w < N_WORDS; w++) begin
      logic [31:0] exp = '0;
      key_rd_addr = WA_W'(w);
      #1;
      for (int b = 0; b < 32; b++) if (32*w + b < ref_bits.size()) exp[b] = ref_bits[32*w + b];
      check(key_rd_data == exp, $sformatf("t=%0d key word %0d = %h expected %h", t, w, key_rd_data, exp));
    end
  endtask

  initial begin
    cyc = 0; got_n = 0; n_answers = 0;
    setup_cells();
    u_puf.set_latency(1);
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, 2, 2*K + N + 3);
    run(0, 3, N + 3);
    run(0, 4, N + 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
