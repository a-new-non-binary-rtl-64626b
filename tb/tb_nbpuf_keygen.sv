// tb_nbpuf_keygen -- end-to-end test of the generator at reduced size
// (64 cells, K = 1023 evaluations) against an SR-latch PUF array model.
//
// The array mixes constant cells, cells with a random one-probability and
// cells with an exact count placed on and next to threshold counts. The
// testbench counts the 1s of every cell itself from puf_bits/puf_valid, and
// for every extraction compares each cell's class, section index and Gray code
// with the reference model (double-precision comparison with the paper's
// fractions, or with the programmed counts), then reads the whole key back and
// compares it bit by bit, together with key_len and the population counts.
//
// Sequence: enrolment at t = 2 (cycle count checked), extraction only at t = 3
// and t = 4 (mode switch), reprogrammed quaternary thresholds, a second
// enrolment with a slow PUF (latency 3, the sequencer stalls) and fresh random
// draws. Each mechanism is counted and a failure is counted for any that
// never happened.
module tb_nbpuf_keygen;
  import nbpuf_pkg::*;
  import nbpuf_tb_pkg::*;
  localparam int unsigned N = 64, K = 1023;
  localparam int unsigned CNT_W = 10, IDX_W = 6, KEY_MAX = N * T_MAX, N_WORDS = KEY_MAX / 32;
  localparam int unsigned WA_W = $clog2(N_WORDS), LEN_W = $clog2(KEY_MAX + 1), CEL_W = 7;

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

  // independent count of each cell's 1s
  int unsigned ones [N];
  int unsigned n_answers;
  always @(posedge clk)
    if (puf_valid) begin
      n_answers <= n_answers + 1;
      for (int i = 0; i < N; i++) ones[i] <= ones[i] + puf_bits[i];
    end

  // capture of the per-cell result stream
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

  // mechanisms
  int m_enroll, m_extract_only, m_mode [5], m_stable0, m_stable1, m_nonbin, m_thr_write, m_stall;
  int cyc;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (busy && !puf_valid && !puf_eval && u_puf.pending > 0) m_stall <= m_stall + 1;
  end

  longint thr_cnt [5][15];   // count thresholds the design should hold, per t

  task automatic run(bit enroll, int t, int exp_cycles);
    int start;
    @(negedge clk);
    got_n = 0;
    if (enroll) begin
      foreach (ones[i]) ones[i] = 0;
      n_answers = 0;
      start_enroll = 1;
      m_enroll++;
    end else begin
      start_extract = 1;
      m_extract_only++;
    end
    mode = 3'(t);
    m_mode[t]++;
    start = cyc;
    @(negedge clk);
    start_enroll = 0; start_extract = 0;
    while (!done) @(negedge clk);
    if (exp_cycles > 0)
      check(cyc - start == exp_cycles, $sformatf("done after %0d cycles, expected %0d", cyc - start, exp_cycles));
    if (enroll) check(n_answers == K, $sformatf("%0d evaluations, expected %0d", n_answers, K));
    @(negedge clk);
    check_results(t);
  endtask

  task automatic check_results(int t);
    bit ref_bits [$];
    int r0 = 0, r1 = 0, rn = 0;
    longint tc [15];
    for (int j = 0; j < 15; j++) tc[j] = thr_cnt[t][j];
    check(got_n == N, $sformatf("%0d results, expected %0d", got_n, N));
    for (int c = 0; c < N; c++) begin
      int m = int'(ones[c]);
      int ecls = (m == 0) ? 0 : (m == int'(K)) ? 1 : 2;
      check(got_idx[c] == c, $sformatf("result %0d is for cell %0d", c, got_idx[c]));
      check(got_count[c] == m, $sformatf("cell %0d count %0d expected %0d", c, got_count[c], m));
      check(got_cls[c] == ecls, $sformatf("cell %0d class %0d expected %0d", c, got_cls[c], ecls));
      if (ecls == 2) begin
        int s = ref_symbol(m, K, t, tc);
        int g = ref_gray(s, t);
        check(got_sym[c] == s, $sformatf("t=%0d cell %0d m=%0d symbol %0d expected %0d", t, c, m, got_sym[c], s));
        check(got_gray[c] == g, $sformatf("t=%0d cell %0d gray %0d expected %0d", t, c, got_gray[c], g));
        for (int b = t - 1; b >= 0; b--) ref_bits.push_back(g[b]);
        rn++;
      end else begin
        ref_bits.push_back(ecls == 1);
        if (ecls == 1) r1++; else r0++;
      end
    end
    m_stable0 += r0; m_stable1 += r1; m_nonbin += rn;
    check(int'(key_len) == ref_bits.size(), $sformatf("key_len %0d expected %0d", key_len, ref_bits.size()));
    check(int'(n_stable0) == r0 && int'(n_stable1) == r1 && int'(n_nonbin) == rn, "population counts");
    for (int w = 0; w < N_WORDS; w++) begin
      logic [31:0] exp = '0;
      key_rd_addr = WA_W'(w);
      #1;
      for (int b = 0; b < 32; b++) if (32*w + b < ref_bits.size()) exp[b] = ref_bits[32*w + b];
      check(key_rd_data == exp, $sformatf("t=%0d key word %0d = %h expected %h", t, w, key_rd_data, exp));
    end
  endtask

  task automatic setup_cells();
    int c = 0;
    // constant cells
    for (int i = 0; i < 12; i++) u_puf.set_prob(c++, 0);
    for (int i = 0; i < 12; i++) u_puf.set_prob(c++, 32'hffff_ffff);
    // exact counts on and next to 16-ary threshold counts
    for (int j = 0; j < 15 && c < N - 16; j += 2) begin
      longint tcnt = ref_thr_count(THR_H16[j], K);
      u_puf.set_count(c++, (tcnt > 1) ? tcnt - 1 : 1);
      u_puf.set_count(c++, tcnt < K ? tcnt : K - 1);
    end
    // random one-probabilities, some close to 0 and 1
    while (c < N) begin
      int unsigned p;
      case ($urandom_range(2))
        0:       p = $urandom_range(32'h0100_0000, 1);
        1:       p = 32'hffff_ffff - $urandom_range(32'h0100_0000, 1);
        default: p = $urandom;
      endcase
      u_puf.set_prob(c++, p);
    end
  endtask

  initial begin
    cyc = 0; got_n = 0; n_answers = 0;
    m_enroll = 0; m_extract_only = 0; m_stable0 = 0; m_stable1 = 0; m_nonbin = 0;
    m_thr_write = 0; m_stall = 0;
    foreach (m_mode[i]) m_mode[i] = 0;
    foreach (ones[i]) ones[i] = 0;
    for (int t = 2; t <= 4; t++)
      for (int j = 0; j < 15; j++)
        thr_cnt[t][j] = (j < (1 << t) - 1) ? ref_thr_count(paper_thr(t, j), K) : 64'h7fff_ffff;
    setup_cells();
    u_puf.set_latency(1);
    repeat (2) @(posedge clk);
    rst_n = 1;

    run(1, 2, 2*K + N + 3);
    run(0, 3, N + 3);
    run(0, 4, N + 3);

    // reprogram the quaternary thresholds to the counts 100, 500, 900
    begin
      static int newthr [3] = '{100, 500, 900};
      for (int j = 0; j < 3; j++) begin
        @(negedge clk);
        thr_we = 1; thr_waddr = 5'(j); thr_wdata = CNT_W'(newthr[j]);
        thr_cnt[2][j] = newthr[j];
        m_thr_write++;
      end
      @(negedge clk);
      thr_we = 0;
    end
    run(0, 2, N + 3);

    // slow PUF, fresh draws
    u_puf.set_latency(3);
    run(1, 4, 4*K + N + 3);
    run(0, 3, N + 3);

    check(m_enroll > 0,       "no enrolment");
    check(m_extract_only > 0, "no extraction alone");
    check(m_mode[2] > 0 && m_mode[3] > 0 && m_mode[4] > 0, "an alphabet never used");
    check(m_stable0 > 0,      "no stable-0 cell");
    check(m_stable1 > 0,      "no stable-1 cell");
    check(m_nonbin > 0,       "no non-binary cell");
    check(m_thr_write > 0,    "no threshold write");
    check(m_stall > 0,        "sequencer never waited for the PUF");
    $display("mechanisms: enrol=%0d extract=%0d t2=%0d t3=%0d t4=%0d stable0=%0d stable1=%0d nonbin=%0d thr_write=%0d stall_cycles=%0d",
             m_enroll, m_extract_only, m_mode[2], m_mode[3], m_mode[4], m_stable0, m_stable1,
             m_nonbin, m_thr_write, m_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
