// tb_nbpuf_eval_ctrl -- 8 cells, K = 20. A small responder answers puf_eval
// after a set latency. For enrolments at latencies 1 and 3 and for an
// extraction alone the testbench checks: K eval pulses, each answered once,
// cnt_acc exactly on the K answers, cnt_clr only at the start of an enrolment,
// key_clr once before the first read, reads of cells 0..N-1 in order on
// consecutive cycles, done after 2K + N + 3 cycles (latency 1) or N + 3 cycles
// (extraction), busy throughout, and the mode clamped to 2..4.
module tb_nbpuf_eval_ctrl;
  import nbpuf_pkg::*;
  localparam int unsigned N = 8, K = 20, IDX_W = 3, EVC_W = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start_enroll = 0, start_extract = 0;
  logic [2:0] mode = 3'd2;
  mode_e mode_q;
  logic busy, done, puf_eval, puf_valid, cnt_clr, cnt_acc, rd_en, key_clr;
  logic [IDX_W-1:0] rd_idx;
  logic [EVC_W-1:0] evals_done;

  nbpuf_eval_ctrl #(.N_CELLS(N), .K_EVAL(K)) dut (
    .clk, .rst_n, .start_enroll, .start_extract, .mode, .mode_q, .busy, .done,
    .puf_eval, .puf_valid, .cnt_clr, .cnt_acc, .rd_en, .rd_idx, .key_clr, .evals_done);

  always #5 clk = ~clk;

  // responder with latency lat >= 1
  int lat = 1, pend = 0;
  always_ff @(posedge clk) begin
    if (puf_eval) pend <= lat;
    else if (pend > 0) pend <= pend - 1;
  end
  assign puf_valid = (pend == 1);

  // event counters
  int n_eval, n_acc, n_clr, n_kclr, n_rd, n_done, busy_low, rd_order_err, acc_err;
  int cyc, start_cyc, done_cyc, expect_idx, kclr_before_rd;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (puf_eval) n_eval <= n_eval + 1;
      if (cnt_acc) n_acc <= n_acc + 1;
      if (cnt_acc && !puf_valid) acc_err <= acc_err + 1;
      if (cnt_clr) n_clr <= n_clr + 1;
      if (key_clr) begin n_kclr <= n_kclr + 1; if (n_rd == 0) kclr_before_rd <= 1; end
      if (rd_en) begin
        n_rd <= n_rd + 1;
        if (rd_idx != IDX_W'(expect_idx)) rd_order_err <= rd_order_err + 1;
        expect_idx <= expect_idx + 1;
      end
      if (done) begin n_done <= n_done + 1; done_cyc <= cyc; end
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  task automatic clear_counts();
    n_eval = 0; n_acc = 0; n_clr = 0; n_kclr = 0; n_rd = 0; n_done = 0; rd_order_err = 0;
    acc_err = 0; expect_idx = 0; kclr_before_rd = 0; busy_low = 0;
  endtask

  task automatic run(bit enroll, int l, logic [2:0] m, int exp_cycles);
    @(negedge clk);
    clear_counts();
    lat = l;
    mode = m;
    if (enroll) start_enroll = 1; else start_extract = 1;
    start_cyc = cyc;
    @(negedge clk);
    start_enroll = 0; start_extract = 0;
    while (!done) begin
      if (!busy) busy_low++;
      @(negedge clk);
    end
    @(negedge clk);
    check(n_done == 1, "done pulses once");
    check(busy_low == 0, "busy dropped before done");
    check(!busy, "busy after done");
    check(n_eval == (enroll ? K : 0), $sformatf("eval pulses %0d", n_eval));
    check(n_acc == (enroll ? K : 0), $sformatf("acc pulses %0d", n_acc));
    check(acc_err == 0, "acc without valid");
    check(n_clr == (enroll ? 1 : 0), "cnt_clr count");
    check(n_kclr == 1 && kclr_before_rd == 1, "key_clr once before reads");
    check(n_rd == N && rd_order_err == 0, $sformatf("reads %0d order errors %0d", n_rd, rd_order_err));
    if (exp_cycles > 0)
      check(done_cyc - start_cyc == exp_cycles,
            $sformatf("done after %0d cycles, expected %0d", done_cyc - start_cyc, exp_cycles));
    check(int'(mode_q) == ((m < 2) ? 2 : (m > 4) ? 4 : int'(m)), $sformatf("mode %0d -> %0d", m, mode_q));
  endtask

  initial begin
    cyc = 0;
    clear_counts();
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, 1, 3'd2, 2*K + N + 3);
    check(evals_done == EVC_W'(K), "evals_done == K");
    run(1, 3, 3'd3, 4*K + N + 3);
    run(0, 1, 3'd4, N + 3);
    run(0, 1, 3'd7, N + 3);
    run(0, 1, 3'd0, N + 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
