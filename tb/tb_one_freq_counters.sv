// tb_one_freq_counters -- 16 cells, K = 255: random bit vectors are applied on
// random cycles with acc, a reference count per cell is kept, and all counts
// are read back through the registered port (one-cycle latency, index echoed).
// A second round checks that clr empties every counter and that counting
// starts again from zero; cells 0 and 1 are held at constant 0 and 1 so that
// the extreme counts 0 and K are reached.
module tb_one_freq_counters;
  localparam int unsigned N = 16, K = 255, CNT_W = 8, IDX_W = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, acc = 0, rd_en = 0;
  logic [N-1:0] bits = '0;
  logic [IDX_W-1:0] rd_idx = '0, rd_idx_q;
  logic rd_valid;
  logic [CNT_W-1:0] rd_count;
  int unsigned ref_cnt [N];

  one_freq_counters #(.N_CELLS(N), .K_EVAL(K)) dut (
    .clk, .rst_n, .clr, .acc, .bits, .rd_en, .rd_idx, .rd_valid, .rd_idx_q, .rd_count);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all();
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      rd_en = 1; rd_idx = IDX_W'(i);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (!rd_valid || rd_idx_q != IDX_W'(i) || rd_count != CNT_W'(ref_cnt[i])) begin
        failures++;
        $display("FAIL: cell %0d valid=%0b idx=%0d count=%0d expected %0d",
                 i, rd_valid, rd_idx_q, rd_count, ref_cnt[i]);
      end
    end
  endtask

  task automatic run_round();
    int evals = 0;
    while (evals < K) begin
      @(negedge clk);
      bits = N'($urandom);
      bits[0] = 1'b0; bits[1] = 1'b1;
      acc = ($urandom_range(3) != 0);
      if (acc) begin
        evals++;
        for (int i = 0; i < N; i++) ref_cnt[i] += bits[i];
      end
    end
    @(negedge clk);
    acc = 0;
  endtask

  initial begin
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_round();
    read_all();
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    read_all();
    run_round();
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
