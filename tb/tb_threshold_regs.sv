// tb_threshold_regs -- after reset every bank must present ceil(T * K) of the
// paper's fractions (K = 1048575), in order, with the unused entries of the
// smaller alphabets all-ones; then random writes are mirrored in a reference
// copy and every bank is read back again.
module tb_threshold_regs;
  import nbpuf_pkg::*;
  import nbpuf_tb_pkg::*;
  localparam longint K = 1048575;
  localparam int unsigned CNT_W = 20;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] waddr = '0;
  logic [CNT_W-1:0] wdata = '0;
  mode_e mode = MODE_Q4;
  logic [CNT_W-1:0] thr [N_THR_MAX];
  longint model [25];

  threshold_regs #(.K_EVAL(K)) dut (.clk, .rst_n, .we, .waddr, .wdata, .mode, .thr);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int base_of(int t);
    return (t == 2) ? 0 : (t == 3) ? 3 : 10;
  endfunction

  task automatic check_all();
    for (int t = 2; t <= 4; t++) begin
      mode = mode_e'(t);
      #1;
      for (int j = 0; j < N_THR_MAX; j++) begin
        longint exp = (j < (1 << t) - 1) ? model[base_of(t) + j] : longint'((1 << CNT_W) - 1);
        checks++;
        if (longint'(thr[j]) != exp) begin
          failures++;
          $display("FAIL: t=%0d thr[%0d]=%0d expected %0d", t, j, thr[j], exp);
        end
      end
    end
  endtask

  initial begin
    for (int t = 2; t <= 4; t++)
      for (int j = 0; j < (1 << t) - 1; j++)
        model[base_of(t) + j] = ref_thr_count(paper_thr(t, j), K);
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_all();
    repeat (40) begin
      @(negedge clk);
      we = 1;
      waddr = 5'($urandom_range(31));
      wdata = CNT_W'($urandom);
      if (waddr < 25) model[waddr] = longint'(wdata);
      @(negedge clk);
      we = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
