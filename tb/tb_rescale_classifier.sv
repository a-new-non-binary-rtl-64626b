// tb_rescale_classifier -- checks the stable / non-binary split for the
// paper's K = 1048575 and for a small K: m = 0 -> stable 0, m = K -> stable 1,
// everything in between non-binary, at the edges and at random counts.
module tb_rescale_classifier;
  import nbpuf_pkg::*;
  localparam int unsigned CNT_W = 20;
  int checks = 0, failures = 0;
  logic [CNT_W-1:0] count, k;
  cell_class_e cls;

  rescale_classifier #(.CNT_W(CNT_W)) dut (.count, .k, .cls);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(int unsigned kk, int unsigned m);
    cell_class_e exp;
    k = CNT_W'(kk); count = CNT_W'(m);
    #1;
    exp = (m == 0) ? CLS_STABLE0 : (m == kk) ? CLS_STABLE1 : CLS_NONBIN;
    checks++;
    if (cls != exp) begin
      failures++;
      $display("FAIL: K=%0d m=%0d cls=%0d expected %0d", kk, m, cls, exp);
    end
  endtask

  initial begin
    static int unsigned ks [2] = '{1048575, 255};
    foreach (ks[n]) begin
      try(ks[n], 0); try(ks[n], 1); try(ks[n], ks[n] - 1); try(ks[n], ks[n]);
      try(ks[n], ks[n] / 2);
      repeat (200) try(ks[n], $urandom_range(ks[n]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
