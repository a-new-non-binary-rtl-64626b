// tb_gray_encoder -- exhaustive check of the Gray encoder against a reflected
// Gray code built independently by the mirror construction (G(n) = 0.G(n-1)
// followed by 1.reverse(G(n-1))), plus the quaternary table 00 01 11 10 and the
// one-bit-change property between neighbouring symbols of every alphabet.
module tb_gray_encoder;
  import nbpuf_pkg::*;
  int checks = 0, failures = 0;
  logic [T_MAX-1:0] symbol, gray;
  logic [T_MAX-1:0] ref_code [1 << T_MAX];

  gray_encoder #(.W(T_MAX)) dut (.symbol, .gray);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [T_MAX-1:0] prev;
    int len;
    // mirror construction
    ref_code[0] = '0;
    len = 1;
    for (int b = 0; b < T_MAX; b++) begin
      for (int i = 0; i < len; i++)
        ref_code[len + i] = ref_code[len - 1 - i] | T_MAX'(1 << b);
      len = len * 2;
    end
    for (int s = 0; s < (1 << T_MAX); s++) begin
      symbol = T_MAX'(s);
      #1;
      check(gray == ref_code[s], $sformatf("symbol %0d gray %b expected %b", s, gray, ref_code[s]));
      if (s > 0) check($countones(gray ^ prev) == 1, $sformatf("symbols %0d/%0d differ in more than one bit", s-1, s));
      prev = gray;
    end
    // quaternary table of the paper: 0->00, 1->01, 2->11, 3->10
    begin
      static logic [1:0] q [4] = '{2'b00, 2'b01, 2'b11, 2'b10};
      for (int s = 0; s < 4; s++) begin
        symbol = T_MAX'(s);
        #1;
        check(gray == T_MAX'(q[s]), $sformatf("quaternary %0d -> %b", s, gray));
      end
    end
    // 3-bit alphabet: top bit of the 4-bit code stays 0 and codes are still reflected
    for (int s = 0; s < 8; s++) begin
      symbol = T_MAX'(s);
      #1;
      check(gray[T_MAX-1] == 1'b0, "8-ary code uses the 4th bit");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
