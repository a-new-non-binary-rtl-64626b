// tb_key_assembler -- 16 cells per key. Random sequences of stable-0, stable-1
// and non-binary cells (random Gray codes, random alphabet per key) are
// appended; a reference bit queue (stable bit, or the t Gray bits most
// significant first) is compared with every word read back, with key_len and
// with the three population counts. Keys with all-16-ary non-binary cells fill
// the buffer to its 64-bit capacity.
module tb_key_assembler;
  import nbpuf_pkg::*;
  localparam int unsigned N = 16, KEY_MAX = N * T_MAX, N_WORDS = 2, WA_W = 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0;
  cell_class_e cls = CLS_STABLE0;
  logic [T_MAX-1:0] gray = '0;
  mode_e mode = MODE_Q4;
  logic [WA_W-1:0] rd_addr = '0;
  logic [31:0] rd_word;
  logic [$clog2(KEY_MAX+1)-1:0] key_len;
  logic [$clog2(N+1)-1:0] n_stable0, n_stable1, n_nonbin;

  key_assembler #(.N_CELLS(N)) dut (
    .clk, .rst_n, .clr, .in_valid, .cls, .gray, .mode, .rd_addr, .rd_word,
    .key_len, .n_stable0, .n_stable1, .n_nonbin);

  always #5 clk = ~clk;

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

  bit ref_bits [$];
  int r0, r1, rn;

  task automatic one_key(int t, int p_nonbin);
    @(negedge clk);
    clr = 1; mode = mode_e'(t);
    @(negedge clk);
    clr = 0;
    ref_bits.delete(); r0 = 0; r1 = 0; rn = 0;
    for (int c = 0; c < N; c++) begin
      int r = $urandom_range(99);
      in_valid = 1;
      if (r < p_nonbin) begin
        cls = CLS_NONBIN; gray = T_MAX'($urandom_range((1 << t) - 1)); rn++;
        for (int b = t - 1; b >= 0; b--) ref_bits.push_back(gray[b]);
      end else if (r[0]) begin
        cls = CLS_STABLE1; gray = T_MAX'($urandom); r1++; ref_bits.push_back(1'b1);
      end else begin
        cls = CLS_STABLE0; gray = T_MAX'($urandom); r0++; ref_bits.push_back(1'b0);
      end
      @(negedge clk);
      // an idle cycle now and then
      in_valid = 0;
      if ($urandom_range(3) == 0) @(negedge clk);
    end
    in_valid = 0;
    check(int'(key_len) == ref_bits.size(), $sformatf("key_len %0d expected %0d", key_len, ref_bits.size()));
    check(int'(n_stable0) == r0 && int'(n_stable1) == r1 && int'(n_nonbin) == rn, "population counts");
    for (int w = 0; w < N_WORDS; w++) begin
      logic [31:0] exp = '0;
      rd_addr = WA_W'(w);
      #1;
      for (int b = 0; b < 32; b++)
        if (32*w + b < ref_bits.size()) exp[b] = ref_bits[32*w + b];
      check(rd_word == exp, $sformatf("word %0d = %h expected %h", w, rd_word, exp));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 30; n++) one_key($urandom_range(4, 2), $urandom_range(100));
    one_key(4, 100);   // full buffer
    one_key(2, 0);     // stable cells only
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
