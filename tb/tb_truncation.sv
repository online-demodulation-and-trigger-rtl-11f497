// tb_truncation: pairs of 48-bit values of random bit length; the expected
// common shift is computed from the larger bit length and both outputs are
// compared with the arithmetically shifted inputs.
module tb_truncation;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic signed [47:0] in_a = 0, in_b = 0;
  logic signed [23:0] out_a, out_b;
  logic [4:0] in_user = 0, out_user;
  int checks = 0, failures = 0;
  truncation #(.IN_W(48), .OUT_W(24), .USER_W(5)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bitlen(longint v);
    longint m;
    int n;
    m = (v < 0) ? ~v : v;
    n = 0;
    while (m != 0) begin n++; m = m >>> 1; end
    return n;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 3000; k++) begin
      longint a, b;
      int sh;
      a = longint'({$urandom, $urandom}) >>> ($urandom % 64);
      b = longint'({$urandom, $urandom}) >>> ($urandom % 64);
      if (k == 0) begin a = 0; b = 0; end
      if (k == 1) begin a = -1; b = 8388607; end
      if (k == 2) begin a = -8388609; b = 5; end
      a = longint'(48'(a)); b = longint'(48'(b));
      a = (a <<< 16) >>> 16; b = (b <<< 16) >>> 16;   // sign-extend from 48 bits
      sh = (bitlen(a) > bitlen(b) ? bitlen(a) : bitlen(b)) + 1 - 24;
      if (sh < 0) sh = 0;
      @(negedge clk);
      in_valid = 1; in_a = 48'(a); in_b = 48'(b); in_user = 5'(k);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_a != 24'(a >>> sh) || out_b != 24'(b >>> sh) || out_user != 5'(k)) begin
        failures++;
        $display("a=%0d b=%0d sh=%0d got %0d %0d", a, b, sh, out_a, out_b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
