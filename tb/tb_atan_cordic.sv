// tb_atan_cordic: random and axis-aligned vectors; the 16-bit phase is
// compared with atan2(y, x) in real arithmetic (tolerance 2 LSB, wrapping
// at +-pi) for vectors with a component of magnitude 256 or more, and the
// ITER+2 cycle time per result is checked.
module tb_atan_cordic;
  localparam int ITER = 18;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid;
  logic signed [23:0] in_y = 0, in_x = 0;
  logic [4:0] in_user = 0, out_user;
  logic signed [15:0] out_phase;
  int checks = 0, failures = 0;
  atan_cordic #(.IN_W(24), .OUT_W(16), .ITER(ITER), .USER_W(5)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 3000; k++) begin
      int x, y, cyc, d;
      real e;
      x = $signed(24'($urandom)) >>> ($urandom % 16);
      y = $signed(24'($urandom)) >>> ($urandom % 16);
      case (k)
        0: begin x = 1000; y = 0; end
        1: begin x = 0; y = 1000; end
        2: begin x = -1000; y = 0; end
        3: begin x = 0; y = -1000; end
        4: begin x = -8388608; y = -8388608; end
        5: begin x = 8388607; y = -8388608; end
        default: ;
      endcase
      // the demodulator delivers sums far above this; tiny vectors lose precision
      if (x < 256 && x > -256 && y < 256 && y > -256) x = 300;
      @(negedge clk);
      checks++;
      if (!in_ready) begin failures++; $display("not ready"); end
      in_valid = 1; in_x = 24'(x); in_y = 24'(y); in_user = 5'(k);
      @(negedge clk);
      in_valid = 0;
      cyc = 1;
      while (!out_valid && cyc < 100) begin @(negedge clk); cyc++; end
      e = $atan2(real'(y), real'(x)) / (2.0 * PI) * 65536.0;
      d = int'(out_phase) - $rtoi(e + (e >= 0 ? 0.5 : -0.5));
      if (d > 32768) d -= 65536;
      if (d < -32768) d += 65536;
      checks += 2;
      if (d > 2 || d < -2 || out_user != 5'(k)) begin
        failures++; $display("x=%0d y=%0d got %0d exp %f", x, y, out_phase, e);
      end
      if (cyc != ITER + 2) begin failures++; $display("cycles %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
