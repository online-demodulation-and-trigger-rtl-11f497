// tb_nco: loads the quarter-wave table with its defining formula, gives
// every channel its own phase increment and checks sine and cosine of each
// sample against sin/cos(2*pi*n*inc/2^32) computed in real arithmetic,
// including the phase restart on in_first. Also checks the 1-cycle latency.
module tb_nco;
  localparam int CH = 4;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_first = 0, inc_we = 0, lut_we = 0;
  logic [1:0] in_ch = 0, inc_ch = 0;
  logic [31:0] inc_data = 0;
  logic [13:0] lut_addr = 0;
  logic [15:0] lut_data = 0;
  logic out_valid;
  logic signed [15:0] out_sin, out_cos;
  int checks = 0, failures = 0;
  nco #(.CHANNELS(CH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] incs [CH];
  int n [CH];

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 2**14; i++) begin
      lut_we <= 1; lut_addr <= 14'(i);
      lut_data <= 16'($rtoi(32767.0 * $sin(2.0 * PI * (i + 0.5) / 65536.0) + 0.5));
      @(posedge clk);
    end
    lut_we <= 0;
    for (int c = 0; c < CH; c++) begin
      incs[c] = $urandom;
      inc_we <= 1; inc_ch <= 2'(c); inc_data <= incs[c];
      @(posedge clk);
    end
    inc_we <= 0;
    for (int f = 0; f < 300; f++) begin
      for (int c = 0; c < CH; c++) begin
        in_valid <= 1; in_ch <= 2'(c); in_first <= (f % 100 == 0);
        if (f % 100 == 0) n[c] = 0;
        @(posedge clk);
        in_valid <= 0;
        #1;
        checks++;
        if (!out_valid) begin failures++; $display("no valid"); end
        begin
          logic [31:0] ph;
          real ang, es, ec;
          ph = 32'(n[c]) * incs[c];
          ang = 2.0 * PI * real'(ph[31:16]) / 65536.0;
          es = 32767.0 * $sin(ang); ec = 32767.0 * $cos(ang);
          checks += 2;
          if ((real'(out_sin) - es > 3.0 || es - real'(out_sin) > 3.0)) begin failures++; $display("sin %0d exp %f", out_sin, es); end
          if ((real'(out_cos) - ec > 3.0 || ec - real'(out_cos) > 3.0)) begin failures++; $display("cos %0d exp %f", out_cos, ec); end
        end
        n[c]++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
