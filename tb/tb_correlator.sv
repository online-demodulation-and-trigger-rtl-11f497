// tb_correlator: random samples, sines, cosines and offsets on a 4-channel
// TDM stream; a reference model keeps per-channel sums of
// (s - offset)*sin and (s - offset)*cos over the window and the results are
// compared when the window closes, including offset writes while the
// stream runs and before it starts.
module tb_correlator;
  localparam int CH = 4, L = 12;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_acc_en = 0, in_acc_start = 0, in_acc_last = 0, off_we = 0;
  logic [1:0] in_ch = 0, off_ch = 0, out_ch;
  logic signed [16:0] in_s = 0, off_data = 0;
  logic signed [15:0] in_sin = 0, in_cos = 0;
  logic out_valid;
  logic signed [47:0] out_acc_sin, out_acc_cos;
  int checks = 0, failures = 0, results = 0;
  correlator #(.CHANNELS(CH)) dut (.*);

  longint ms [CH], mc [CH];
  int off [CH];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < CH; c++) off[c] = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    // offsets of all channels written back to back, no stream running
    for (int c = 0; c < CH; c++) begin
      @(negedge clk);
      off_we = 1; off_ch = 2'(c); off_data = 17'(100 * c + 7); off[c] = 100 * c + 7;
    end
    for (int r = 0; r < 6; r++) begin
      // new offset for one channel, written mid-stream
      for (int n = 0; n < L; n++) begin
        for (int c = 0; c < CH; c++) begin
          @(negedge clk);
          off_we = 0;
          if (n == 3 && c == 1) begin
            off_we = 1; off_ch = 2'(r % CH); off_data = 17'($urandom % 4000) - 17'sd2000;
          end
          in_valid = 1; in_ch = 2'(c);
          in_s = 17'($urandom % 65536);
          in_sin = 16'($urandom); in_cos = 16'($urandom);
          in_acc_en = (n >= 2 && n <= L - 2);
          in_acc_start = (n == 2);
          in_acc_last = (n == L - 2);
          // the model applies a pending offset when its channel comes by
          // the write in (n=3, c=1) takes effect at once
          if (n == 3 && c == 1) off[r % CH] = off_data;
          if (in_acc_start) begin ms[c] = 0; mc[c] = 0; end
          if (in_acc_en) begin
            ms[c] += longint'(int'(in_s) - off[c]) * in_sin;
            mc[c] += longint'(int'(in_s) - off[c]) * in_cos;
          end
          #1;
        end
      end
    end
    @(negedge clk);
    in_valid = 0; off_we = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (results != 6 * CH) begin failures++; $display("results %0d", results); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst && out_valid) begin
      results++;
      checks++;
      if (out_acc_sin != 48'(ms[out_ch]) || out_acc_cos != 48'(mc[out_ch])) begin
        failures++;
        $display("ch %0d got %0d %0d exp %0d %0d", out_ch, out_acc_sin, out_acc_cos, ms[out_ch], mc[out_ch]);
      end
    end
  end
endmodule
