// tb_tdm_delay: a 4-channel TDM stream with gaps passes a delay line whose
// length is changed at run time; every output is compared with the sample
// of the same channel len frames earlier (0 while the line is not yet
// filled), and the side band with the current input.
module tb_tdm_delay;
  localparam int CH = 4, MAXF = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [15:0] in_data = 0, out_data;
  logic [3:0] in_side = 0, out_side;
  logic [4:0] len = 3;
  int checks = 0, failures = 0;
  tdm_delay #(.CHANNELS(CH), .MAX_FRAMES(MAXF), .W(16), .SIDE_W(4)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] hist [$];   // every accepted sample, in order

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 3000; k++) begin
      int l, d;
      @(negedge clk);
      if (k % 600 == 599) len = 5'(1 + $urandom % MAXF);
      if (k == 1500) len = 5'(MAXF);
      in_valid = ($urandom % 4 != 0);
      in_data = 16'($urandom);
      in_side = 4'(k);
      if (in_valid) begin
        l = int'(len) * CH;
        d = (hist.size() >= l) ? int'(hist[hist.size() - l]) : 0;
        hist.push_back(in_data);
        @(negedge clk);
        checks++;
        if (!out_valid || int'(out_data) != d || out_side != 4'(k)) begin
          failures++; $display("k=%0d len=%0d got %h exp %h", k, len, out_data, d);
        end
        in_valid = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
