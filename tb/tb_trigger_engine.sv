// tb_trigger_engine: feeds a 4-channel stream of noise with occasional
// exponential pulses (plus the matching delayed samples), and compares the
// trigger decisions and trigger values with a reference model of the two
// moving-average filters and the 3-point rule. Also checks that triggers
// did happen, that none happen when disabled, and the 1-cycle latency.
module tb_trigger_engine;
  localparam int CH = 4, L = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, enable = 1, out_valid, out_fire;
  logic [1:0] in_ch = 0, out_ch;
  logic signed [15:0] in_x = 0, in_d1 = 0, in_d2 = 0;
  logic [18:0] threshold = 19'd4000;
  logic signed [18:0] out_value;
  int checks = 0, failures = 0, fires = 0;
  trigger_engine #(.CHANNELS(CH), .W(16), .MAW_LEN(L)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xs [CH][$];
  int tp [CH][$];

  function automatic int absi(int v); return v < 0 ? -v : v; endfunction
  function automatic int get(int c, int back);
    return (xs[c].size() > back) ? xs[c][xs[c].size() - 1 - back] : 0;
  endfunction

  initial begin
    int amp [CH], age [CH];
    for (int c = 0; c < CH; c++) begin amp[c] = 0; age[c] = 0; end
    repeat (2) @(negedge clk);
    rst = 0;
    for (int f = 0; f < 2000; f++) begin
      for (int c = 0; c < CH; c++) begin
        int x, a1, a2, t, fire_exp, val_exp;
        if ($urandom % 150 == 0) begin amp[c] = 2000 + $urandom % 6000; age[c] = 0; end
        if ($urandom % 2 == 0 && c == 3) amp[c] = -amp[c];
        x = $rtoi(amp[c] * $exp(-age[c] / 40.0)) + int'($urandom % 200) - 100;
        age[c]++;
        if (f >= 1000 && f < 1100) enable = 0; else enable = 1;
        xs[c].push_back(x);
        a1 = get(c, 0) + get(c, 1) + get(c, 2) + get(c, 3);
        a2 = get(c, 4) + get(c, 5) + get(c, 6) + get(c, 7);
        t = a1 - a2;
        tp[c].push_back(t);
        begin
          int t0, t1, t2;
          t0 = absi(t);
          t1 = (tp[c].size() > 1) ? tp[c][tp[c].size() - 2] : 0;
          t2 = (tp[c].size() > 2) ? absi(tp[c][tp[c].size() - 3]) : 0;
          fire_exp = enable && absi(t1) > int'(threshold) && absi(t1) > t2 && absi(t1) >= t0;
          val_exp = t1;
        end
        @(negedge clk);
        in_valid = 1; in_ch = 2'(c);
        in_x = 16'(x); in_d1 = 16'(get(c, L)); in_d2 = 16'(get(c, 2 * L));
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid || out_ch != 2'(c) || out_fire != 1'(fire_exp) ||
            (fire_exp && int'(out_value) != val_exp)) begin
          failures++;
          $display("f=%0d c=%0d fire %b exp %0d value %0d exp %0d", f, c, out_fire, fire_exp, out_value, val_exp);
        end
        if (out_fire) fires++;
      end
    end
    checks++;
    if (fires < 10) begin failures++; $display("only %0d triggers", fires); end
    $display("triggers: %0d", fires);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
