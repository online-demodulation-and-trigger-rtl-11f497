// tb_frdemod_window: the dc-SQUID configuration of the demodulator, with the
// window path (USE_WINDOW = 1), four channels, and a ramp of 1000 samples.
//
// This is the leakage experiment of the window option. Each channel's real
// input holds two flux-ramp responses, like two dc-SQUIDs with different
// coupling sharing one channel:
//   s(n) = DC + A*cos(2*pi*40*n/1000 + theta1) + A*cos(2*pi*44.4*n/1000 + theta2)
// The oscillator is tuned to 40 periods per ramp, so the 44.4-period signal
// leaks into the measured phase of the first signal. theta2 varies by
// channel and ramp. The test runs RAMPS_EACH ramps with a rectangular
// window (all coefficients 1.0), then reloads the window memory with a
// Blackman window between ramps and runs RAMPS_EACH more.
// Checks:
//   * every phase against the correlation evaluated in real arithmetic on
//     the windowed integer samples, ((s * w) >>> 15), over n = 0 .. N-2
//     (8 LSB of 2^16);
//   * the error against the true phase theta1 + pi/2 is below 20 LSB with
//     the Blackman window, and below a quarter of the rectangular-window
//     error (the window must cut the leakage);
//   * the windowed run is counted as a mechanism and must occur.
module tb_frdemod_window;
  import frd_pkg::*;
  localparam int CH = 4, N = 1000, RAMPS_EACH = 3, DC = 1000, A = 7000;
  localparam real K1 = 40.0, K2 = 44.4;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic in_valid = 0, in_sync = 0, cfg_we = 0;
  logic signed [15:0] in_i = 0, in_q = 0, in_s = 0;
  cfg_sel_e cfg_sel = CFG_RAMP_LEN;
  logic [15:0] cfg_idx = 0;
  logic [31:0] cfg_data = 0;
  logic out_valid;
  logic [1:0] out_ch;
  logic signed [15:0] out_phase;
  int checks = 0, failures = 0;

  frdemod #(.CHANNELS(CH), .USE_WINDOW(1'b1)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(cfg_sel_e sel, int idx, int data);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_idx = 16'(idx); cfg_data = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  logic [31:0] inc;
  int  win [N];
  real expq [$], trueq [$];
  int  expc [$], expw [$];
  int  got = 0, windowed_runs = 0;
  real err_max [2];

  function automatic real wrap(real d);
    while (d > 32768.0) d -= 65536.0;
    while (d < -32768.0) d += 65536.0;
    return d;
  endfunction

  always @(negedge clk) if (!rst && out_valid) begin
    real e, tq, d;
    int c, w;
    e = expq.pop_front(); tq = trueq.pop_front();
    c = expc.pop_front(); w = expw.pop_front();
    d = wrap(real'(out_phase) - e);
    checks++;
    if (d > 8.0 || d < -8.0 || int'(out_ch) != c) begin
      failures++; $display("ch %0d/%0d phase %0d exp %f", out_ch, c, out_phase, e);
    end
    d = wrap(real'(out_phase) - tq);
    if (d < 0) d = -d;
    if (d > err_max[w]) err_max[w] = d;
    got++;
  end

  function automatic real sig(int n, real th1, real th2);
    return $rtoi(DC + A * $cos(2.0 * PI * K1 * n / N + th1) + A * $cos(2.0 * PI * K2 * n / N + th2));
  endfunction

  initial begin
    err_max[0] = 0.0; err_max[1] = 0.0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 2**14; i++)
      cfg(CFG_SINE_LUT, i, $rtoi(32767.0 * $sin(2.0 * PI * (i + 0.5) / 65536.0) + 0.5));
    inc = 32'($rtoi(K1 / N * 4294967296.0));
    for (int c = 0; c < CH; c++) begin
      cfg(CFG_PHASE_INC, c, inc);
      cfg(CFG_OFFSET, c, 0);
    end
    cfg(CFG_RAMP_LEN, 0, N);
    cfg(CFG_O_BEG, 0, 0);
    cfg(CFG_O_END, 0, 0);
    for (int pass = 0; pass < 2; pass++) begin
      // pass 0: rectangular, pass 1: Blackman over the N-1 summed samples
      for (int n = 0; n < N; n++) begin
        real x;
        x = 2.0 * PI * n / (N - 2);
        win[n] = (pass == 0) ? 32768 : $rtoi(32768.0 * (0.42 - 0.5 * $cos(x) + 0.08 * $cos(2.0 * x)) + 0.5);
        cfg(CFG_WINDOW, n, win[n]);
      end
      if (pass == 1) windowed_runs++;
      for (int r = 0; r < RAMPS_EACH; r++) begin
        real th1 [CH], th2 [CH], sc [CH], ss [CH];
        for (int c = 0; c < CH; c++) begin
          th1[c] = 2.0 * PI * ($urandom % 1000) / 1000.0;
          th2[c] = 2.0 * PI * (c * RAMPS_EACH + r) / (CH * RAMPS_EACH);
          sc[c] = 0.0; ss[c] = 0.0;
        end
        for (int n = 0; n <= N - 2; n++)
          for (int c = 0; c < CH; c++) begin
            int sw;
            real a;
            logic [31:0] ph;
            sw = (int'(sig(n, th1[c], th2[c])) * win[n]) >>> 15;
            ph = 32'(n) * inc;
            a = 2.0 * PI * real'(ph[31:16]) / 65536.0;
            sc[c] += sw * $cos(a);
            ss[c] += sw * $sin(a);
          end
        for (int c = 0; c < CH; c++) begin
          expq.push_back($atan2(sc[c], ss[c]) / (2.0 * PI) * 65536.0);
          trueq.push_back((th1[c] + PI / 2.0) / (2.0 * PI) * 65536.0);
          expc.push_back(c);
          expw.push_back(pass);
        end
        for (int n = 0; n < N; n++)
          for (int c = 0; c < CH; c++) begin
            @(negedge clk);
            in_valid = 1; in_sync = (n == 0 && c == 0);
            in_s = 16'($rtoi(sig(n, th1[c], th2[c])));
          end
      end
      @(negedge clk);
      in_valid = 0;
      repeat (200) @(negedge clk);
    end
    checks += 4;
    if (got != 2 * RAMPS_EACH * CH) begin failures++; $display("results %0d", got); end
    $display("largest error against the true phase: rectangular %0.1f LSB, Blackman %0.1f LSB",
             err_max[0], err_max[1]);
    if (err_max[1] > 20.0) begin failures++; $display("Blackman error too large"); end
    if (err_max[1] * 4.0 > err_max[0]) begin failures++; $display("window gives no isolation"); end
    if (windowed_runs == 0) begin failures++; $display("window never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
