// tb_frdemod: end-to-end test of the flux-ramp demodulator at its default
// size (32 channels, ramp of N = 125 samples per channel).
//
// Every channel carries s(n) = DC + A*cos(2*pi*k*n/N + theta) with k = 5
// periods per ramp and a channel- and ramp-dependent phase theta, presented
// as a complex envelope rotated by a random angle (so the magnitude stage is
// exercised). The DC is removed through the per-channel offset. For each
// ramp and channel the expected phase is computed with the correlation
// formula in real arithmetic over the same window (o_beg = 2, o_end = 1) and
// compared with the demodulator output (tolerance 8 LSB of 2^16). The test
// also checks channel order, the 20-cycle (ITER+2) spacing of the results and that
// all results of a ramp leave before the next ramp ends.
// Runs at the module's default parameters.
module tb_frdemod;
  import frd_pkg::*;
  localparam int CH = 32, N = 125, K = 5, OB = 2, OE = 1;
  localparam real PI = 3.14159265358979;
  localparam int DC = 20000, A = 8000;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;
  logic in_valid = 0, in_sync = 0, cfg_we = 0;
  logic signed [15:0] in_i = 0, in_q = 0, in_s = 0;
  cfg_sel_e cfg_sel = CFG_RAMP_LEN;
  logic [15:0] cfg_idx = 0;
  logic [31:0] cfg_data = 0;
  logic out_valid;
  logic [4:0] out_ch;
  logic signed [15:0] out_phase;
  int checks = 0, failures = 0;

  frdemod dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
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
  real expq [$];
  int  expc [$];
  int  got = 0, last_t = 0, t = 0, nramps = 0;

  always @(posedge clk) t <= t + 1;

  // compare results as they arrive
  always @(negedge clk) begin
    if (!rst && out_valid) begin
      real e;
      int d, c;
      e = expq.pop_front();
      c = expc.pop_front();
      d = int'(out_phase) - $rtoi(e + (e >= 0 ? 0.5 : -0.5));
      if (d > 32768) d -= 65536;
      if (d < -32768) d += 65536;
      checks++;
      if (d > 8 || d < -8 || int'(out_ch) != c) begin
        failures++;
        $display("ch %0d/%0d phase %0d exp %f", out_ch, c, out_phase, e);
      end
      if (got % CH != 0) begin
        checks++;
        if (t - last_t != 20) begin failures++; $display("spacing %0d", t - last_t); end
      end
      last_t = t;
      got++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 2**14; i++)
      cfg(CFG_SINE_LUT, i, $rtoi(32767.0 * $sin(2.0 * PI * (i + 0.5) / 65536.0) + 0.5));
    inc = 32'($rtoi(real'(K) / N * 4294967296.0));
    for (int c = 0; c < CH; c++) begin
      cfg(CFG_PHASE_INC, c, inc);
      cfg(CFG_OFFSET, c, DC);
    end
    cfg(CFG_RAMP_LEN, 0, N);
    cfg(CFG_O_BEG, 0, OB);
    cfg(CFG_O_END, 0, OE);
    for (int r = 0; r < 4; r++) begin
      real th [CH], rot [CH], sc [CH], ss [CH];
      for (int c = 0; c < CH; c++) begin
        th[c] = 2.0 * PI * ((c * 7 + r * 3) % 32) / 32.0 + 0.1 * r;
        rot[c] = 2.0 * PI * ($urandom % 1000) / 1000.0;
        sc[c] = 0.0; ss[c] = 0.0;
      end
      // reference correlation, with the oscillator's own phase steps
      for (int n = OB; n <= N - 2 - OE; n++) begin
        for (int c = 0; c < CH; c++) begin
          real s, a;
          logic [31:0] ph;
          s = $rtoi(DC + A * $cos(2.0 * PI * K * n / N + th[c]));
          ph = 32'(n) * inc;
          a = 2.0 * PI * real'(ph[31:16]) / 65536.0;
          sc[c] += (s - DC) * $cos(a);
          ss[c] += (s - DC) * $sin(a);
        end
      end
      for (int c = 0; c < CH; c++) begin
        expq.push_back($atan2(sc[c], ss[c]) / (2.0 * PI) * 65536.0);
        expc.push_back(c);
      end
      for (int n = 0; n < N; n++) begin
        for (int c = 0; c < CH; c++) begin
          real s;
          s = $rtoi(DC + A * $cos(2.0 * PI * K * n / N + th[c]));
          @(negedge clk);
          in_valid = 1; in_sync = (n == 0 && c == 0);
          in_i = 16'($rtoi(s * $cos(rot[c])));
          in_q = 16'($rtoi(s * $sin(rot[c])));
        end
      end
      // the previous ramp's results are all out, this ramp's are leaving
      checks++;
      if (got < r * CH || got >= (r + 1) * CH) begin
        failures++; $display("ramp %0d: %0d results at its end", r, got);
      end
      nramps++;
    end
    // let the last ramp finish
    @(negedge clk);
    in_valid = 0;
    repeat (1000) @(negedge clk);
    checks++;
    if (got != 4 * CH) begin failures++; $display("results %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
