// trigger_engine: trigger filter and 3-point peak detector for a TDM stream.
//
// Two recursive moving-average-window (MAW) filters of MAW_LEN samples run
// per channel: acc1 += x[n] - x[n-L] sums the newest L samples and
// acc2 += x[n-L] - x[n-2L] the L samples before them (L = MAW_LEN). The
// delayed samples x[n-L] (in_d1) and x[n-2L] (in_d2) come from the two
// external shift registers (tdm_delay). Their difference t = acc1 - acc2 is
// a smoothed derivative, large on the steep rising edge of a pulse. The
// 3-point peak detector compares |t| of the last three samples of a channel
// and fires for the middle one when
//     |t[n-2]| < |t[n-1]| >= |t[n]|  and  |t[n-1]| > threshold,
// i.e. when |t| has just reached its highest point above the threshold.
// out_value is t[n-1], the trigger value stored with the event.
//
// Per-channel state (two accumulators, two previous t values) is kept in
// arrays indexed by in_ch. Timing: outputs registered, one clock after
// in_valid. The filter structure (two MAWs with shift register, subtractor
// and accumulator, a final subtractor, a 3-point trigger with threshold)
// follows the published design; the exact comparison rule is this
// implementation's reading of it.
module trigger_engine #(
  parameter int unsigned CHANNELS = 32,
  parameter int unsigned W        = 16,
  parameter int unsigned MAW_LEN  = 4,
  parameter int unsigned TRIG_W   = W + $clog2(MAW_LEN) + 1
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic [$clog2(CHANNELS)-1:0] in_ch,
  input  logic signed [W-1:0]         in_x,
  input  logic signed [W-1:0]         in_d1,
  input  logic signed [W-1:0]         in_d2,
  input  logic [TRIG_W-1:0]           threshold,
  input  logic                        enable,
  output logic                        out_valid,
  output logic [$clog2(CHANNELS)-1:0] out_ch,
  output logic                        out_fire,
  output logic signed [TRIG_W-1:0]    out_value
);
  localparam int unsigned AW = W + $clog2(MAW_LEN) + 1;  // MAW accumulator

  logic signed [AW-1:0]     acc1 [CHANNELS];
  logic signed [AW-1:0]     acc2 [CHANNELS];
  logic signed [TRIG_W-1:0] t1   [CHANNELS];   // t[n-1]
  logic [TRIG_W-1:0]        a2   [CHANNELS];   // |t[n-2]|

  logic signed [AW-1:0]     acc1_n, acc2_n;
  logic signed [TRIG_W-1:0] t0;
  logic [TRIG_W-1:0]        a0, a1;
  logic                     fire;

  function automatic logic [TRIG_W-1:0] absv(input logic signed [TRIG_W-1:0] v);
    return (v < 0) ? TRIG_W'(-v) : TRIG_W'(v);
  endfunction

  assign acc1_n = acc1[in_ch] + AW'(in_x)  - AW'(in_d1);
  assign acc2_n = acc2[in_ch] + AW'(in_d1) - AW'(in_d2);
  assign t0     = TRIG_W'(acc1_n) - TRIG_W'(acc2_n);
  assign a0     = absv(t0);
  assign a1     = absv(t1[in_ch]);
  assign fire   = enable && (a1 > threshold) && (a1 > a2[in_ch]) && (a1 >= a0);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < CHANNELS; c++) begin
        acc1[c] <= '0;
        acc2[c] <= '0;
        t1[c]   <= '0;
        a2[c]   <= '0;
      end
      out_valid <= 1'b0;
      out_fire  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_fire  <= in_valid && fire;
      if (in_valid) begin
        acc1[in_ch] <= acc1_n;
        acc2[in_ch] <= acc2_n;
        t1[in_ch]   <= t0;
        a2[in_ch]   <= a1;
      end
    end
  end

  always_ff @(posedge clk) begin
    out_ch    <= in_ch;
    out_value <= t1[in_ch];
  end
endmodule
