// demod_ctrl: control logic of the flux-ramp demodulator.
//
// Counts the TDM channel of every sample and the sample number n within the
// current flux ramp. A sync pulse from the ramp generator (given with the
// sample of channel 0) starts a ramp at n = 0. Samples with
// o_beg <= n <= ramp_len-2-o_end are accumulated: out_acc_start marks the
// first of them (accumulator is cleared), out_acc_last the last one (the
// correlation is complete and leaves the ring buffer). After the last sample
// of the window, and before the first sync, the machine waits for the next
// sync. out_first marks n = 0 and restarts the oscillator phase.
//
// The window bounds follow the summation limits of the published correlation
// formula, read relative to the ramp start. The channel counter runs freely
// from reset (sync is required to coincide with channel 0), which keeps the
// shifting ring buffer aligned with the channel numbers; that requirement is
// this implementation's choice.
//
// Timing: purely combinational outputs for the sample on in_valid; state
// updates on the clock edge that accepts the sample.
module demod_ctrl #(
  parameter int unsigned CHANNELS = 32,
  parameter int unsigned RAMP_W   = 16
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic                        in_sync,
  input  logic [RAMP_W-1:0]           ramp_len,
  input  logic [RAMP_W-1:0]           o_beg,
  input  logic [RAMP_W-1:0]           o_end,
  output logic [$clog2(CHANNELS)-1:0] out_ch,
  output logic [RAMP_W-1:0]           out_n,
  output logic                        out_first,
  output logic                        out_acc_en,
  output logic                        out_acc_start,
  output logic                        out_acc_last
);
  typedef enum logic {WAIT_SYNC, RAMP} state_e;
  state_e state;

  logic [$clog2(CHANNELS)-1:0] ch;
  logic [RAMP_W-1:0]           n;
  logic [RAMP_W-1:0]           n_cur;
  logic [RAMP_W:0]             n_end;
  logic                        running;

  assign n_end   = {1'b0, ramp_len} - (RAMP_W+1)'(2) - {1'b0, o_end};
  assign n_cur   = in_sync ? '0 : n;
  assign running = in_sync || (state == RAMP);

  assign out_ch        = ch;
  assign out_n         = n_cur;
  assign out_first     = running && (n_cur == '0);
  assign out_acc_en    = running && (n_cur >= o_beg) && ({1'b0, n_cur} <= n_end);
  assign out_acc_start = out_acc_en && (n_cur == o_beg);
  assign out_acc_last  = out_acc_en && ({1'b0, n_cur} == n_end);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= WAIT_SYNC;
      ch    <= '0;
      n     <= '0;
    end else if (in_valid) begin
      ch <= (32'(ch) == CHANNELS-1) ? '0 : ch + 1'b1;
      if (in_sync) begin
        state <= RAMP;
        n     <= '0;
      end
      if (running && 32'(ch) == CHANNELS-1) begin
        if (out_acc_last || {1'b0, n_cur} > n_end) state <= WAIT_SYNC;
        n <= n_cur + 1'b1;
      end
    end
  end

  // sync must come with the first channel of a frame
  a_sync_frame: assert property (@(posedge clk) disable iff (rst)
                                 (in_valid && in_sync) |-> (ch == '0));
endmodule
