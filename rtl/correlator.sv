// correlator: the two multiply-accumulate lanes of the flux-ramp
// demodulator, with their per-channel state in a shifting ring buffer.
//
// For every sample the pre-adder removes the channel's DC offset
// (d = s - offset), d is multiplied by the NCO sine and by the NCO cosine, and
// each product is added to the channel's accumulator. The two accumulators
// and the offset of all CHANNELS channels live in a ring buffer of CHANNELS
// entries that rotates by one entry per sample: the head entry belongs to the
// channel now on the input and, updated, goes to the tail. in_acc_start
// clears the accumulators before adding (first sample of the correlation
// window), in_acc_en gates accumulation, and in_acc_last completes the
// window: both sums then leave on out_acc_sin/out_acc_cos.
//
// The module counts the channel at the head of the ring itself (head_ch,
// advanced with every sample). An offset write (off_we) goes straight into
// the ring entry that holds channel off_ch at that moment, so offsets can be
// written at any time, with or without a running stream (this load mechanism
// is this implementation's choice; the pre-adder, multipliers, accumulators
// and the shifting ring follow the published block diagram).
//
// Timing: out_* are registered, one clock after the sample with in_acc_last.
// Requires a gap-free channel order 0..CHANNELS-1 in the TDM stream.
module correlator #(
  parameter int unsigned CHANNELS = 32,
  parameter int unsigned S_W      = 17,
  parameter int unsigned AMP_W    = 16,
  parameter int unsigned ACC_W    = 48
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic [$clog2(CHANNELS)-1:0] in_ch,     // for out_ch and a check
  input  logic signed [S_W-1:0]       in_s,
  input  logic signed [AMP_W-1:0]     in_sin,
  input  logic signed [AMP_W-1:0]     in_cos,
  input  logic                        in_acc_en,
  input  logic                        in_acc_start,
  input  logic                        in_acc_last,
  input  logic                        off_we,
  input  logic [$clog2(CHANNELS)-1:0] off_ch,
  input  logic signed [S_W-1:0]       off_data,
  output logic                        out_valid,
  output logic [$clog2(CHANNELS)-1:0] out_ch,
  output logic signed [ACC_W-1:0]     out_acc_sin,
  output logic signed [ACC_W-1:0]     out_acc_cos
);
  typedef struct packed {
    logic signed [ACC_W-1:0] acc_sin;
    logic signed [ACC_W-1:0] acc_cos;
    logic signed [S_W-1:0]   offset;
  } entry_t;

  entry_t ring [CHANNELS];

  localparam int unsigned CW = $clog2(CHANNELS);

  // channel at the head of the ring, and ring position of an offset write
  logic [CW-1:0] head_ch, off_pos;
  assign off_pos = (off_ch >= head_ch) ? off_ch - head_ch
                                       : CW'(32'(off_ch) + CHANNELS - 32'(head_ch));

  entry_t                  head, upd;
  logic                    take_off;
  logic signed [S_W:0]     diff;
  logic signed [S_W+AMP_W:0] p_sin, p_cos;
  logic signed [ACC_W-1:0] base_sin, base_cos;

  assign head     = ring[0];
  assign take_off = off_we && (off_pos == '0);
  assign upd.offset = take_off ? off_data : head.offset;
  // pre-adder, then multiplier
  assign diff  = (S_W+1)'(in_s) - (S_W+1)'(upd.offset);
  assign p_sin = diff * in_sin;
  assign p_cos = diff * in_cos;
  assign base_sin = in_acc_start ? '0 : head.acc_sin;
  assign base_cos = in_acc_start ? '0 : head.acc_cos;
  assign upd.acc_sin = in_acc_en ? base_sin + ACC_W'(p_sin) : head.acc_sin;
  assign upd.acc_cos = in_acc_en ? base_cos + ACC_W'(p_cos) : head.acc_cos;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < CHANNELS; c++) ring[c] <= '0;
      head_ch   <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && in_acc_last;
      if (in_valid) begin
        for (int c = 0; c < CHANNELS - 1; c++) ring[c] <= ring[c+1];
        ring[CHANNELS-1] <= upd;
        head_ch <= (32'(head_ch) == CHANNELS - 1) ? '0 : head_ch + 1'b1;
        if (off_we && off_pos != '0) ring[off_pos - 1'b1].offset <= off_data;
      end else if (off_we) begin
        ring[off_pos].offset <= off_data;
      end
    end
  end

  // the stream's channel numbers must match the ring rotation
  a_ring_aligned: assert property (@(posedge clk) disable iff (rst) in_valid |-> (in_ch == head_ch));

  always_ff @(posedge clk) begin
    out_ch      <= in_ch;
    out_acc_sin <= upd.acc_sin;
    out_acc_cos <= upd.acc_cos;
  end
endmodule
