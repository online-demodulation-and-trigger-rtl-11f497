// tdm_delay: per-channel delay line for a time-division multiplexed stream.
//
// Delays every channel of a CHANNELS-channel TDM stream by len frames, that
// is len*CHANNELS accepted samples, using a circular memory of
// CHANNELS*MAX_FRAMES entries: each accepted sample is written at the write
// pointer while the entry len*CHANNELS positions behind it is read. len is
// clamped to 1..MAX_FRAMES and may change at run time. Until len*CHANNELS
// samples have been written the output is 0 rather than uninitialised memory.
// in_side is a side band that is only registered, so that it leaves aligned
// with the delayed sample of the same clock.
//
// In the event detector it serves as the two MAW shift registers ("FIFO
// stage 1/2", fixed length MAW_LEN) and as the variable-length pre-trigger
// FIFO (up to 256 samples per channel).
// Timing: out_valid/out_data/out_side one clock after in_valid.
module tdm_delay #(
  parameter int unsigned CHANNELS   = 32,
  parameter int unsigned MAX_FRAMES = 256,
  parameter int unsigned W          = 16,
  parameter int unsigned SIDE_W     = 1,
  parameter int unsigned LEN_W      = $clog2(MAX_FRAMES + 1)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  input  logic [W-1:0]      in_data,
  input  logic [SIDE_W-1:0] in_side,
  input  logic [LEN_W-1:0]  len,
  output logic              out_valid,
  output logic [W-1:0]      out_data,
  output logic [SIDE_W-1:0] out_side
);
  localparam int unsigned DEPTH = CHANNELS * MAX_FRAMES;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   dly, filled;
  logic [LEN_W-1:0] len_c;

  assign len_c = (len == '0) ? LEN_W'(1) : (32'(len) > MAX_FRAMES) ? LEN_W'(MAX_FRAMES) : len;
  assign dly   = (AW+1)'(32'(len_c) * CHANNELS);
  assign rp    = ({1'b0, wp} >= dly) ? AW'({1'b0, wp} - dly) : AW'({1'b0, wp} + (AW+1)'(DEPTH) - dly);

  always_ff @(posedge clk) begin
    if (in_valid) begin
      mem[wp]  <= in_data;
      out_data <= (filled >= dly) ? mem[rp] : '0;
      out_side <= in_side;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp        <= '0;
      filled    <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
        if (32'(filled) < DEPTH) filled <= filled + 1'b1;
      end
    end
  end
endmodule
