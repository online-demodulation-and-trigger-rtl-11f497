// storage_logic: trigger state machine that cuts events out of the TDM
// stream and writes them into descriptor-managed memory slots.
//
// For every sample (in_ch, in_data from the pre-trigger FIFO, in_fire and
// in_value from the trigger engine) the metadata of in_ch is looked up:
//   idle channel, trigger fires: a free descriptor is taken from the empty
//     descriptor FIFO, timestamp and trigger value are recorded and the
//     sample is written to word 0 of the descriptor's slot. If no free
//     descriptor exists (more simultaneous events than slots) the event is
//     discarded and counted in discarded.
//   recording channel: the sample is written to the next word of its slot;
//     a further trigger marks the event as pile-up. After ev_len samples the
//     completed descriptor (slot, length, channel, timestamp, trigger value,
//     pile-up) is pushed into the filled descriptor FIFO and stored counts
//     one more event.
// ev_len is clamped to 1..SLOT_DEPTH.
//
// The per-channel metadata (the published design's metadata ring buffer)
// is held in arrays indexed by the TDM channel. Timing: memory write and
// FIFO push/pop in the clock cycle of the sample (the FIFO head is read
// combinationally). The behaviour follows the published description; the
// discard counter and the clamping are this implementation's additions.
// mem_data is the input sample itself and filled_desc.length the clamped
// ev_len, so those outputs follow inputs directly.
module storage_logic
  import frd_pkg::*;
#(
  parameter int unsigned CHANNELS   = frd_pkg::CHANNELS,
  parameter int unsigned SLOTS      = frd_pkg::SLOTS,
  parameter int unsigned SLOT_DEPTH = frd_pkg::SLOT_DEPTH,
  parameter int unsigned W          = frd_pkg::SAMPLE_W,
  parameter int unsigned MEM_AW     = $clog2(SLOTS * SLOT_DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic [$clog2(CHANNELS)-1:0] in_ch,
  input  logic [W-1:0]                in_data,
  input  logic                        in_fire,
  input  logic signed [TRIG_W-1:0]    in_value,
  input  logic [TS_W-1:0]             timestamp,
  input  logic [LEN_W-1:0]            ev_len,
  // free descriptors
  input  logic                        empty_valid,
  input  desc_t                       empty_desc,
  output logic                        empty_pop,
  // filled descriptors
  output logic                        filled_push,
  output desc_t                       filled_desc,
  // slot memory write port
  output logic                        mem_we,
  output logic [MEM_AW-1:0]           mem_addr,
  output logic [W-1:0]                mem_data,
  // statistics
  output logic [31:0]                 discarded,
  output logic [31:0]                 stored
);
  localparam int unsigned SW  = $clog2(SLOTS);
  localparam int unsigned DW  = $clog2(SLOT_DEPTH);

  logic                     active [CHANNELS];
  logic [SW-1:0]            slot   [CHANNELS];
  logic [LEN_W-1:0]         cnt    [CHANNELS];
  logic                     pile   [CHANNELS];
  logic [TS_W-1:0]          ts     [CHANNELS];
  logic signed [TRIG_W-1:0] tv     [CHANNELS];

  logic [LEN_W-1:0] len_c;
  assign len_c = (ev_len == '0) ? LEN_W'(1)
               : (32'(ev_len) > SLOT_DEPTH) ? LEN_W'(SLOT_DEPTH) : ev_len;

  logic          rec, start, finish, drop;
  logic [SW-1:0] cur_slot;
  logic [LEN_W-1:0] cur_cnt;

  assign rec      = in_valid && active[in_ch];
  assign start    = in_valid && !active[in_ch] && in_fire && empty_valid;
  assign drop     = in_valid && !active[in_ch] && in_fire && !empty_valid;
  assign cur_slot = rec ? slot[in_ch] : empty_desc.slot[SW-1:0];
  assign cur_cnt  = rec ? cnt[in_ch] : '0;
  assign finish   = (rec || start) && (cur_cnt + 1'b1 == len_c);

  assign empty_pop = start;
  assign mem_we    = rec || start;
  assign mem_addr  = MEM_AW'({cur_slot, cur_cnt[DW-1:0]});
  assign mem_data  = in_data;

  assign filled_push = finish;
  always_comb begin
    filled_desc            = '0;
    filled_desc.slot       = SLOT_W'(cur_slot);
    filled_desc.length     = len_c;
    filled_desc.channel    = CH_W'(in_ch);
    filled_desc.timestamp  = rec ? ts[in_ch] : timestamp;
    filled_desc.trig_value = rec ? tv[in_ch] : in_value;
    filled_desc.pileup     = rec && (pile[in_ch] || in_fire);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < CHANNELS; c++) begin
        active[c] <= 1'b0;
        pile[c]   <= 1'b0;
        cnt[c]    <= '0;
      end
      discarded <= '0;
      stored    <= '0;
    end else begin
      if (start) begin
        slot[in_ch] <= empty_desc.slot[SW-1:0];
        ts[in_ch]   <= timestamp;
        tv[in_ch]   <= in_value;
        pile[in_ch] <= 1'b0;
      end
      if (rec && in_fire) pile[in_ch] <= 1'b1;
      if (rec || start) begin
        active[in_ch] <= !finish;
        cnt[in_ch]    <= cur_cnt + 1'b1;
      end
      if (drop)   discarded <= discarded + 1'b1;
      if (finish) stored    <= stored + 1'b1;
    end
  end
endmodule
