// event_bram: two-port, two-clock memory holding the event slots.
//
// SLOTS * SLOT_DEPTH words of W bits; slot k occupies addresses
// k*SLOT_DEPTH .. k*SLOT_DEPTH + SLOT_DEPTH-1. The write port runs on the
// signal-processing clock (storage logic), the read port on the DMA clock
// (forwarding state machine); rdata is registered and valid one read-clock
// cycle after re. The descriptor protocol guarantees that a slot is never
// read and written at the same time. Maps onto a block RAM.
module event_bram #(
  parameter int unsigned SLOTS      = 8,
  parameter int unsigned SLOT_DEPTH = 512,
  parameter int unsigned W          = 16,
  parameter int unsigned AW         = $clog2(SLOTS * SLOT_DEPTH)
) (
  input  logic          wclk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          rclk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [SLOTS * SLOT_DEPTH];

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
