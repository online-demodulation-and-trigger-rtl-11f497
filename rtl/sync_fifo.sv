// sync_fifo: single-clock first-in first-out buffer.
//
// DEPTH entries (a power of two) of W bits in a memory with read and write
// pointers one bit wider than the address. Show-ahead: rd_data is the head
// entry whenever empty is low; rd_en removes it. A write to a full FIFO and
// a read from an empty one are ignored (and flagged by assertions).
// In the demodulator it collects the scaled correlation results of all
// channels, which arrive back to back at the end of a ramp, for the
// sequential arctan CORDIC.
module sync_fifo #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned W     = 56
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign empty   = (wp == rp);
  assign full    = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full) wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) wr_en |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) rd_en |-> !empty);
endmodule
