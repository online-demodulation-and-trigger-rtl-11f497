// timestamp_counter: free-running time base of the event detector.
//
// Counts signal-clock cycles from reset (or from a clear pulse) with W bits;
// the storage logic copies the count into a channel's metadata when that
// channel triggers. At 500 MHz a 48-bit count wraps after about 6.5 days.
// Unit and width are this implementation's choice.
module timestamp_counter #(
  parameter int unsigned W = 48
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         clear,
  output logic [W-1:0] count
);
  always_ff @(posedge clk) begin
    if (rst || clear) count <= '0;
    else              count <= count + 1'b1;
  end
endmodule
