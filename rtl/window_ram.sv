// window_ram: memory of window coefficients for the flux-ramp correlation.
//
// Holds one unsigned Q1.15 coefficient per sample position n of the ramp
// (DEPTH = maximum ramp length, 1024 as in the published dc-SQUID variant).
// The demodulator multiplies the real input sample by w[n] before the
// pre-adder, which tapers the correlation period and suppresses spectral
// leakage between SQUIDs with different modulation frequencies (rectangular,
// Bartlett or Blackman windows, for example). The shape is loaded by
// software through the write port.
//
// Timing: rd_data is registered, valid one clock after rd_addr.
module window_ram #(
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned COEF_W = 16
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [COEF_W-1:0]        wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [COEF_W-1:0]        rd_data
);
  logic [COEF_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
