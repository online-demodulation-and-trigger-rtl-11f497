// abs_cordic: pipelined magnitude of a complex sample, sqrt(I^2 + Q^2).
//
// A radix-2 CORDIC in vectoring mode. The first stage folds the vector into
// the right half plane (x = |I|), then STAGES micro-rotations drive y to
// zero, one rotation per pipeline register, so one sample is accepted every
// clock. x then holds K*|z| with the CORDIC gain K = 1.6468; a final constant
// multiply by round(2^15/K) = 19898 removes the gain.
//
// Interface: in_valid/in_i/in_q/in_user in, out_valid/out_mag/out_user out.
// in_user is a side band (the ramp sync) carried along with the sample.
// Timing: latency STAGES + 2 clock cycles, throughput one sample per cycle.
//
// The published design uses a vendor CORDIC core for this step and only says
// that it is pipelined; the internals here are this implementation's own.
module abs_cordic #(
  parameter int unsigned IN_W   = 16,
  parameter int unsigned STAGES = 16,
  parameter int unsigned USER_W = 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  input  logic signed [IN_W-1:0] in_i,
  input  logic signed [IN_W-1:0] in_q,
  input  logic [USER_W-1:0] in_user,
  output logic              out_valid,
  output logic [IN_W-1:0]   out_mag,
  output logic [USER_W-1:0] out_user
);
  localparam int unsigned FB = 3;         // fraction bits against rounding drift
  localparam int unsigned XW = IN_W + 3 + FB;  // sqrt(2)*K growth, sign, fraction
  localparam logic [15:0] KINV = 16'd19898;

  logic signed [XW-1:0] x [STAGES+1];
  logic signed [XW-1:0] y [STAGES+1];
  logic [STAGES:0]      v;
  logic [USER_W-1:0]    u [STAGES+1];

  // stage 0: fold into the right half plane
  always_ff @(posedge clk) begin
    x[0] <= ((in_i < 0) ? -XW'(in_i) : XW'(in_i)) <<< FB;
    y[0] <= XW'(in_q) <<< FB;
    u[0] <= in_user;
    v[0] <= rst ? 1'b0 : in_valid;
  end

  for (genvar i = 0; i < STAGES; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (y[i] >= 0) begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
      end else begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
      end
      u[i+1] <= u[i];
      v[i+1] <= rst ? 1'b0 : v[i];
    end
  end

  // gain compensation, rounded
  logic [XW+15:0] prod;
  assign prod = $unsigned(x[STAGES]) * KINV;
  logic [XW-1:0] mag_full;
  assign mag_full = XW'((prod + (1 << (14 + FB))) >> (15 + FB));

  always_ff @(posedge clk) begin
    out_valid <= rst ? 1'b0 : v[STAGES];
    out_user  <= u[STAGES];
    out_mag   <= (mag_full > XW'({IN_W{1'b1}})) ? {IN_W{1'b1}} : mag_full[IN_W-1:0];
  end
endmodule
