// truncation: scaling unit between the correlator and the arctan CORDIC.
//
// Finds the most significant significant bit of the two correlation sums
// (the larger bit length of the two signed values) and shifts both right,
// arithmetically, by the same amount so that each fits OUT_W signed bits.
// A common shift keeps the ratio of the two values, which is all the
// arc-tangent needs. Sums that already fit are passed unshifted.
//
// Timing: out_* registered, one clock after in_valid.
// The function (MSB detection and common truncation) follows the published
// design; the widths are this implementation's choice.
module truncation #(
  parameter int unsigned IN_W   = 48,
  parameter int unsigned OUT_W  = 24,
  parameter int unsigned USER_W = 5
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   in_a,
  input  logic signed [IN_W-1:0]   in_b,
  input  logic [USER_W-1:0]        in_user,
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  out_a,
  output logic signed [OUT_W-1:0]  out_b,
  output logic [USER_W-1:0]        out_user
);
  localparam int unsigned SH_W = $clog2(IN_W + 1);

  // bits that differ from the sign bit mark the magnitude
  logic [IN_W-1:0] ma, mb, m;
  assign ma = in_a[IN_W-1] ? ~in_a : in_a;
  assign mb = in_b[IN_W-1] ? ~in_b : in_b;
  assign m  = ma | mb;

  logic [SH_W-1:0] nbits;  // bits needed without the sign
  always_comb begin
    nbits = '0;
    for (int i = 0; i < IN_W; i++)
      if (m[i]) nbits = SH_W'(i + 1);
  end

  logic [SH_W-1:0] shift;
  assign shift = (32'(nbits) + 1 > OUT_W) ? SH_W'(32'(nbits) + 1 - OUT_W) : '0;

  logic signed [IN_W-1:0] sa, sb;
  assign sa = in_a >>> shift;
  assign sb = in_b >>> shift;

  always_ff @(posedge clk) begin
    out_valid <= rst ? 1'b0 : in_valid;
    out_a     <= sa[OUT_W-1:0];
    out_b     <= sb[OUT_W-1:0];
    out_user  <= in_user;
  end
endmodule
