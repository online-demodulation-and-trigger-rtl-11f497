// nco: multi-channel numerically controlled oscillator (direct digital
// synthesis) giving the sine and cosine references for the correlation.
//
// Every TDM channel has its own phase increment (f_r/f_s * 2^ACC_W) and phase
// accumulator. For each sample the current phase is used and the accumulator
// advances by the increment; on the first sample of a ramp (in_first, derived
// from the ramp sync) the phase restarts at zero, so sample n of a ramp sees
// phase n*inc. The upper ADDR_W bits of the phase address a quarter-wave sine
// table of 2^(ADDR_W-2) entries; the two upper phase bits select mirroring and
// sign. The cosine uses the same table at phase + 2^(ADDR_W-2).
//
// Table entry i must hold round((2^(AMP_W-1)-1) * sin(2*pi*(i+0.5)/2^ADDR_W)).
// The half-step offset makes the mirrored read (~i) exact. The table is
// written through lut_we/lut_addr/lut_data before operation (a RAM that
// software fills, this implementation's choice; it could equally be a ROM).
//
// Timing: out_sin/out_cos/out_valid one clock after in_valid.
// The 16-bit address and amplitude follow the published design; the 32-bit
// accumulator and the quarter-wave table are this implementation's choice.
module nco #(
  parameter int unsigned CHANNELS = 32,
  parameter int unsigned ADDR_W   = 16,
  parameter int unsigned AMP_W    = 16,
  parameter int unsigned ACC_W    = 32
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic [$clog2(CHANNELS)-1:0] in_ch,
  input  logic                        in_first,
  input  logic                        inc_we,
  input  logic [$clog2(CHANNELS)-1:0] inc_ch,
  input  logic [ACC_W-1:0]            inc_data,
  input  logic                        lut_we,
  input  logic [ADDR_W-3:0]           lut_addr,
  input  logic [AMP_W-1:0]            lut_data,
  output logic                        out_valid,
  output logic signed [AMP_W-1:0]     out_sin,
  output logic signed [AMP_W-1:0]     out_cos
);
  localparam int unsigned TA = ADDR_W - 2;

  logic [AMP_W-1:0] lut [2**TA];
  logic [ACC_W-1:0] inc [CHANNELS];
  logic [ACC_W-1:0] acc [CHANNELS];

  logic [ACC_W-1:0]  phase;
  logic [ADDR_W-1:0] p_sin, p_cos;
  assign phase = in_first ? '0 : acc[in_ch];
  assign p_sin = phase[ACC_W-1 -: ADDR_W];
  assign p_cos = p_sin + ADDR_W'(2**TA);

  function automatic logic [TA-1:0] fold(input logic [ADDR_W-1:0] p);
    return p[ADDR_W-2] ? ~p[TA-1:0] : p[TA-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < CHANNELS; c++) begin
        inc[c] <= '0;
        acc[c] <= '0;
      end
    end else begin
      if (inc_we) inc[inc_ch] <= inc_data;
      if (in_valid) acc[in_ch] <= phase + inc[in_ch];
    end
  end

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_addr] <= lut_data;
  end

  logic [AMP_W-1:0] t_sin, t_cos;
  logic             n_sin, n_cos;
  always_ff @(posedge clk) begin
    t_sin <= lut[fold(p_sin)];
    t_cos <= lut[fold(p_cos)];
    n_sin <= p_sin[ADDR_W-1];
    n_cos <= p_cos[ADDR_W-1];
    out_valid <= rst ? 1'b0 : in_valid;
  end

  assign out_sin = n_sin ? -$signed(t_sin) : $signed(t_sin);
  assign out_cos = n_cos ? -$signed(t_cos) : $signed(t_cos);
endmodule
