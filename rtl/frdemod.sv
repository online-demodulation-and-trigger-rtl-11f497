// frdemod: multi-channel flux-ramp demodulator.
//
// Turns the TDM stream of CHANNELS SQUID channels into one phase value per
// channel and flux ramp, the quantity proportional to the sensor flux:
//
//   phi_m = atan2( sum s(n) cos(2 pi f_r/f_s n), sum s(n) sin(2 pi f_r/f_s n) )
//
// summed over o_beg <= n <= N-2-o_end of ramp m. Chain, one sample per clock:
//   abs_cordic  |I + jQ| of the complex envelope (microwave SQUID readout), or,
//               with USE_WINDOW = 1, the real input in_s times a window
//               coefficient w[n] from window_ram (dc-SQUID readout);
//   demod_ctrl  channel and in-ramp sample counters, restarted by in_sync;
//   nco         per-channel sine/cosine at phase n * f_r/f_s;
//   correlator  (s - offset) * sin and * cos into accumulators kept in a
//               shifting ring buffer;
//   truncation  common right shift of both sums to 24 bits;
//   sync_fifo   holds the results of all channels, which finish together;
//   atan_cordic sequential arc-tangent, 16-bit phase (2^16 = 2*pi).
//
// Configuration writes (cfg_we, cfg_sel = frd_pkg::cfg_sel_e, cfg_idx,
// cfg_data) set per-channel phase increments and offsets, the sine and
// window tables, the ramp length N and the skipped samples o_beg and o_end.
// After reset N = 125 (15.625 MHz sampling / 125 kHz ramp), o_beg = o_end = 0.
//
// Timing: the input accepts one sample per clock (in_valid may have gaps
// between samples). in_sync must accompany the sample of channel 0. The
// phases of a ramp leave as out_valid pulses in channel order, one every
// ITER+2 = 20 clocks, starting about 25 clocks after the last sample of the
// correlation window.
//
// The chain, its order and the ring-buffer organisation follow the
// published design; widths, the configuration port and the CORDIC internals
// are this implementation's choice.
module frdemod
  import frd_pkg::*;
#(
  parameter int unsigned CHANNELS   = frd_pkg::CHANNELS,
  parameter bit          USE_WINDOW = 1'b0
) (
  input  logic                        clk,
  input  logic                        rst,
  // TDM input
  input  logic                        in_valid,
  input  logic signed [IQ_W-1:0]      in_i,
  input  logic signed [IQ_W-1:0]      in_q,
  input  logic signed [IQ_W-1:0]      in_s,
  input  logic                        in_sync,
  // configuration
  input  logic                        cfg_we,
  input  cfg_sel_e                    cfg_sel,
  input  logic [15:0]                 cfg_idx,
  input  logic [31:0]                 cfg_data,
  // phase output
  output logic                        out_valid,
  output logic [$clog2(CHANNELS)-1:0] out_ch,
  output logic signed [PHASE_W-1:0]   out_phase
);
  localparam int unsigned CW = $clog2(CHANNELS);

  // ---------------- configuration registers --------------------------------
  logic [RAMP_W-1:0] ramp_len, o_beg, o_end;
  always_ff @(posedge clk) begin
    if (rst) begin
      ramp_len <= RAMP_W'(125);
      o_beg    <= '0;
      o_end    <= '0;
    end else if (cfg_we) begin
      case (cfg_sel)
        CFG_RAMP_LEN: ramp_len <= cfg_data[RAMP_W-1:0];
        CFG_O_BEG:    o_beg    <= cfg_data[RAMP_W-1:0];
        CFG_O_END:    o_end    <= cfg_data[RAMP_W-1:0];
        default: ;
      endcase
    end
  end

  // ---------------- stage A: signal source ---------------------------------
  logic                  a_valid, a_sync;
  logic signed [S_W-1:0] a_s;

  if (USE_WINDOW) begin : g_real
    assign a_valid = in_valid;
    assign a_sync  = in_sync;
    assign a_s     = S_W'(in_s);
  end else begin : g_abs
    logic [IQ_W-1:0] mag;
    abs_cordic #(.IN_W(IQ_W), .STAGES(16), .USER_W(1)) u_abs (
      .clk, .rst, .in_valid, .in_i, .in_q, .in_user(in_sync),
      .out_valid(a_valid), .out_mag(mag), .out_user(a_sync));
    assign a_s = $signed({1'b0, mag});
  end

  // ---------------- control logic, NCO and window --------------------------
  logic [CW-1:0]     a_ch;
  logic [RAMP_W-1:0] a_n;
  logic a_first, a_en, a_start, a_last;

  demod_ctrl #(.CHANNELS(CHANNELS), .RAMP_W(RAMP_W)) u_ctrl (
    .clk, .rst, .in_valid(a_valid), .in_sync(a_sync),
    .ramp_len, .o_beg, .o_end,
    .out_ch(a_ch), .out_n(a_n), .out_first(a_first),
    .out_acc_en(a_en), .out_acc_start(a_start), .out_acc_last(a_last));

  logic                          b_nco_valid;
  logic signed [NCO_AMP_W-1:0]   b_sin, b_cos;
  nco #(.CHANNELS(CHANNELS), .ADDR_W(NCO_ADDR_W), .AMP_W(NCO_AMP_W), .ACC_W(NCO_ACC_W)) u_nco (
    .clk, .rst, .in_valid(a_valid), .in_ch(a_ch), .in_first(a_first),
    .inc_we(cfg_we && cfg_sel == CFG_PHASE_INC), .inc_ch(cfg_idx[CW-1:0]), .inc_data(cfg_data),
    .lut_we(cfg_we && cfg_sel == CFG_SINE_LUT), .lut_addr(cfg_idx[NCO_ADDR_W-3:0]),
    .lut_data(cfg_data[NCO_AMP_W-1:0]),
    .out_valid(b_nco_valid), .out_sin(b_sin), .out_cos(b_cos));

  // ---------------- stage B: window and correlation ------------------------
  logic                  b_valid, b_en, b_start, b_last;
  logic [CW-1:0]         b_ch;
  logic signed [S_W-1:0] b_s, b_sw;

  always_ff @(posedge clk) begin
    b_valid <= rst ? 1'b0 : a_valid;
    b_ch    <= a_ch;
    b_s     <= a_s;
    b_en    <= a_en;
    b_start <= a_start;
    b_last  <= a_last;
  end

  if (USE_WINDOW) begin : g_win
    logic [WIN_W-1:0]          w;
    logic signed [S_W+WIN_W:0] sw;
    window_ram #(.DEPTH(WIN_DEPTH), .COEF_W(WIN_W)) u_win (
      .clk, .wr_en(cfg_we && cfg_sel == CFG_WINDOW),
      .wr_addr(cfg_idx[$clog2(WIN_DEPTH)-1:0]), .wr_data(cfg_data[WIN_W-1:0]),
      .rd_addr(a_n[$clog2(WIN_DEPTH)-1:0]), .rd_data(w));
    assign sw   = b_s * $signed({1'b0, w});
    assign b_sw = S_W'(sw >>> (WIN_W - 1));
  end else begin : g_nowin
    assign b_sw = b_s;
  end

  logic                         c_valid;
  logic [CW-1:0]                c_ch;
  logic signed [CORR_ACC_W-1:0] c_sin, c_cos;

  correlator #(.CHANNELS(CHANNELS), .S_W(S_W), .AMP_W(NCO_AMP_W), .ACC_W(CORR_ACC_W)) u_corr (
    .clk, .rst, .in_valid(b_valid), .in_ch(b_ch), .in_s(b_sw),
    .in_sin(b_sin), .in_cos(b_cos),
    .in_acc_en(b_en), .in_acc_start(b_start), .in_acc_last(b_last),
    .off_we(cfg_we && cfg_sel == CFG_OFFSET), .off_ch(cfg_idx[CW-1:0]),
    .off_data(cfg_data[S_W-1:0]),
    .out_valid(c_valid), .out_ch(c_ch), .out_acc_sin(c_sin), .out_acc_cos(c_cos));

  // ---------------- truncation, FIFO, arctan -------------------------------
  logic                      d_valid;
  logic signed [TRUNC_W-1:0] d_sin, d_cos;
  logic [CW-1:0]             d_ch;

  truncation #(.IN_W(CORR_ACC_W), .OUT_W(TRUNC_W), .USER_W(CW)) u_trunc (
    .clk, .rst, .in_valid(c_valid), .in_a(c_sin), .in_b(c_cos), .in_user(c_ch),
    .out_valid(d_valid), .out_a(d_sin), .out_b(d_cos), .out_user(d_ch));

  localparam int unsigned FW = CW + 2 * TRUNC_W;
  logic [FW-1:0] f_head;
  logic          f_empty, f_full, at_ready;

  sync_fifo #(.DEPTH(2**CW), .W(FW)) u_fifo (
    .clk, .rst, .wr_en(d_valid), .wr_data({d_ch, d_sin, d_cos}),
    .rd_en(!f_empty && at_ready), .rd_data(f_head), .empty(f_empty), .full(f_full));

  atan_cordic #(.IN_W(TRUNC_W), .OUT_W(PHASE_W), .ITER(18), .USER_W(CW)) u_atan (
    .clk, .rst, .in_valid(!f_empty), .in_ready(at_ready),
    .in_y(f_head[TRUNC_W-1:0]), .in_x(f_head[2*TRUNC_W-1:TRUNC_W]),
    .in_user(f_head[FW-1 -: CW]),
    .out_valid, .out_phase, .out_user(out_ch));

  // the scaled results of one ramp must fit the FIFO
  a_fifo_room: assert property (@(posedge clk) disable iff (rst) d_valid |-> !f_full);
endmodule
