// frd_top: flux-ramp demodulation followed by online event detection.
//
// The TDM stream of CHANNELS complex SQUID envelopes (in_i/in_q, one channel
// per clock, with the ramp sync on channel 0's sample) is demodulated by
// frdemod into one phase value per channel and flux ramp; that phase stream
// feeds event_detect, which triggers on pulses, stores each event with a
// header in one of SLOTS memory slots and sends it out on m_axis_* in the
// DMA clock domain. The phase stream is also brought out (phase_*) for
// monitoring. USE_WINDOW = 1 selects the real-valued dc-SQUID input in_s
// with a window function instead of the magnitude of in_i/in_q.
//
// Configuration: demodulator through cfg_* (see frd_pkg::cfg_sel_e), event
// detector through the AXI4-Lite port s_axil_* (clk domain). The AXI4-Lite
// response codes s_axil_bresp/rresp are constant OKAY.
module frd_top
  import frd_pkg::*;
#(
  parameter int unsigned CHANNELS   = frd_pkg::CHANNELS,
  parameter bit          USE_WINDOW = 1'b0
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        clk_dma,
  input  logic                        rst_dma,
  input  logic                        in_valid,
  input  logic signed [IQ_W-1:0]      in_i,
  input  logic signed [IQ_W-1:0]      in_q,
  input  logic signed [IQ_W-1:0]      in_s,
  input  logic                        in_sync,
  input  logic                        cfg_we,
  input  logic [2:0]                  cfg_sel,
  input  logic [15:0]                 cfg_idx,
  input  logic [31:0]                 cfg_data,
  input  logic                        s_axil_awvalid,
  output logic                        s_axil_awready,
  input  logic [7:0]                  s_axil_awaddr,
  input  logic                        s_axil_wvalid,
  output logic                        s_axil_wready,
  input  logic [31:0]                 s_axil_wdata,
  output logic                        s_axil_bvalid,
  input  logic                        s_axil_bready,
  output logic [1:0]                  s_axil_bresp,
  input  logic                        s_axil_arvalid,
  output logic                        s_axil_arready,
  input  logic [7:0]                  s_axil_araddr,
  output logic                        s_axil_rvalid,
  input  logic                        s_axil_rready,
  output logic [31:0]                 s_axil_rdata,
  output logic [1:0]                  s_axil_rresp,
  output logic                        phase_valid,
  output logic [$clog2(CHANNELS)-1:0] phase_ch,
  output logic signed [PHASE_W-1:0]   phase,
  output logic                        m_axis_tvalid,
  input  logic                        m_axis_tready,
  output logic [AXIS_W-1:0]           m_axis_tdata,
  output logic                        m_axis_tlast
);
  frdemod #(.CHANNELS(CHANNELS), .USE_WINDOW(USE_WINDOW)) u_demod (
    .clk, .rst, .in_valid, .in_i, .in_q, .in_s, .in_sync,
    .cfg_we, .cfg_sel(cfg_sel_e'(cfg_sel)), .cfg_idx, .cfg_data,
    .out_valid(phase_valid), .out_ch(phase_ch), .out_phase(phase));

  event_detect #(.CHANNELS(CHANNELS)) u_event (
    .clk, .rst, .clk_dma, .rst_dma,
    .in_valid(phase_valid), .in_ch(phase_ch), .in_data(phase),
    .s_axil_awvalid, .s_axil_awready, .s_axil_awaddr,
    .s_axil_wvalid, .s_axil_wready, .s_axil_wdata,
    .s_axil_bvalid, .s_axil_bready, .s_axil_bresp,
    .s_axil_arvalid, .s_axil_arready, .s_axil_araddr,
    .s_axil_rvalid, .s_axil_rready, .s_axil_rdata, .s_axil_rresp,
    .m_axis_tvalid, .m_axis_tready, .m_axis_tdata, .m_axis_tlast);
endmodule
