// event_detect: online trigger and event buffer for a TDM phase stream.
//
// Signal clock domain (clk):
//   FIFO stage 1/2   two tdm_delay lines of MAW_LEN frames giving x[n-L] and
//                    x[n-2L] for the moving-average filters;
//   trigger_engine   MAW difference filter and 3-point peak detector;
//   pretrigger FIFO  tdm_delay of pretrig_len frames (<= 256) after stage 2,
//                    so that a stored event starts before its trigger;
//   timestamp        free-running cycle counter;
//   storage_logic    per-channel trigger state machine writing events into
//                    SLOTS memory slots managed by descriptors;
//   desc_fifo x2     free list (full after reset) and filled list;
//   axil_regs        AXI4-Lite register interface.
// Crossing: event_bram (write on clk, read on clk_dma) and two cdc_handshake
// channels, one for filled descriptors, one for returned free descriptors.
// DMA clock domain (clk_dma): forwarding_fsm sends header + samples of each
// filled slot on m_axis_* and returns the descriptor.
//
// Input: in_valid/in_ch/in_data, one sample per channel per frame, channels
// in order 0..CHANNELS-1. A stored event holds the pre-trigger FIFO output
// from the trigger cycle on; the first sample was taken
// 2*MAW_LEN + pretrig_len frames before the sample that completed the peak.
// Output: see forwarding_fsm for the packet format.
// Latency from sample to trigger decision: 3 clocks.
//
// The block structure follows the published design (Fig. 5 of the source
// publication): eight slots, a four-sample MAW, a 256-sample pre-trigger
// FIFO and 32 channels. Word widths, the register map and the packet layout
// are this implementation's choices.
module event_detect
  import frd_pkg::*;
#(
  parameter int unsigned CHANNELS     = frd_pkg::CHANNELS,
  parameter int unsigned SLOTS        = frd_pkg::SLOTS,
  parameter int unsigned SLOT_DEPTH   = frd_pkg::SLOT_DEPTH,
  parameter int unsigned MAW_LEN      = frd_pkg::MAW_LEN,
  parameter int unsigned PRETRIG_MAX  = frd_pkg::PRETRIG_MAX
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        clk_dma,
  input  logic                        rst_dma,
  // TDM sample stream
  input  logic                        in_valid,
  input  logic [$clog2(CHANNELS)-1:0] in_ch,
  input  logic signed [SAMPLE_W-1:0]  in_data,
  // AXI4-Lite
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
  // event stream (clk_dma)
  output logic                        m_axis_tvalid,
  input  logic                        m_axis_tready,
  output logic [AXIS_W-1:0]           m_axis_tdata,
  output logic                        m_axis_tlast
);
  localparam int unsigned CW     = $clog2(CHANNELS);
  localparam int unsigned PRE_W  = $clog2(PRETRIG_MAX + 1);
  localparam int unsigned MEM_AW = $clog2(SLOTS * SLOT_DEPTH);
  localparam int unsigned W      = SAMPLE_W;

  // ---------------- registers ----------------------------------------------
  logic              enable;
  logic [TRIG_W-1:0] threshold;
  logic [PRE_W-1:0]  pretrig_len;
  logic [LEN_W-1:0]  ev_len;
  logic [31:0]       discarded, stored;

  axil_regs #(.ADDR_W(8), .THR_W(TRIG_W), .PRE_W(PRE_W), .LEN_W(LEN_W)) u_regs (
    .clk, .rst,
    .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready), .s_awaddr(s_axil_awaddr),
    .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready), .s_wdata(s_axil_wdata),
    .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready), .s_bresp(s_axil_bresp),
    .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready), .s_araddr(s_axil_araddr),
    .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready), .s_rdata(s_axil_rdata),
    .s_rresp(s_axil_rresp),
    .enable, .threshold, .pretrig_len, .ev_len, .discarded, .stored);

  // ---------------- FIFO stages 1 and 2 ------------------------------------
  localparam int unsigned ML_W = $clog2(MAW_LEN + 1);
  logic          s1_valid, s2_valid;
  logic [W-1:0]  d1, d2;
  logic [CW+W-1:0]   s1_side;
  logic [CW+2*W-1:0] s2_side;

  tdm_delay #(.CHANNELS(CHANNELS), .MAX_FRAMES(MAW_LEN), .W(W), .SIDE_W(CW+W)) u_stage1 (
    .clk, .rst, .in_valid, .in_data(in_data), .in_side({in_ch, in_data}),
    .len(ML_W'(MAW_LEN)), .out_valid(s1_valid), .out_data(d1), .out_side(s1_side));

  tdm_delay #(.CHANNELS(CHANNELS), .MAX_FRAMES(MAW_LEN), .W(W), .SIDE_W(CW+2*W)) u_stage2 (
    .clk, .rst, .in_valid(s1_valid), .in_data(d1), .in_side({s1_side, d1}),
    .len(ML_W'(MAW_LEN)), .out_valid(s2_valid), .out_data(d2), .out_side(s2_side));

  // ---------------- trigger engine and pre-trigger FIFO --------------------
  logic                     t_valid, t_fire, p_valid;
  logic [CW-1:0]            t_ch;
  logic signed [TRIG_W-1:0] t_value;
  logic [W-1:0]             p_data;

  trigger_engine #(.CHANNELS(CHANNELS), .W(W), .MAW_LEN(MAW_LEN), .TRIG_W(TRIG_W)) u_trig (
    .clk, .rst, .in_valid(s2_valid), .in_ch(s2_side[CW+2*W-1 -: CW]),
    .in_x(s2_side[2*W-1:W]), .in_d1(s2_side[W-1:0]), .in_d2(d2),
    .threshold, .enable,
    .out_valid(t_valid), .out_ch(t_ch), .out_fire(t_fire), .out_value(t_value));

  tdm_delay #(.CHANNELS(CHANNELS), .MAX_FRAMES(PRETRIG_MAX), .W(W), .SIDE_W(1)) u_pretrig (
    .clk, .rst, .in_valid(s2_valid), .in_data(d2), .in_side(1'b0),
    .len(pretrig_len), .out_valid(p_valid), .out_data(p_data), .out_side());

  // ---------------- timestamp and storage ----------------------------------
  logic [TS_W-1:0] ts;
  timestamp_counter #(.W(TS_W)) u_ts (.clk, .rst, .clear(1'b0), .count(ts));

  desc_t        e_head, f_head, f_push_desc, ret_desc_s, ret_desc_d, fwd_desc;
  logic         e_valid, e_pop, e_full, f_valid, f_full, f_push;
  logic         mem_we;
  logic [MEM_AW-1:0] mem_waddr, mem_raddr;
  logic [W-1:0]      mem_wdata, mem_rdata;
  logic              mem_re;

  storage_logic #(.CHANNELS(CHANNELS), .SLOTS(SLOTS), .SLOT_DEPTH(SLOT_DEPTH), .W(W)) u_store (
    .clk, .rst, .in_valid(t_valid), .in_ch(t_ch), .in_data(p_data),
    .in_fire(t_fire), .in_value(t_value), .timestamp(ts), .ev_len,
    .empty_valid(e_valid), .empty_desc(e_head), .empty_pop(e_pop),
    .filled_push(f_push), .filled_desc(f_push_desc),
    .mem_we, .mem_addr(mem_waddr), .mem_data(mem_wdata),
    .discarded, .stored);

  // ---------------- descriptor FIFOs and clock crossing --------------------
  logic r_valid_s, cdc_f_ready, cdc_f_dvalid, fwd_ready, ret_valid_d, ret_ready_d;

  desc_fifo #(.DEPTH(SLOTS), .W(DESC_W), .INIT_SLOTS(1'b1)) u_empty (
    .clk, .rst, .push(r_valid_s), .push_data(ret_desc_s), .pop(e_pop),
    .head(e_head), .valid(e_valid), .full(e_full));

  desc_fifo #(.DEPTH(SLOTS), .W(DESC_W), .INIT_SLOTS(1'b0)) u_filled (
    .clk, .rst, .push(f_push), .push_data(f_push_desc), .pop(f_valid && cdc_f_ready),
    .head(f_head), .valid(f_valid), .full(f_full));

  cdc_handshake #(.W(DESC_W)) u_cdc_filled (
    .s_clk(clk), .s_rst(rst), .s_valid(f_valid), .s_ready(cdc_f_ready), .s_data(f_head),
    .d_clk(clk_dma), .d_rst(rst_dma), .d_valid(cdc_f_dvalid), .d_ready(fwd_ready),
    .d_data(fwd_desc));

  cdc_handshake #(.W(DESC_W)) u_cdc_return (
    .s_clk(clk_dma), .s_rst(rst_dma), .s_valid(ret_valid_d), .s_ready(ret_ready_d),
    .s_data(ret_desc_d),
    .d_clk(clk), .d_rst(rst), .d_valid(r_valid_s), .d_ready(!e_full), .d_data(ret_desc_s));

  event_bram #(.SLOTS(SLOTS), .SLOT_DEPTH(SLOT_DEPTH), .W(W)) u_bram (
    .wclk(clk), .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .rclk(clk_dma), .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata));

  // ---------------- DMA side -----------------------------------------------
  forwarding_fsm #(.SLOTS(SLOTS), .SLOT_DEPTH(SLOT_DEPTH), .W(W)) u_fwd (
    .clk(clk_dma), .rst(rst_dma),
    .desc_valid(cdc_f_dvalid), .desc_ready(fwd_ready), .desc(fwd_desc),
    .ret_valid(ret_valid_d), .ret_ready(ret_ready_d), .ret_desc(ret_desc_d),
    .mem_re, .mem_addr(mem_raddr), .mem_data(mem_rdata),
    .m_tvalid(m_axis_tvalid), .m_tready(m_axis_tready),
    .m_tdata(m_axis_tdata), .m_tlast(m_axis_tlast));

  // a filled descriptor always finds room: there are only SLOTS descriptors
  a_filled_room: assert property (@(posedge clk) disable iff (rst) f_push |-> (!f_full));
  // the pre-trigger sample and the trigger decision belong to the same sample
  a_aligned: assert property (@(posedge clk) disable iff (rst) p_valid == t_valid);
endmodule
