// axil_regs: AXI4-Lite register interface of the event detector.
//
// Register map (32-bit registers, byte addresses):
//   0x00  control     bit 0: trigger enable (reset 0)
//   0x04  threshold   trigger threshold on |t| (reset 0x100)
//   0x08  pretrigger  pre-trigger length in samples per channel (reset 32)
//   0x0C  evlen       event length in samples (reset 438 = 3.5 ms / 8 us)
//   0x10  discarded   events lost for lack of a free slot (read only)
//   0x14  stored      events stored (read only)
// Writes need AWVALID and WVALID together and are answered with BRESP OKAY
// one clock later; WSTRB is ignored. A read answers one clock after ARVALID.
// Unmapped addresses read 0. The interface runs on the signal clock.
// The published design shows only that such an interface sets up the
// pre-trigger FIFO, trigger engine and storage logic; the map is this
// implementation's own.
module axil_regs #(
  parameter int unsigned ADDR_W    = 8,
  parameter int unsigned THR_W     = 19,
  parameter int unsigned PRE_W     = 9,
  parameter int unsigned LEN_W     = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_wvalid,
  output logic              s_wready,
  input  logic [31:0]       s_wdata,
  output logic              s_bvalid,
  input  logic              s_bready,
  output logic [1:0]        s_bresp,
  input  logic              s_arvalid,
  output logic              s_arready,
  input  logic [ADDR_W-1:0] s_araddr,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              enable,
  output logic [THR_W-1:0]  threshold,
  output logic [PRE_W-1:0]  pretrig_len,
  output logic [LEN_W-1:0]  ev_len,
  input  logic [31:0]       discarded,
  input  logic [31:0]       stored
);
  logic wr_go, rd_go;
  assign wr_go     = s_awvalid && s_wvalid && !s_bvalid;
  assign rd_go     = s_arvalid && !s_rvalid;
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign s_arready = rd_go;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (rst) begin
      enable      <= 1'b0;
      threshold   <= THR_W'(256);
      pretrig_len <= PRE_W'(32);
      ev_len      <= LEN_W'(438);
      s_bvalid    <= 1'b0;
      s_rvalid    <= 1'b0;
      s_rdata     <= '0;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (wr_go) begin
        s_bvalid <= 1'b1;
        case (s_awaddr[ADDR_W-1:2])
          (ADDR_W-2)'(0): enable      <= s_wdata[0];
          (ADDR_W-2)'(1): threshold   <= s_wdata[THR_W-1:0];
          (ADDR_W-2)'(2): pretrig_len <= s_wdata[PRE_W-1:0];
          (ADDR_W-2)'(3): ev_len      <= s_wdata[LEN_W-1:0];
          default: ;
        endcase
      end
      if (rd_go) begin
        s_rvalid <= 1'b1;
        case (s_araddr[ADDR_W-1:2])
          (ADDR_W-2)'(0): s_rdata <= 32'(enable);
          (ADDR_W-2)'(1): s_rdata <= 32'(threshold);
          (ADDR_W-2)'(2): s_rdata <= 32'(pretrig_len);
          (ADDR_W-2)'(3): s_rdata <= 32'(ev_len);
          (ADDR_W-2)'(4): s_rdata <= discarded;
          (ADDR_W-2)'(5): s_rdata <= stored;
          default:        s_rdata <= '0;
        endcase
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (rst) (s_bvalid && !s_bready) |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (rst) (s_rvalid && !s_rready) |=> s_rvalid && $stable(s_rdata));
endmodule
