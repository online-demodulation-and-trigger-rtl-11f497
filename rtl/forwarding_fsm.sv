// forwarding_fsm: DMA-side state machine that empties filled event slots
// into a stream.
//
// Every clock it checks for a filled descriptor (desc_valid). When one is
// there it accepts it and sends a packet on the AXI4-Stream-style master
// port (m_tvalid/m_tready/m_tdata/m_tlast):
//   word 0  {pileup, 7'b0, channel (8 bits), length (16 bits)}
//   word 1  timestamp[31:0]
//   word 2  {16'b0, timestamp[47:32]}
//   word 3  trigger value, sign-extended
//   word 4.. one event sample per word, sign-extended, m_tlast on the last.
// It reads the samples from the slot memory (registered read, one cycle)
// and finally returns the descriptor, cleared except for its slot number, to
// the free list (ret_valid/ret_ready).
//
// The header-before-data order and the descriptor recycling follow the
// published design; the word layout is this implementation's choice.
// Timing: one header word per accepted beat, one sample every two clocks.
// Only the slot field of ret_desc is driven; its other fields are constant
// zero on purpose (the free list needs nothing else).
module forwarding_fsm
  import frd_pkg::*;
#(
  parameter int unsigned SLOTS      = frd_pkg::SLOTS,
  parameter int unsigned SLOT_DEPTH = frd_pkg::SLOT_DEPTH,
  parameter int unsigned W          = frd_pkg::SAMPLE_W,
  parameter int unsigned MEM_AW     = $clog2(SLOTS * SLOT_DEPTH)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                desc_valid,
  output logic                desc_ready,
  input  desc_t               desc,
  output logic                ret_valid,
  input  logic                ret_ready,
  output desc_t               ret_desc,
  output logic                mem_re,
  output logic [MEM_AW-1:0]   mem_addr,
  input  logic [W-1:0]        mem_data,
  output logic                m_tvalid,
  input  logic                m_tready,
  output logic [AXIS_W-1:0]   m_tdata,
  output logic                m_tlast
);
  localparam int unsigned DW = $clog2(SLOT_DEPTH);

  typedef enum logic [2:0] {IDLE, HEADER, READ, SEND, RETURN} state_e;
  state_e state;

  desc_t            d;
  logic [1:0]       hidx;
  logic [LEN_W-1:0] idx;

  logic [AXIS_W-1:0] hdr;
  always_comb begin
    case (hidx)
      2'd0:    hdr = {d.pileup, 7'b0, 8'(d.channel), 16'(d.length)};
      2'd1:    hdr = d.timestamp[31:0];
      2'd2:    hdr = {16'b0, d.timestamp[47:32]};
      default: hdr = AXIS_W'(d.trig_value);
    endcase
  end

  assign desc_ready = (state == IDLE);
  assign ret_valid  = (state == RETURN);
  always_comb begin
    ret_desc      = '0;
    ret_desc.slot = d.slot;
  end
  assign mem_re   = (state == READ);
  assign mem_addr = MEM_AW'({d.slot[$clog2(SLOTS)-1:0], idx[DW-1:0]});
  assign m_tvalid = (state == HEADER) || (state == SEND);
  assign m_tdata  = (state == HEADER) ? hdr : AXIS_W'($signed(mem_data));
  assign m_tlast  = (state == SEND) && (idx + 1'b1 == d.length);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE;
      hidx  <= '0;
      idx   <= '0;
    end else begin
      case (state)
        IDLE: if (desc_valid) begin
          d     <= desc;
          hidx  <= '0;
          idx   <= '0;
          state <= HEADER;
        end
        HEADER: if (m_tready) begin
          hidx <= hidx + 1'b1;
          if (hidx == 2'd3) state <= READ;
        end
        READ: state <= SEND;
        SEND: if (m_tready) begin
          if (m_tlast) state <= RETURN;
          else begin
            idx   <= idx + 1'b1;
            state <= READ;
          end
        end
        RETURN: if (ret_ready) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
