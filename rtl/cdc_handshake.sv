// cdc_handshake: passes one W-bit word at a time between two clock domains.
//
// Source side: when s_valid and s_ready, the word is captured in a source
// register and a request bit toggles; s_ready stays low until the
// acknowledge toggle has come back through a two-flop synchroniser.
// Destination side: the request toggle is synchronised with two flops; while
// it differs from the local acknowledge bit, d_valid is high and d_data shows
// the captured word, which is stable during the whole exchange. d_valid &&
// d_ready toggles the acknowledge bit. One word needs about two
// synchronisation delays in each direction, ample for descriptors, of which
// only a few exist. Each side has its own synchronous reset; both must be
// reset together.
// The published design says only "clock domain crossing with handshaking";
// this toggle protocol is this implementation's choice.
module cdc_handshake #(
  parameter int unsigned W = 96
) (
  input  logic         s_clk,
  input  logic         s_rst,
  input  logic         s_valid,
  output logic         s_ready,
  input  logic [W-1:0] s_data,
  input  logic         d_clk,
  input  logic         d_rst,
  output logic         d_valid,
  input  logic         d_ready,
  output logic [W-1:0] d_data
);
  logic         req, ack;
  logic [1:0]   ack_sync, req_sync;
  logic [W-1:0] hold;

  // source domain
  assign s_ready = (req == ack_sync[1]);
  always_ff @(posedge s_clk) begin
    if (s_rst) begin
      req      <= 1'b0;
      ack_sync <= '0;
    end else begin
      ack_sync <= {ack_sync[0], ack};
      if (s_valid && s_ready) req <= ~req;
    end
  end
  always_ff @(posedge s_clk) begin
    if (s_valid && s_ready) hold <= s_data;
  end

  // destination domain
  assign d_valid = (req_sync[1] != ack);
  assign d_data  = hold;
  always_ff @(posedge d_clk) begin
    if (d_rst) begin
      ack      <= 1'b0;
      req_sync <= '0;
    end else begin
      req_sync <= {req_sync[0], req};
      if (d_valid && d_ready) ack <= ~ack;
    end
  end
endmodule
