// atan_cordic: sequential arc-tangent CORDIC, phase = atan2(in_y, in_x).
//
// Vectoring mode, one micro-rotation per clock. A vector in the left half
// plane is first rotated by pi (x, y negated, angle preset to pi); then ITER
// rotations by +-atan(2^-i) drive y to zero while the angle register z sums
// the rotations. z is kept with 22 fractional bits of a turn and rounded to
// OUT_W bits, so 2^OUT_W corresponds to 2*pi and the output is the signed
// phase in [-pi, pi). The magnitude is not needed and the gain is ignored.
//
// Interface: in_valid/in_ready handshake; a result leaves as a single-cycle
// out_valid pulse (no back-pressure). in_user (the channel) travels along.
// Timing: ITER + 2 clocks from acceptance to out_valid; in_ready is high
// again on the cycle after out_valid.
//
// In the demodulator in_y is the cosine sum and in_x the sine sum, as in the
// published correlation formula. The published design uses a vendor core;
// the internals here are this implementation's own.
module atan_cordic #(
  parameter int unsigned IN_W   = 24,
  parameter int unsigned OUT_W  = 16,
  parameter int unsigned ITER   = 18,
  parameter int unsigned USER_W = 5
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [IN_W-1:0]  in_y,
  input  logic signed [IN_W-1:0]  in_x,
  input  logic [USER_W-1:0]       in_user,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_phase,
  output logic [USER_W-1:0]       out_user
);
  localparam int unsigned FB = 8;        // fraction bits: keeps small vectors precise
  localparam int unsigned XW = IN_W + 2 + FB;
  localparam int unsigned ZW = 22;       // angle: 2^ZW = one turn
  localparam int unsigned IW = $clog2(ITER + 1);

  // atan(2^-i) / (2*pi) * 2^22, rounded
  function automatic logic [ZW-1:0] atan_tab(input int i);
    case (i)
      0: return 22'd524288;  1: return 22'd309505;  2: return 22'd163534;
      3: return 22'd83012;   4: return 22'd41667;   5: return 22'd20854;
      6: return 22'd10430;   7: return 22'd5215;    8: return 22'd2608;
      9: return 22'd1304;   10: return 22'd652;    11: return 22'd326;
     12: return 22'd163;    13: return 22'd81;     14: return 22'd41;
     15: return 22'd20;     16: return 22'd10;     17: return 22'd5;
     18: return 22'd3;      19: return 22'd1;
     default: return '0;
    endcase
  endfunction

  typedef enum logic [1:0] {IDLE, ROTATE, DONE} state_e;
  state_e state;

  logic signed [XW-1:0] x, y;
  logic [ZW-1:0]        z;
  logic [IW-1:0]        it;
  logic [USER_W-1:0]    user;

  assign in_ready = (state == IDLE);

  logic [ZW-1:0] z_round;
  assign z_round = z + ZW'(2**(ZW - OUT_W - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= IDLE;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      case (state)
        IDLE: if (in_valid) begin
          if (in_x < 0) begin
            x <= -(XW'(in_x) <<< FB);
            y <= -(XW'(in_y) <<< FB);
            z <= ZW'(2**(ZW-1));
          end else begin
            x <= XW'(in_x) <<< FB;
            y <= XW'(in_y) <<< FB;
            z <= '0;
          end
          user  <= in_user;
          it    <= '0;
          state <= ROTATE;
        end
        ROTATE: begin
          if (y >= 0) begin
            x <= x + (y >>> it);
            y <= y - (x >>> it);
            z <= z + atan_tab(int'(it));
          end else begin
            x <= x - (y >>> it);
            y <= y + (x >>> it);
            z <= z - atan_tab(int'(it));
          end
          it <= it + 1'b1;
          if (32'(it) == ITER - 1) state <= DONE;
        end
        DONE: begin
          out_valid <= 1'b1;
          out_phase <= z_round[ZW-1 -: OUT_W];
          out_user  <= user;
          state     <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
