// desc_fifo: shift-register FIFO for event descriptors.
//
// DEPTH registers of W bits; entry 0 is the head and is always visible on
// head when valid is high. A pop shifts all entries one place towards the
// head; a push writes behind the last occupied entry (both may happen in the
// same cycle). With INIT_SLOTS = 1 the FIFO comes out of reset full, entry i
// holding the value i: this is the free-descriptor list with every slot
// number 0..DEPTH-1 (the slot is the least significant field of a
// descriptor). With INIT_SLOTS = 0 it comes out of reset empty, as the
// filled-descriptor list. Pushing into a full or popping from an empty
// FIFO is ignored and flagged by assertions.
module desc_fifo #(
  parameter int unsigned DEPTH      = 8,
  parameter int unsigned W          = 96,
  parameter bit          INIT_SLOTS = 1'b0
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         push,
  input  logic [W-1:0] push_data,
  input  logic         pop,
  output logic [W-1:0] head,
  output logic         valid,
  output logic         full
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [W-1:0]  regs [DEPTH];
  logic [CW-1:0] count;
  logic          do_pop, do_push;
  logic [CW-1:0] wpos;    // slot written by a push, below DEPTH when do_push

  assign head    = regs[0];
  assign valid   = (count != '0);
  assign full    = (32'(count) == DEPTH);
  assign do_pop  = pop && valid;
  assign do_push = push && (!full || do_pop);
  assign wpos    = do_pop ? count - 1'b1 : count;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) regs[i] <= INIT_SLOTS ? W'(i) : '0;
      count <= INIT_SLOTS ? CW'(DEPTH) : '0;
    end else begin
      if (do_pop)
        for (int i = 0; i < DEPTH - 1; i++) regs[i] <= regs[i+1];
      if (do_push) regs[$clog2(DEPTH)'(wpos)] <= push_data;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) pop |-> valid);
endmodule
