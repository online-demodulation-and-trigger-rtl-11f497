// tb_desc_fifo: the free-list variant must leave reset holding 0..DEPTH-1 in
// order; then random pushes and pops (also simultaneous) are compared with a
// queue model on both variants.
module tb_desc_fifo;
  localparam int D = 8, W = 20;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic push = 0, pop = 0;
  logic [W-1:0] push_data = 0, head0, head1;
  logic valid0, full0, valid1, full1;
  int checks = 0, failures = 0, fulls = 0;
  desc_fifo #(.DEPTH(D), .W(W), .INIT_SLOTS(1'b1)) dut_free (
    .clk, .rst, .push, .push_data, .pop, .head(head0), .valid(valid0), .full(full0));
  desc_fifo #(.DEPTH(D), .W(W), .INIT_SLOTS(1'b0)) dut_fill (
    .clk, .rst, .push, .push_data, .pop(pop && valid1), .head(head1), .valid(valid1), .full(full1));

  logic [W-1:0] q0 [$], q1 [$];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < D; i++) q0.push_back(W'(i));
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      checks++;
      if (valid0 != (q0.size() > 0) || full0 != (q0.size() == D) || (q0.size() > 0 && head0 != q0[0]) ||
          valid1 != (q1.size() > 0) || full1 != (q1.size() == D) || (q1.size() > 0 && head1 != q1[0])) begin
        failures++;
        $display("k=%0d sizes %0d %0d heads %h %h", k, q0.size(), q1.size(), head0, head1);
      end
      if (full1) fulls++;
      pop  = ($urandom % 100 < ((k / 300) % 2 ? 60 : 30)) && valid0;
      push = ($urandom % 100 < ((k / 300) % 2 ? 30 : 60)) && (!full0 || pop) && (!full1 || (pop && valid1));
      push_data = W'($urandom);
      if (pop) begin
        void'(q0.pop_front());
        if (q1.size() > 0) void'(q1.pop_front());
      end
      if (push) begin q0.push_back(push_data); q1.push_back(push_data); end
    end
    checks++;
    if (fulls == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
