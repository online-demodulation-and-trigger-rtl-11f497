// tb_sync_fifo: random pushes and pops against a queue model, checking
// order, data, empty and full, including filling the FIFO completely.
module tb_sync_fifo;
  localparam int D = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0, empty, full;
  logic [15:0] wr_data = 0, rd_data;
  logic [15:0] q[$];
  int checks = 0, failures = 0, fulls = 0;
  sync_fifo #(.DEPTH(D), .W(16)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D) ||
          (q.size() > 0 && rd_data != q[0])) begin
        failures++;
        $display("k=%0d size %0d empty %b full %b data %h", k, q.size(), empty, full, rd_data);
      end
      if (full) fulls++;
      wr_en = ($urandom % 100) < ((k / 500) % 2 ? 70 : 35) && !full;
      rd_en = ($urandom % 100) < ((k / 500) % 2 ? 35 : 70) && !empty;
      wr_data = 16'($urandom);
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
