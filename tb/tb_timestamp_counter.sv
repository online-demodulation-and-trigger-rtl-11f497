// tb_timestamp_counter: the count must advance by one per clock after reset
// and restart from zero after clear.
module tb_timestamp_counter;
  logic clk = 0, rst = 1, clear = 0;
  always #5 clk = ~clk;
  logic [47:0] count;
  int checks = 0, failures = 0;
  timestamp_counter #(.W(48)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    @(negedge clk);
    rst = 0;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      checks++;
      if (count != 48'(k + 1)) begin failures++; $display("k=%0d count %0d", k, count); end
    end
    clear = 1;
    @(negedge clk);
    clear = 0;
    checks++;
    if (count != 0) begin failures++; $display("clear"); end
    for (int k = 0; k < 100; k++) begin
      @(negedge clk);
      checks++;
      if (count != 48'(k + 1)) begin failures++; $display("after clear k=%0d count %0d", k, count); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
