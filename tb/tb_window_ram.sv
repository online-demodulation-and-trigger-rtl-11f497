// tb_window_ram: writes a Bartlett (triangle) window and random values and
// reads them back, checking the one-cycle registered read.
module tb_window_ram;
  localparam int D = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [9:0] wr_addr = 0, rd_addr = 0;
  logic [15:0] wr_data = 0, rd_data;
  logic [15:0] model [D];
  int checks = 0, failures = 0;
  window_ram #(.DEPTH(D), .COEF_W(16)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) begin
      model[i] = (i < D / 2) ? 16'(i * 64) : 16'((D - 1 - i) * 64);
      if (i % 7 == 3) model[i] = 16'($urandom);
      wr_en <= 1; wr_addr <= 10'(i); wr_data <= model[i];
      @(posedge clk);
    end
    wr_en <= 0;
    for (int k = 0; k < 3000; k++) begin
      int a;
      a = $urandom % D;
      rd_addr <= 10'(a);
      @(posedge clk);
      #1;
      checks++;
      if (rd_data != model[a]) begin failures++; $display("addr %0d got %h exp %h", a, rd_data, model[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
