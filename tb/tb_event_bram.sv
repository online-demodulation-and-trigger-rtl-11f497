// tb_event_bram: fills all slots from the write clock and reads random
// addresses from an unrelated read clock, checking the registered read data.
module tb_event_bram;
  localparam int NS = 8, SD = 64, AW = 9;
  logic wclk = 0, rclk = 0;
  always #5 wclk = ~wclk;
  always #7 rclk = ~rclk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [15:0] wdata = 0, rdata;
  logic [15:0] model [NS * SD];
  int checks = 0, failures = 0;
  event_bram #(.SLOTS(NS), .SLOT_DEPTH(SD), .W(16)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NS * SD; i++) begin
      @(negedge wclk);
      we = 1; waddr = AW'(i); wdata = 16'($urandom); model[i] = wdata;
    end
    @(negedge wclk);
    we = 0;
    for (int k = 0; k < 2000; k++) begin
      int a;
      a = $urandom % (NS * SD);
      @(negedge rclk);
      re = 1; raddr = AW'(a);
      @(negedge rclk);
      re = 0;
      raddr = AW'($urandom);   // no read enable: data must hold
      @(negedge rclk);
      checks++;
      if (rdata != model[a]) begin failures++; $display("addr %0d got %h exp %h", a, rdata, model[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
