// tb_demod_ctrl: drives frames with periodic sync pulses (and stretches
// without sync) and compares channel, sample number, first/start/last and
// accumulate-enable with a reference model of the window o_beg..N-2-o_end.
module tb_demod_ctrl;
  localparam int CH = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_sync = 0;
  logic [15:0] ramp_len = 20, o_beg = 3, o_end = 2;
  logic [1:0] out_ch;
  logic [15:0] out_n;
  logic out_first, out_acc_en, out_acc_start, out_acc_last;
  int checks = 0, failures = 0;
  int nstart = 0, nlast = 0;
  demod_ctrl #(.CHANNELS(CH)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic frame(bit sync, int n, bit run_in);
    // after the last sample of the window the machine waits for the next sync
    bit run;
    run = run_in && (n <= int'(ramp_len) - 2 - int'(o_end));
    for (int c = 0; c < CH; c++) begin
      bit en;
      @(negedge clk);
      in_valid = 1; in_sync = sync && c == 0;
      #1;
      en = run && n >= o_beg && n <= ramp_len - 2 - o_end;
      checks++;
      if (out_ch != 2'(c) || out_acc_en != en || out_first != (run && n == 0) ||
          out_acc_start != (en && n == o_beg) || out_acc_last != (en && n == ramp_len - 2 - o_end) ||
          (run && out_n != 16'(n))) begin
        failures++;
        $display("mismatch n=%0d c=%0d ch=%0d outn=%0d en=%b/%b first=%b last=%b", n, c, out_ch, out_n, out_acc_en, en, out_first, out_acc_last);
      end
      if (out_acc_start) nstart++;
      if (out_acc_last) nlast++;
      // an idle cycle now and then
      if ($urandom % 3 == 0) begin
        @(negedge clk);
        in_valid = 0; in_sync = 0;
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int f = 0; f < 5; f++) frame(0, 0, 0);          // before first sync: idle
    for (int r = 0; r < 4; r++) begin
      for (int n = 0; n < ramp_len; n++) frame(n == 0, n, 1);
      for (int n = ramp_len; n < ramp_len + 3; n++) frame(0, n, 0);  // late sync: wait
    end
    o_beg = 0; o_end = 0;
    for (int n = 0; n < ramp_len; n++) frame(n == 0, n, 1);
    // a sync in the middle of a ramp restarts it
    for (int n = 0; n < 7; n++) frame(n == 0, n, 1);
    for (int n = 0; n < ramp_len; n++) frame(n == 0, n, 1);
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (nstart != 7 * CH || nlast != 6 * CH) begin
      failures++; $display("starts %0d lasts %0d", nstart, nlast);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
