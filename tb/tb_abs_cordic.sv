// tb_abs_cordic: checks the pipelined magnitude CORDIC against sqrt(I^2+Q^2)
// computed in real arithmetic, for corner vectors and random vectors, and
// checks the STAGES+2 cycle latency and one-sample-per-cycle throughput.
module tb_abs_cordic;
  localparam int STAGES = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic signed [15:0] in_i = 0, in_q = 0;
  logic [0:0] in_user = 0, out_user;
  logic out_valid;
  logic [15:0] out_mag;
  int checks = 0, failures = 0, cyc = 0;

  abs_cordic #(.IN_W(16), .STAGES(STAGES), .USER_W(1)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_q[$];
  int tin_q[$];
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      int e, t;
      e = exp_q.pop_front();
      t = tin_q.pop_front();
      checks++;
      if (out_mag > e + 2 || out_mag + 2 < e) begin
        failures++;
        $display("mag mismatch got %0d exp %0d", out_mag, e);
      end
      checks++;
      if (cyc - t != STAGES + 3) begin  // driven after edge t, captured at t+1
        failures++;
        $display("latency %0d", cyc - t);
      end
      if (out_user != 1'(t % 2)) begin failures++; $display("user"); end
    end
  end

  task automatic send(int i, int q);
    real m;
    in_valid <= 1; in_i <= 16'(i); in_q <= 16'(q);
    in_user <= 1'(cyc % 2);
    m = $sqrt(real'(i) * i + real'(q) * q);
    exp_q.push_back((m > 65535.0) ? 65535 : int'(m));
    tin_q.push_back(cyc);
    @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    send(0, 0); send(1000, 0); send(-1000, 0); send(0, 1000); send(0, -1000);
    send(32767, 32767); send(-32768, -32768); send(-32768, 32767); send(3, 4);
    for (int k = 0; k < 2000; k++) send($signed(16'($urandom)), $signed(16'($urandom)));
    in_valid <= 0;
    repeat (STAGES + 5) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
