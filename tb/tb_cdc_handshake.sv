// tb_cdc_handshake: random words cross from a 10 ns to a 13 ns clock domain
// (and, in a second instance, back the other way) with random readiness of
// the receiver; every word must arrive once, in order and unchanged.
module tb_cdc_handshake;
  localparam int W = 32, NW = 300;
  logic ca = 0, cb = 0, ra = 1, rb = 1;
  always #5 ca = ~ca;
  always #6.5 cb = ~cb;
  logic a_valid = 0, a_ready, b_valid, b_ready = 0;
  logic [W-1:0] a_data = 0, b_data;
  logic b2_valid = 0, b2_ready, a2_valid, a2_ready = 0;
  logic [W-1:0] b2_data = 0, a2_data;
  int checks = 0, failures = 0, got1 = 0, got2 = 0;

  cdc_handshake #(.W(W)) fwd (
    .s_clk(ca), .s_rst(ra), .s_valid(a_valid), .s_ready(a_ready), .s_data(a_data),
    .d_clk(cb), .d_rst(rb), .d_valid(b_valid), .d_ready(b_ready), .d_data(b_data));
  cdc_handshake #(.W(W)) bwd (
    .s_clk(cb), .s_rst(rb), .s_valid(b2_valid), .s_ready(b2_ready), .s_data(b2_data),
    .d_clk(ca), .d_rst(ra), .d_valid(a2_valid), .d_ready(a2_ready), .d_data(a2_data));

  logic [W-1:0] q1 [$], q2 [$];

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // senders
  initial begin
    repeat (3) @(negedge ca);
    ra = 0;
    for (int k = 0; k < NW; k++) begin
      @(negedge ca);
      a_valid = 1; a_data = W'($urandom);
      @(posedge ca);
      while (!a_ready) @(posedge ca);
      q1.push_back(a_data);
      @(negedge ca);
      a_valid = 0;
      repeat ($urandom % 3) @(negedge ca);
    end
  end
  initial begin
    repeat (3) @(negedge cb);
    rb = 0;
    for (int k = 0; k < NW; k++) begin
      @(negedge cb);
      b2_valid = 1; b2_data = W'($urandom);
      @(posedge cb);
      while (!b2_ready) @(posedge cb);
      q2.push_back(b2_data);
      @(negedge cb);
      b2_valid = 0;
    end
  end
  // receivers
  always @(negedge cb) b_ready <= ($urandom % 3 != 0);
  always @(negedge ca) a2_ready <= ($urandom % 2 != 0);
  always @(posedge cb) if (!rb && b_valid && b_ready) begin
    checks++; got1++;
    if (q1.size() == 0 || b_data != q1.pop_front()) begin failures++; $display("fwd word %0d wrong", got1); end
  end
  always @(posedge ca) if (!ra && a2_valid && a2_ready) begin
    checks++; got2++;
    if (q2.size() == 0 || a2_data != q2.pop_front()) begin failures++; $display("bwd word %0d wrong", got2); end
  end

  initial begin
    wait (got1 == NW && got2 == NW);
    repeat (20) @(posedge cb);
    checks++;
    if (got1 != NW || got2 != NW) begin failures++; $display("extra words"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
