// tb_event_detect_erlang: buffer-loss workload for the event detector.
//
// Twenty of the 32 channels receive detector pulses as independent Poisson
// processes of 20 events per second each. A frame (one sample of every
// channel) is one 8 us flux-ramp period, so a pulse starts in a given frame
// with probability 20 * 8e-6. Events are 438 samples long (3.5 ms). The
// offered load is E = 20 * 20/s * 3.5 ms = 1.4 erlang, and the Erlang-B
// formula gives a blocking probability of B(5, 1.4) = 1.1 % with five
// slots and far below 0.1 % with eight.
//
// Two event detectors see the same stream: one with the default eight
// slots, one with five (the unrounded result of the sizing). Checks:
//   * the five-slot detector's discard counter equals that of a cycle-level
//     reference model of the trigger and the slot occupancy;
//   * its loss fraction (discarded / (stored + discarded)) lies between
//     0.3 % and 2.5 %, the Erlang-B value within the statistical spread of
//     about 1300 events;
//   * the eight-slot detector loses at most one event;
//   * every event of both is sent on its stream.
// The stream side has no back-pressure, as the Erlang-B model ignores
// forwarding time. About 12.8 million clocks (400,000 frames, 3.2 s of
// measurement time).
module tb_event_detect_erlang;
  import frd_pkg::*;
  localparam int CH = 32, ACTIVE = 20, L = 4, EL = 438, PRE = 16, THR = 3000;
  localparam int FRAMES = 400000, AMP = 5000;
  localparam real P_START = 20.0 * 8.0e-6;
  logic clk = 0, rst = 1, clk_dma = 0, rst_dma = 1;
  always #1 clk = ~clk;
  always #0.8 clk_dma = ~clk_dma;
  logic in_valid = 0;
  logic [4:0] in_ch = 0;
  logic signed [15:0] in_data = 0;
  logic s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 1, s_axil_arvalid = 0, s_axil_rready = 1;
  logic [7:0] s_axil_awaddr = 0, s_axil_araddr = 0;
  logic [31:0] s_axil_wdata = 0;
  logic awready [2], wready [2], bvalid [2], arready [2], rvalid [2];
  logic [31:0] rdata [2];
  logic [1:0] bresp [2], rresp [2];
  logic tvalid [2], tlast [2];
  logic [31:0] tdata [2];
  int checks = 0, failures = 0;

  event_detect #(.SLOTS(5)) dut5 (
    .clk, .rst, .clk_dma, .rst_dma, .in_valid, .in_ch, .in_data,
    .s_axil_awvalid, .s_axil_awready(awready[0]), .s_axil_awaddr, .s_axil_wvalid, .s_axil_wready(wready[0]),
    .s_axil_wdata, .s_axil_bvalid(bvalid[0]), .s_axil_bready, .s_axil_bresp(bresp[0]),
    .s_axil_arvalid, .s_axil_arready(arready[0]), .s_axil_araddr, .s_axil_rvalid(rvalid[0]),
    .s_axil_rready, .s_axil_rdata(rdata[0]), .s_axil_rresp(rresp[0]),
    .m_axis_tvalid(tvalid[0]), .m_axis_tready(1'b1), .m_axis_tdata(tdata[0]), .m_axis_tlast(tlast[0]));
  event_detect dut8 (
    .clk, .rst, .clk_dma, .rst_dma, .in_valid, .in_ch, .in_data,
    .s_axil_awvalid, .s_axil_awready(awready[1]), .s_axil_awaddr, .s_axil_wvalid, .s_axil_wready(wready[1]),
    .s_axil_wdata, .s_axil_bvalid(bvalid[1]), .s_axil_bready, .s_axil_bresp(bresp[1]),
    .s_axil_arvalid, .s_axil_arready(arready[1]), .s_axil_araddr, .s_axil_rvalid(rvalid[1]),
    .s_axil_rready, .s_axil_rdata(rdata[1]), .s_axil_rresp(rresp[1]),
    .m_axis_tvalid(tvalid[1]), .m_axis_tready(1'b1), .m_axis_tdata(tdata[1]), .m_axis_tlast(tlast[1]));

  initial begin
    repeat (14000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // both register blocks answer in the same clock, so one handshake serves both
  task automatic wr(int a, int d);
    @(negedge clk);
    s_axil_awvalid = 1; s_axil_wvalid = 1; s_axil_awaddr = 8'(a); s_axil_wdata = d;
    @(posedge clk);
    while (!awready[0]) @(posedge clk);
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
  endtask
  task automatic rd(int a, output int d5, output int d8);
    @(negedge clk);
    s_axil_arvalid = 1; s_axil_araddr = 8'(a);
    @(posedge clk);
    while (!arready[0]) @(posedge clk);
    @(negedge clk);
    s_axil_arvalid = 0;
    while (!rvalid[0]) @(negedge clk);
    d5 = rdata[0]; d8 = rdata[1];
  endtask

  // ---------------- reference model of the five-slot detector ------------
  localparam int HIST = 2 * L + 2;
  int hx [CH][HIST];           // last samples of each channel, [0] newest
  int ht [CH][2];              // last two trigger values
  int act [CH], cnt [CH];
  int free5 = 5, m_drop = 0, m_trig = 0, m_pile = 0;

  task automatic model(int c, int x);
    int a1, a2, t, fire;
    for (int i = HIST - 1; i > 0; i--) hx[c][i] = hx[c][i-1];
    hx[c][0] = x;
    a1 = 0; a2 = 0;
    for (int i = 0; i < L; i++) begin a1 += hx[c][i]; a2 += hx[c][L + i]; end
    t = a1 - a2;
    if (t < 0) t = -t;
    fire = ht[c][0] > THR && ht[c][0] > ht[c][1] && ht[c][0] >= t;
    ht[c][1] = ht[c][0]; ht[c][0] = t;
    if (fire) m_trig++;
    if (act[c]) begin
      if (fire) m_pile++;
      cnt[c]++;
    end else if (fire) begin
      if (free5 > 0) begin free5--; act[c] = 1; cnt[c] = 1; end
      else m_drop++;
    end
    if (act[c] && cnt[c] == EL) act[c] = 0;
  endtask

  // a slot returns to the free list a few clocks after its last word
  int pk [2];
  always @(posedge clk_dma) if (!rst_dma) begin
    for (int k = 0; k < 2; k++) if (tvalid[k] && tlast[k]) pk[k]++;
    if (tvalid[0] && tlast[0])
      fork begin
        repeat (12) @(posedge clk);
        free5++;
      end join_none
  end

  // ---------------- stimulus ----------------
  int amp [CH], age [CH], shape [2048];
  int pulses = 0;

  initial begin
    int d5, d8, s5, s8;
    real loss;
    pk[0] = 0; pk[1] = 0;
    for (int c = 0; c < CH; c++) begin
      amp[c] = 0; age[c] = 0; act[c] = 0; cnt[c] = 0; ht[c][0] = 0; ht[c][1] = 0;
      for (int i = 0; i < HIST; i++) hx[c][i] = 0;
    end
    for (int i = 0; i < 2048; i++) shape[i] = $rtoi(1024.0 * $exp(-i / 150.0));
    repeat (3) @(negedge clk);
    rst = 0; rst_dma = 0;
    wr(8'h04, THR); wr(8'h08, PRE); wr(8'h0C, EL); wr(8'h00, 1);
    for (int f = 0; f < FRAMES; f++)
      for (int c = 0; c < CH; c++) begin
        int x;
        if (c < ACTIVE && real'($urandom % 1000000) < P_START * 1.0e6) begin
          // a new pulse adds to what is left of the previous one
          amp[c] = ((age[c] < 2048) ? amp[c] * shape[age[c]] / 1024 : 0) + AMP;
          age[c] = 0;
          pulses++;
        end
        x = ((age[c] < 2048) ? amp[c] * shape[age[c]] / 1024 : 0) + int'($urandom % 41) - 20;
        if (age[c] < 4096) age[c]++;
        @(negedge clk);
        in_valid = 1; in_ch = 5'(c); in_data = 16'(x);
        model(c, x);
      end
    @(negedge clk);
    in_valid = 0;
    repeat (4000) @(negedge clk);
    rd(8'h10, d5, d8);
    rd(8'h14, s5, s8);
    loss = real'(d5) / real'(s5 + d5);
    $display("pulses %0d triggers %0d (model) pile-ups %0d", pulses, m_trig, m_pile);
    $display("5 slots: stored %0d discarded %0d loss %0.2f %% (model discards %0d)", s5, d5, 100.0 * loss, m_drop);
    $display("8 slots: stored %0d discarded %0d", s8, d8);
    checks += 6;
    if (d5 != m_drop) begin failures++; $display("discards differ from the model"); end
    if (loss < 0.003 || loss > 0.025) begin failures++; $display("loss outside the Erlang-B band"); end
    if (d8 > 1) begin failures++; $display("eight slots lose events"); end
    if (pk[0] != s5 || pk[1] != s8) begin failures++; $display("packets %0d/%0d", pk[0], pk[1]); end
    if (s5 + d5 < 1000) begin failures++; $display("too few events"); end
    if (d5 == 0) begin failures++; $display("no overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
