// tb_event_detect: the event detection module at its default size
// (32 channels, 8 slots of 512 samples, 4-sample MAW, 256-frame pre-trigger
// buffer), programmed through AXI4-Lite for 24-sample events with a 6-frame
// pre-trigger. The TDM input carries noise and exponential pulses: single
// events, a pile-up (second pulse during recording) and a burst of 10
// simultaneous pulses, two more than there are slots. A reference model of
// the MAW trigger, the slot allocation and the packet format predicts every
// packet on the DMA stream (header, samples, tlast), the discarded-event and
// stored-event counters are read back over AXI4-Lite, and the timestamp
// differences between events are checked against the sample spacing.
// The DMA side runs on its own 7 ns clock with random back-pressure.
// Mechanisms counted: trigger, pre-trigger, pile-up, overflow, clock
// crossing, back-pressure.
module tb_event_detect;
  import frd_pkg::*;
  localparam int CH = 32, L = 4, EL = 24, PRE = 6, THR = 2000, SPACING = 4;
  logic clk = 0, rst = 1, clk_dma = 0, rst_dma = 1;
  always #5 clk = ~clk;
  always #3.5 clk_dma = ~clk_dma;
  logic in_valid = 0;
  logic [4:0] in_ch = 0;
  logic signed [15:0] in_data = 0;
  logic s_axil_awvalid = 0, s_axil_awready, s_axil_wvalid = 0, s_axil_wready;
  logic s_axil_bvalid, s_axil_bready = 1, s_axil_arvalid = 0, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready = 1;
  logic [7:0] s_axil_awaddr = 0, s_axil_araddr = 0;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic m_axis_tvalid, m_axis_tready = 0, m_axis_tlast;
  logic [31:0] m_axis_tdata;
  int checks = 0, failures = 0;
  int n_trig = 0, n_pile = 0, n_drop = 0, n_pkts = 0, n_stall = 0;

  event_detect dut (.*);

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- AXI4-Lite helpers ----------------
  task automatic wr(int a, int d);
    @(negedge clk);
    s_axil_awvalid = 1; s_axil_wvalid = 1; s_axil_awaddr = 8'(a); s_axil_wdata = d;
    @(posedge clk);
    while (!s_axil_awready) @(posedge clk);
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
  endtask
  task automatic rd(int a, output int d);
    @(negedge clk);
    s_axil_arvalid = 1; s_axil_araddr = 8'(a);
    @(posedge clk);
    while (!s_axil_arready) @(posedge clk);
    @(negedge clk);
    s_axil_arvalid = 0;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
  endtask

  // ---------------- reference model ----------------
  typedef struct { logic [31:0] w [$]; } pkt_t;
  int xs [CH][$];              // samples per channel
  int tp [CH][$];              // trigger signal per channel
  int act [CH], cnt [CH], pil [CH], tv [CH], tsi [CH];
  int chwords [CH][$];         // samples recorded so far per channel
  int free_slots = SLOTS;
  pkt_t done_pkts [$];         // expected packets, in completion order
  int exp_tsi [$];             // sample index of each expected event's trigger
  int sample_idx = 0;

  function automatic int absi(int v); return v < 0 ? -v : v; endfunction
  function automatic int get(int c, int back);
    return (xs[c].size() > back) ? xs[c][xs[c].size() - 1 - back] : 0;
  endfunction

  // called for every input sample, in order
  task automatic model(int c, int x);
    int a1, a2, t, t1, t2, fire, pre;
    xs[c].push_back(x);
    a1 = 0; a2 = 0;
    for (int i = 0; i < L; i++) begin a1 += get(c, i); a2 += get(c, L + i); end
    t = a1 - a2;
    tp[c].push_back(t);
    t1 = (tp[c].size() > 1) ? tp[c][tp[c].size() - 2] : 0;
    t2 = (tp[c].size() > 2) ? absi(tp[c][tp[c].size() - 3]) : 0;
    fire = absi(t1) > THR && absi(t1) > t2 && absi(t1) >= absi(t);
    pre = get(c, 2 * L + PRE);   // pre-trigger FIFO output for this sample
    if (fire) n_trig++;
    if (act[c]) begin
      if (fire) pil[c] = 1;
      chwords[c].push_back(pre);
      cnt[c]++;
    end else if (fire) begin
      if (free_slots > 0) begin
        free_slots--;
        act[c] = 1; cnt[c] = 1; pil[c] = 0; tv[c] = t1; tsi[c] = sample_idx;
        chwords[c].push_back(pre);
      end else n_drop++;
    end
    if (act[c] && cnt[c] == EL) begin
      pkt_t p;
      p.w.push_back({pil[c][0], 7'b0, 8'(c), 16'(EL)});
      p.w.push_back(32'(0)); p.w.push_back(32'(0));     // timestamp, checked apart
      p.w.push_back(32'(tv[c]));
      foreach (chwords[c][i]) p.w.push_back(32'(chwords[c][i]));
      chwords[c].delete();
      done_pkts.push_back(p);
      exp_tsi.push_back(tsi[c]);
      act[c] = 0;
      if (pil[c]) n_pile++;
    end
    sample_idx++;
  endtask

  // ---------------- stimulus ----------------
  int amp [CH], age [CH];
  task automatic frame(int f);
    for (int c = 0; c < CH; c++) begin
      int x;
      x = $rtoi(amp[c] * $exp(-age[c] / 150.0)) + int'($urandom % 41) - 20;
      age[c]++;
      @(negedge clk);
      in_valid = 1; in_ch = 5'(c); in_data = 16'(x);
      model(c, x);
      @(negedge clk);
      in_valid = 0;
      repeat (SPACING - 2) @(negedge clk);
    end
  endtask

  // ---------------- stream checker ----------------
  int wi = 0, first_ts_idx = -1;
  longint ts_cur, ts_first;
  always @(negedge clk_dma) m_axis_tready <= ($urandom % 4 != 0);
  always @(posedge clk_dma) if (!rst_dma) begin
    if (m_axis_tvalid && !m_axis_tready) n_stall++;
    if (m_axis_tvalid && m_axis_tready) begin
      if (done_pkts.size() == 0) begin
        failures++; $display("unexpected word %h", m_axis_tdata);
      end else begin
        logic [31:0] e;
        e = done_pkts[0].w[wi];
        if (wi == 1) ts_cur[31:0] = m_axis_tdata;
        if (wi == 2) ts_cur[63:32] = 32'(m_axis_tdata[15:0]);
        checks++;
        if (wi != 1 && wi != 2 && m_axis_tdata != e) begin
          failures++; $display("pkt %0d word %0d got %h exp %h", n_pkts, wi, m_axis_tdata, e);
        end
        if (m_axis_tlast != (wi == done_pkts[0].w.size() - 1)) begin
          failures++; $display("tlast at word %0d", wi);
        end
        wi++;
        if (wi == done_pkts[0].w.size()) begin
          int ti;
          ti = exp_tsi.pop_front();
          if (first_ts_idx < 0) begin first_ts_idx = ti; ts_first = ts_cur; end
          checks++;
          if (ts_cur - ts_first != longint'(SPACING) * (ti - first_ts_idx)) begin
            failures++; $display("timestamp %0d exp +%0d", ts_cur - ts_first, SPACING * (ti - first_ts_idx));
          end
          void'(done_pkts.pop_front());
          wi = 0;
          n_pkts++;
        end
      end
    end
  end

  // free slots return to the model when their packet has left
  always @(posedge clk_dma) if (!rst_dma && m_axis_tvalid && m_axis_tready && m_axis_tlast)
    fork begin
      // the descriptor needs some cycles to cross back
      repeat (12) @(posedge clk);
      free_slots++;
    end join_none

  initial begin
    int d;
    for (int c = 0; c < CH; c++) begin amp[c] = 0; age[c] = 0; act[c] = 0; end
    repeat (3) @(negedge clk);
    rst = 0; rst_dma = 0;
    wr(8'h04, THR); wr(8'h08, PRE); wr(8'h0C, EL); wr(8'h00, 1);
    for (int f = 0; f < 400; f++) begin
      if (f == 30)  begin amp[3] = 8000; age[3] = 0; end
      if (f == 40)  begin amp[17] = -6000; age[17] = 0; end
      if (f == 100) begin amp[5] = 7000; age[5] = 0; end
      if (f == 110) begin amp[5] = 9000; age[5] = 0; end       // pile-up
      if (f == 200) for (int c = 8; c < 18; c++) begin amp[c] = 7000 + 100 * c; age[c] = 0; end
      if (f == 320) begin amp[25] = 5000; age[25] = 0; end
      frame(f);
    end
    repeat (4000) @(negedge clk);
    rd(8'h10, d);
    checks++;
    if (d != n_drop) begin failures++; $display("discarded %0d exp %0d", d, n_drop); end
    rd(8'h14, d);
    checks++;
    if (d != n_pkts) begin failures++; $display("stored %0d, packets %0d", d, n_pkts); end
    checks++;
    if (done_pkts.size() != 0) begin failures++; $display("%0d packets missing", done_pkts.size()); end
    $display("triggers %0d packets %0d pileups %0d discarded %0d stalls %0d",
             n_trig, n_pkts, n_pile, n_drop, n_stall);
    checks += 4;
    if (n_trig == 0)  begin failures++; $display("no trigger"); end
    if (n_pile == 0)  begin failures++; $display("no pile-up"); end
    if (n_drop == 0)  begin failures++; $display("no overflow"); end
    if (n_stall == 0) begin failures++; $display("no back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
