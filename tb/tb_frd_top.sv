// tb_frd_top: end-to-end test of the whole chain at its default parameters
// (32 channels, 125-sample ramps, 8 slots of 512 samples, 256-frame
// pre-trigger buffer, microwave-SQUID input through the magnitude CORDIC).
//
// Each channel's SQUID response within ramp m is
//   s(n) = DC + A*cos(2*pi*k*n/N + theta_c(m)),  k = 5 periods per ramp,
// given as a complex envelope with a random rotation. The flux theta_c(m)
// is a baseline plus pulses with an instantaneous rise and an exponential
// decay: single events, a pile-up (second pulse during recording) and a
// burst on 10 channels at once, more than the 8 slots. Checks:
//   * every demodulated phase against the correlation formula evaluated in
//     real arithmetic on the same samples (8 LSB of 2^16);
//   * every packet on the DMA stream against a reference model of the MAW
//     trigger, slot allocation and packet format fed with the observed
//     phase stream; timestamps against the observed sample times;
//   * the discarded/stored counters read over AXI4-Lite.
// Mechanisms counted (each must occur): ramp sync, trigger, pile-up,
// pre-trigger samples, slot overflow, DMA back-pressure, descriptor return across the clock
// domains.
module tb_frd_top;
  import frd_pkg::*;
  localparam int CH = 32, N = 125, K = 5, OB = 1, OE = 1, RAMPS = 110;
  localparam int L = 4, EL = 16, PRE = 4, THR = 3000;
  localparam int DC = 18000, A = 9000;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1, clk_dma = 0, rst_dma = 1;
  always #1 clk = ~clk;
  always #1.5 clk_dma = ~clk_dma;
  logic in_valid = 0, in_sync = 0, cfg_we = 0;
  logic signed [15:0] in_i = 0, in_q = 0, in_s = 0;
  logic [2:0] cfg_sel = 0;
  logic [15:0] cfg_idx = 0;
  logic [31:0] cfg_data = 0;
  logic s_axil_awvalid = 0, s_axil_awready, s_axil_wvalid = 0, s_axil_wready;
  logic s_axil_bvalid, s_axil_bready = 1, s_axil_arvalid = 0, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready = 1;
  logic [7:0] s_axil_awaddr = 0, s_axil_araddr = 0;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic phase_valid;
  logic [4:0] phase_ch;
  logic signed [15:0] phase;
  logic m_axis_tvalid, m_axis_tready = 0, m_axis_tlast;
  logic [31:0] m_axis_tdata;
  int checks = 0, failures = 0;
  int n_pre = 0, n_sync = 0, n_trig = 0, n_pile = 0, n_drop = 0, n_pkts = 0, n_stall = 0, n_ret = 0;
  longint cyc = 0;

  frd_top dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- configuration helpers ----------------
  task automatic cfg(cfg_sel_e sel, int idx, int data);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_idx = 16'(idx); cfg_data = data;
    @(negedge clk);
    cfg_we = 0;
  endtask
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

  // ---------------- demodulator reference ----------------
  real expq [$];
  int  expc [$];
  int  nphase = 0;

  // ---------------- event reference model ----------------
  typedef struct { logic [31:0] w [$]; } pkt_t;
  int xs [CH][$], tp [CH][$];
  int act [CH], cnt [CH], pil [CH], tv [CH];
  longint tsc [CH];
  int chwords [CH][$];
  int free_slots = SLOTS;
  pkt_t done_pkts [$];
  longint exp_ts [$];

  function automatic int absi(int v); return v < 0 ? -v : v; endfunction
  function automatic int get(int c, int back);
    return (xs[c].size() > back) ? xs[c][xs[c].size() - 1 - back] : 0;
  endfunction

  task automatic model(int c, int x, longint when);
    int a1, a2, t, t1, t2, fire, pre;
    xs[c].push_back(x);
    a1 = 0; a2 = 0;
    for (int i = 0; i < L; i++) begin a1 += get(c, i); a2 += get(c, L + i); end
    t = a1 - a2;
    tp[c].push_back(t);
    t1 = (tp[c].size() > 1) ? tp[c][tp[c].size() - 2] : 0;
    t2 = (tp[c].size() > 2) ? absi(tp[c][tp[c].size() - 3]) : 0;
    fire = absi(t1) > THR && absi(t1) > t2 && absi(t1) >= absi(t);
    pre = get(c, 2 * L + PRE);
    if (fire) n_trig++;
    if (act[c]) begin
      if (fire) pil[c] = 1;
      chwords[c].push_back(pre);
      cnt[c]++;
    end else if (fire) begin
      if (free_slots > 0) begin
        free_slots--;
        act[c] = 1; cnt[c] = 1; pil[c] = 0; tv[c] = t1; tsc[c] = when;
        n_pre += PRE;   // samples from before the trigger in this packet
        chwords[c].push_back(pre);
      end else n_drop++;
    end
    if (act[c] && cnt[c] == EL) begin
      pkt_t p;
      p.w.push_back({pil[c][0], 7'b0, 8'(c), 16'(EL)});
      p.w.push_back(32'(0)); p.w.push_back(32'(0));
      p.w.push_back(32'(tv[c]));
      foreach (chwords[c][i]) p.w.push_back(32'($signed(16'(chwords[c][i]))));
      chwords[c].delete();
      done_pkts.push_back(p);
      exp_ts.push_back(tsc[c]);
      act[c] = 0;
      if (pil[c]) n_pile++;
    end
  endtask

  // phase monitor: demodulator check and event model input
  always @(negedge clk) if (!rst && phase_valid) begin
    real e;
    int d, c;
    e = expq.pop_front();
    c = expc.pop_front();
    d = int'(phase) - $rtoi(e + (e >= 0 ? 0.5 : -0.5));
    if (d > 32768) d -= 65536;
    if (d < -32768) d += 65536;
    checks++;
    if (d > 8 || d < -8 || int'(phase_ch) != c) begin
      failures++; $display("phase ch %0d/%0d got %0d exp %f", phase_ch, c, phase, e);
    end
    nphase++;
    model(int'(phase_ch), int'(phase), cyc);
  end

  // ---------------- stream checker ----------------
  int wi = 0;
  longint ts_cur, ts_ofs;
  bit ts_known = 0;
  always @(negedge clk_dma) m_axis_tready <= ($urandom % 4 != 0);
  always @(posedge clk_dma) if (!rst_dma) begin
    if (m_axis_tvalid && !m_axis_tready) n_stall++;
    if (m_axis_tvalid && m_axis_tready) begin
      if (done_pkts.size() == 0) begin
        failures++; $display("unexpected word %h", m_axis_tdata);
      end else begin
        if (wi == 1) ts_cur[31:0] = m_axis_tdata;
        if (wi == 2) ts_cur[63:32] = 32'(m_axis_tdata[15:0]);
        checks++;
        if (wi != 1 && wi != 2 && m_axis_tdata != done_pkts[0].w[wi]) begin
          failures++; $display("pkt %0d word %0d got %h exp %h", n_pkts, wi, m_axis_tdata, done_pkts[0].w[wi]);
        end
        if (m_axis_tlast != (wi == done_pkts[0].w.size() - 1)) begin
          failures++; $display("tlast at word %0d", wi);
        end
        wi++;
        if (wi == done_pkts[0].w.size()) begin
          longint et;
          et = exp_ts.pop_front();
          // the timestamp is taken a fixed number of clocks after the sample
          if (!ts_known) begin ts_ofs = ts_cur - et; ts_known = 1; end
          checks++;
          if (ts_cur - et != ts_ofs) begin failures++; $display("timestamp offset %0d vs %0d", ts_cur - et, ts_ofs); end
          void'(done_pkts.pop_front());
          wi = 0;
          n_pkts++;
        end
      end
    end
  end
  always @(posedge clk_dma) if (!rst_dma && m_axis_tvalid && m_axis_tready && m_axis_tlast)
    fork begin
      repeat (12) @(posedge clk);
      free_slots++;
    end join_none
  always @(posedge clk) if (!rst && dut.u_event.u_empty.push) n_ret++;
  always @(posedge clk) if (!rst && in_valid && in_sync) n_sync++;

  // ---------------- stimulus ----------------
  real flux [CH];      // phase units, 2^16 = 2*pi
  int  amp [CH], age [CH];
  logic [31:0] inc;

  initial begin
    int d;
    for (int c = 0; c < CH; c++) begin amp[c] = 0; age[c] = 1000; act[c] = 0; end
    repeat (3) @(negedge clk);
    rst = 0; rst_dma = 0;
    for (int i = 0; i < 2**14; i++)
      cfg(CFG_SINE_LUT, i, $rtoi(32767.0 * $sin(2.0 * PI * (i + 0.5) / 65536.0) + 0.5));
    inc = 32'($rtoi(real'(K) / N * 4294967296.0));
    for (int c = 0; c < CH; c++) begin
      cfg(CFG_PHASE_INC, c, inc);
      cfg(CFG_OFFSET, c, DC);
    end
    cfg(CFG_O_BEG, 0, OB);
    cfg(CFG_O_END, 0, OE);
    wr(8'h04, THR); wr(8'h08, PRE); wr(8'h0C, EL); wr(8'h00, 1);
    for (int m = 0; m < RAMPS; m++) begin
      real sc [CH], ss [CH], rot [CH], th [CH];
      if (m == 20) begin amp[3] = 6000; age[3] = 0; end
      if (m == 25) begin amp[17] = -5000; age[17] = 0; end
      if (m == 40) begin amp[5] = 5000; age[5] = 0; end
      if (m == 46) begin amp[5] = 7000; age[5] = 0; end              // pile-up
      if (m == 70) for (int c = 8; c < 18; c++) begin amp[c] = 6000 + 50 * c; age[c] = 0; end
      if (m == 95) begin amp[25] = 4000; age[25] = 0; end
      for (int c = 0; c < CH; c++) begin
        flux[c] = 1000.0 * c + amp[c] * $exp(-age[c] / 200.0);
        age[c]++;
        th[c] = 2.0 * PI * flux[c] / 65536.0;
        rot[c] = 2.0 * PI * ($urandom % 1000) / 1000.0;
        sc[c] = 0.0; ss[c] = 0.0;
      end
      for (int n = OB; n <= N - 2 - OE; n++)
        for (int c = 0; c < CH; c++) begin
          real s, a;
          logic [31:0] ph;
          s = $rtoi(DC + A * $cos(2.0 * PI * K * n / N + th[c]));
          ph = 32'(n) * inc;
          a = 2.0 * PI * real'(ph[31:16]) / 65536.0;
          sc[c] += (s - DC) * $cos(a);
          ss[c] += (s - DC) * $sin(a);
        end
      for (int c = 0; c < CH; c++) begin
        expq.push_back($atan2(sc[c], ss[c]) / (2.0 * PI) * 65536.0);
        expc.push_back(c);
      end
      for (int n = 0; n < N; n++)
        for (int c = 0; c < CH; c++) begin
          real s;
          s = $rtoi(DC + A * $cos(2.0 * PI * K * n / N + th[c]));
          @(negedge clk);
          in_valid = 1; in_sync = (n == 0 && c == 0);
          in_i = 16'($rtoi(s * $cos(rot[c])));
          in_q = 16'($rtoi(s * $sin(rot[c])));
        end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (3000) @(negedge clk);
    rd(8'h10, d);
    checks++;
    if (d != n_drop) begin failures++; $display("discarded %0d exp %0d", d, n_drop); end
    rd(8'h14, d);
    checks++;
    if (d != n_pkts) begin failures++; $display("stored %0d, packets %0d", d, n_pkts); end
    checks += 2;
    if (done_pkts.size() != 0) begin failures++; $display("%0d packets missing", done_pkts.size()); end
    if (nphase != RAMPS * CH) begin failures++; $display("phases %0d", nphase); end
    $display("pre-trigger samples %0d", n_pre);
    $display("syncs %0d phases %0d triggers %0d packets %0d pileups %0d discarded %0d stalls %0d returns %0d",
             n_sync, nphase, n_trig, n_pkts, n_pile, n_drop, n_stall, n_ret);
    checks += 7;
    if (n_pre == 0)   begin failures++; $display("no pre-trigger"); end
    if (n_sync == 0)  begin failures++; $display("no sync"); end
    if (n_trig == 0)  begin failures++; $display("no trigger"); end
    if (n_pile == 0)  begin failures++; $display("no pile-up"); end
    if (n_drop == 0)  begin failures++; $display("no overflow"); end
    if (n_stall == 0) begin failures++; $display("no back-pressure"); end
    if (n_ret == 0)   begin failures++; $display("no descriptor returned"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
