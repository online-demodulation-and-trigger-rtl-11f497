// tb_forwarding_fsm: offers filled descriptors of random slot, length,
// channel, timestamp, trigger value and pile-up; a memory model answers the
// registered reads; the stream sink is randomly not ready. Every packet must
// be the 4 header words followed by the slot's samples with tlast on the
// last one, and every descriptor must come back with only its slot number.
module tb_forwarding_fsm;
  import frd_pkg::*;
  localparam int NS = 8, SD = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic desc_valid = 0, desc_ready, ret_valid, ret_ready = 0, mem_re;
  desc_t desc, ret_desc;
  logic [6:0] mem_addr;
  logic [15:0] mem_data;
  logic m_tvalid, m_tready = 0, m_tlast;
  logic [31:0] m_tdata;
  int checks = 0, failures = 0, stalls = 0;
  forwarding_fsm #(.SLOTS(NS), .SLOT_DEPTH(SD), .W(16)) dut (.*);

  logic [15:0] mem [NS * SD];
  always @(posedge clk) if (mem_re) mem_data <= mem[mem_addr];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] expw [$];
  logic        expl [$];
  int          exps [$];
  always @(negedge clk) m_tready <= ($urandom % 3 != 0);
  always @(negedge clk) ret_ready <= ($urandom % 2 != 0);

  always @(posedge clk) if (!rst) begin
    if (m_tvalid && !m_tready) stalls++;
    if (m_tvalid && m_tready) begin
      checks++;
      if (expw.size() == 0 || m_tdata != expw[0] || m_tlast != expl[0]) begin
        failures++; $display("word %h/%h last %b", m_tdata, expw.size() ? expw[0] : 0, m_tlast);
      end
      if (expw.size()) begin void'(expw.pop_front()); void'(expl.pop_front()); end
    end
    if (ret_valid && ret_ready) begin
      desc_t e;
      e = '0;
      e.slot = SLOT_W'(exps.size() ? exps.pop_front() : -1);
      checks++;
      if (ret_desc != e) begin failures++; $display("returned %h", ret_desc); end
    end
  end

  initial begin
    for (int i = 0; i < NS * SD; i++) mem[i] = 16'($urandom);
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 60; k++) begin
      desc_t d;
      d = '0;
      d.slot = SLOT_W'($urandom % NS);
      d.length = LEN_W'(1 + $urandom % SD);
      d.channel = CH_W'($urandom);
      d.timestamp = TS_W'({$urandom, $urandom});
      d.trig_value = TRIG_W'($urandom);
      d.pileup = 1'($urandom);
      expw.push_back({d.pileup, 7'b0, 8'(d.channel), d.length});
      expw.push_back(d.timestamp[31:0]);
      expw.push_back({16'b0, d.timestamp[47:32]});
      expw.push_back(32'(d.trig_value));
      for (int i = 0; i < 4; i++) expl.push_back(1'b0);
      for (int i = 0; i < int'(d.length); i++) begin
        expw.push_back(32'($signed(mem[int'(d.slot) * SD + i])));
        expl.push_back(i == int'(d.length) - 1);
      end
      exps.push_back(int'(d.slot));
      @(negedge clk);
      desc_valid = 1; desc = d;
      @(posedge clk);
      while (!desc_ready) @(posedge clk);
      @(negedge clk);
      desc_valid = 0;
    end
    wait (exps.size() == 0);
    repeat (5) @(posedge clk);
    checks++;
    if (expw.size() != 0 || stalls == 0) begin failures++; $display("left %0d stalls %0d", expw.size(), stalls); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
