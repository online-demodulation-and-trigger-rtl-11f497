// tb_storage_logic: a 4-channel stream with 2 slots and 6-sample events.
// A behavioural free list feeds descriptors; a reference model predicts the
// memory writes and the filled descriptors. Scenarios: a single event,
// two overlapping events on different channels, a pile-up (second trigger
// while recording) and a third simultaneous event that finds no free slot
// and must be counted as discarded.
module tb_storage_logic;
  import frd_pkg::*;
  localparam int CH = 4, NS = 2, SD = 8, EL = 6;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_fire = 0;
  logic [1:0] in_ch = 0;
  logic [15:0] in_data = 0;
  logic signed [TRIG_W-1:0] in_value = 0;
  logic [TS_W-1:0] timestamp = 0;
  logic [LEN_W-1:0] ev_len = EL;
  logic empty_valid, empty_pop, filled_push, mem_we;
  desc_t empty_desc, filled_desc;
  logic [3:0] mem_addr;
  logic [15:0] mem_data;
  logic [31:0] discarded, stored;
  int checks = 0, failures = 0, pileups = 0;

  storage_logic #(.CHANNELS(CH), .SLOTS(NS), .SLOT_DEPTH(SD), .W(16)) dut (.*);

  // behavioural free list
  int freel [$];
  assign empty_valid = freel.size() > 0;
  always_comb begin
    empty_desc = '0;
    if (freel.size() > 0) empty_desc.slot = SLOT_W'(freel[0]);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model state
  int act [CH], slt [CH], cnt [CH], pil [CH], tsm [CH], tvm [CH];
  desc_t exp_desc [$];

  task automatic sample(int c, bit fire, int f);
    int d, v;
    bit ew, ep, popped;
    int ea;
    d = (c * 1000 + f) & 16'hffff;
    v = 100 + c;
    ew = 0; ep = 0; ea = 0;
    @(negedge clk);
    timestamp = TS_W'(f * 10 + c);
    in_valid = 1; in_ch = 2'(c); in_data = 16'(d); in_fire = fire; in_value = TRIG_W'(v);
    if (act[c]) begin
      ew = 1; ea = slt[c] * SD + cnt[c];
      if (fire) pil[c] = 1;
      cnt[c]++;
    end else if (fire && freel.size() > 0) begin
      act[c] = 1; slt[c] = freel[0]; cnt[c] = 1; pil[c] = 0; tsm[c] = f * 10 + c; tvm[c] = v;
      ew = 1; ea = slt[c] * SD;
    end
    if (act[c] && cnt[c] == EL) begin
      desc_t e;
      e = '0;
      e.slot = SLOT_W'(slt[c]); e.length = LEN_W'(EL); e.channel = CH_W'(c);
      e.timestamp = TS_W'(tsm[c]); e.trig_value = TRIG_W'(tvm[c]); e.pileup = pil[c][0];
      exp_desc.push_back(e);
      act[c] = 0;
      ep = 1;
    end
    #1;
    checks++;
    if (mem_we != ew || (ew && (int'(mem_addr) != ea || int'(mem_data) != d)) || filled_push != ep) begin
      failures++;
      $display("f=%0d c=%0d we %b/%b addr %0d/%0d push %b/%b", f, c, mem_we, ew, mem_addr, ea, filled_push, ep);
    end
    if (filled_push) begin
      desc_t e;
      e = exp_desc.pop_front();
      checks++;
      if (filled_desc != e) begin failures++; $display("descriptor %h exp %h", filled_desc, e); end
      if (filled_desc.pileup) pileups++;
    end
    popped = empty_pop;
    @(posedge clk);
    #1;
    if (popped) void'(freel.pop_front());
  endtask

  initial begin
    for (int c = 0; c < CH; c++) act[c] = 0;
    freel.push_back(0); freel.push_back(1);
    repeat (2) @(negedge clk);
    rst = 0;
    for (int f = 0; f < 40; f++)
      for (int c = 0; c < CH; c++)
        sample(c, (f == 2 && c == 1) ||                  // single event
                  (f == 12 && (c == 0 || c == 2 || c == 3)) || // three at once, two slots
                  (f == 14 && c == 0) ||                  // pile-up on channel 0
                  (f == 25 && c == 3), f);
      // free the slots of completed events again
    @(negedge clk);
    in_valid = 0;
    checks += 3;
    if (discarded != 1) begin failures++; $display("discarded %0d", discarded); end
    if (stored != 4) begin failures++; $display("stored %0d", stored); end
    if (pileups != 1) begin failures++; $display("pileups %0d", pileups); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // slots come back to the free list a few cycles after they are filled
  always @(posedge clk) if (filled_push) fork
    begin
      automatic int s = int'(filled_desc.slot);
      repeat (3) @(posedge clk);
      #2;
      freel.push_back(s);
    end
  join_none
endmodule
