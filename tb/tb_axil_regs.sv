// tb_axil_regs: reads the reset values, writes every register through
// AXI4-Lite (with the address and data phases offered together), reads them
// back, reads the two status inputs and an unmapped address, and holds
// BREADY/RREADY low for a while to check that the responses wait.
module tb_axil_regs;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic [31:0] s_wdata = 0, s_rdata, discarded = 32'h1234_5678, stored = 32'h0000_abcd;
  logic [1:0] s_bresp, s_rresp;
  logic enable;
  logic [18:0] threshold;
  logic [8:0] pretrig_len;
  logic [15:0] ev_len;
  int checks = 0, failures = 0;
  axil_regs #(.ADDR_W(8), .THR_W(19), .PRE_W(9), .LEN_W(16)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, int d);
    @(negedge clk);
    s_awvalid = 1; s_wvalid = 1; s_awaddr = 8'(a); s_wdata = d;
    @(posedge clk);
    while (!(s_awready && s_wready)) @(posedge clk);
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    repeat (2) @(negedge clk);           // response must wait for BREADY
    checks++;
    if (!s_bvalid || s_bresp != 0) begin failures++; $display("no bvalid"); end
    s_bready = 1;
    @(negedge clk);
    s_bready = 0;
    checks++;
    if (s_bvalid) begin failures++; $display("bvalid stuck"); end
  endtask

  task automatic rd(int a, int e);
    @(negedge clk);
    s_arvalid = 1; s_araddr = 8'(a);
    @(posedge clk);
    while (!s_arready) @(posedge clk);
    @(negedge clk);
    s_arvalid = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (!s_rvalid || s_rdata != e) begin failures++; $display("read %h got %h exp %h", a, s_rdata, e); end
    s_rready = 1;
    @(negedge clk);
    s_rready = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    rd(8'h00, 0); rd(8'h04, 256); rd(8'h08, 32); rd(8'h0C, 438);
    wr(8'h00, 1); wr(8'h04, 32'h7_1234); wr(8'h08, 200); wr(8'h0C, 100);
    rd(8'h00, 1); rd(8'h04, 32'h7_1234); rd(8'h08, 200); rd(8'h0C, 100);
    rd(8'h10, 32'h1234_5678); rd(8'h14, 32'h0000_abcd); rd(8'h3C, 0);
    checks++;
    if (!enable || threshold != 19'h7_1234 || pretrig_len != 200 || ev_len != 100) begin
      failures++; $display("outputs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
