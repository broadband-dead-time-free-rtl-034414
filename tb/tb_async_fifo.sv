// tb_async_fifo: self-checking test of the dual-clock FIFO.
// Writer and reader run on unrelated clocks with random enables. Every word
// read must be the next word written (scoreboard). A second phase stops the
// reader until full rises, checks that exactly 2^AW words fit, that a write
// while full is dropped, and that empty rises after the FIFO is drained.
`timescale 1ns/1ps
module tb_async_fifo;
  localparam int DW = 24, AW = 4, DEPTH = 1 << AW;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  always #1.0 wclk = ~wclk;
  always #1.7 rclk = ~rclk;
  int checks = 0, failures = 0;

  logic wr_en = 0, rd_en = 0, full, empty;
  logic [DW-1:0] wr_data = 0, rd_data;
  async_fifo #(.DW(DW), .AW(AW)) dut (.wr_clk(wclk), .wr_rst_n(wrst_n), .wr_en, .wr_data, .full,
    .rd_clk(rclk), .rd_rst_n(rrst_n), .rd_en, .rd_data, .empty);

  logic [DW-1:0] sb[$];
  int nread = 0;
  bit phase2 = 0;

  always @(posedge rclk) if (rrst_n && rd_en && !empty) begin
    checks++;
    if (sb.size() == 0 || rd_data != sb[0]) begin
      failures++;
      if (failures < 10) $display("read %h want %h", rd_data, sb.size() ? sb[0] : 0);
    end
    if (sb.size()) void'(sb.pop_front());
    nread++;
  end
  always @(posedge wclk) if (wrst_n && wr_en && !full) sb.push_back(wr_data);

  initial begin
    repeat (4) @(posedge wclk);
    wrst_n = 1; rrst_n = 1;
    fork
      begin
        for (int i = 0; i < 3000; i++) begin
          @(negedge wclk);
          wr_en = ($urandom % 3 != 0) && !full;
          wr_data = DW'($urandom);
        end
        @(negedge wclk); wr_en = 0;
      end
      begin
        for (int i = 0; i < 2000; i++) begin
          @(negedge rclk);
          rd_en = ($urandom % 4 != 0);
        end
        while (!empty) @(negedge rclk);
        repeat (10) @(negedge rclk);
        while (!empty) @(negedge rclk);
        rd_en = 0;
      end
    join
    // Phase 2: fill until full, then one write that must be dropped.
    repeat (10) @(posedge rclk);
    begin
      int n = 0;
      while (!full) begin
        @(negedge wclk); wr_en = 1; wr_data = DW'(n + 100); n++;
        @(posedge wclk); #0.1;
      end
      @(negedge wclk); wr_en = 0;
      checks++;
      if (sb.size() != DEPTH) begin failures++; $display("held %0d words, want %0d", sb.size(), DEPTH); end
      @(negedge wclk); wr_en = 1; wr_data = 24'hdead;    // full: must be dropped
      @(negedge wclk); wr_en = 0;
      if (sb.size() > DEPTH) void'(sb.pop_back());
    end
    repeat (10) @(posedge rclk);
    @(negedge rclk); rd_en = 1;
    while (!empty) @(negedge rclk);
    repeat (10) @(negedge rclk);
    rd_en = 0;
    checks++;
    if (!empty || sb.size() != 0) begin failures++; $display("not drained: %0d left", sb.size()); end
    checks++;
    if (nread < 500) begin failures++; $display("only %0d words read", nread); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #40000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
