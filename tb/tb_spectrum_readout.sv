// tb_spectrum_readout: self-checking test of the natural-order readout.
// For N = 64 (4 buffer words of 16 lanes) the testbench models the data
// buffer: word p, lane r holds a tag of bin bitrev2(p) + bitrev4(r) * 4. After
// dump_done the AXI4-Stream output, taken with random tready, must give the
// tags of bins 0 .. 63 in order with tlast on the last one only. A
// dump_start while the transfer is still running must count one overrun;
// busy must fall after the transfer; a second dump must stream again.
`timescale 1ns/1ps
module tb_spectrum_readout;
  import spec_pkg::*;
  localparam int LOG2N = 6, N = 64, N16 = 4, ACC_W = 32;
  logic fclk = 0, dclk = 0, frst_n = 0, drst_n = 0;
  always #2.0 fclk = ~fclk;
  always #5.0 dclk = ~dclk;
  int checks = 0, failures = 0;

  logic dump_start = 0, dump_done = 0, busy;
  logic [15:0] overrun_count;
  logic buf_rd_en;
  logic [1:0] buf_rd_addr;
  logic [16*ACC_W-1:0] buf_rd_data;
  logic [ACC_W-1:0] tdata;
  logic tvalid, tready = 0, tlast;

  spectrum_readout #(.LOG2N(LOG2N), .ACC_W(ACC_W)) dut (.fft_clk(fclk), .fft_rst_n(frst_n),
    .dump_start, .dump_done, .busy, .overrun_count, .dma_clk(dclk), .dma_rst_n(drst_n),
    .buf_rd_en, .buf_rd_addr, .buf_rd_data, .m_axis_tdata(tdata), .m_axis_tvalid(tvalid),
    .m_axis_tready(tready), .m_axis_tlast(tlast));

  int pass = 0;
  function automatic logic [31:0] tag(int k);
    return 32'(k * 1000 + 17 + pass);
  endfunction

  // buffer model, 1-clock registered read
  always @(posedge dclk) if (buf_rd_en)
    for (int r = 0; r < 16; r++) begin
      automatic int kl = {buf_rd_addr[0], buf_rd_addr[1]};
      automatic int kh = {r[0], r[1], r[2], r[3]};
      buf_rd_data[r*ACC_W +: ACC_W] <= tag(kl + N16 * kh);
    end

  int got = 0;
  always @(posedge dclk) if (drst_n && tvalid && tready) begin
    checks++;
    if (tdata != tag(got % N) || tlast != (got % N == N - 1)) begin
      failures++;
      if (failures < 10) $display("beat %0d: got %0d last %0b want %0d", got, tdata, tlast, tag(got % N));
    end
    got++;
  end
  always @(negedge dclk) tready <= ($urandom % 3 != 0);

  task automatic pulse(ref logic s);
    @(negedge fclk); s = 1; @(negedge fclk); s = 0;
  endtask

  initial begin
    repeat (4) @(posedge dclk);
    frst_n = 1; drst_n = 1;
    repeat (4) @(posedge dclk);
    pulse(dump_done);
    repeat (3) @(posedge fclk);
    checks++;
    if (!busy) begin failures++; $display("busy not set"); end
    pulse(dump_start);                     // accumulator overwrites during readout
    wait (got == N);
    repeat (20) @(posedge fclk);
    checks++;
    if (busy || overrun_count != 1) begin
      failures++; $display("busy %0b overrun %0d, want 0 and 1", busy, overrun_count);
    end
    pass = 1;
    pulse(dump_start);                     // no overrun now
    pulse(dump_done);
    wait (got == 2 * N);
    repeat (20) @(posedge fclk);
    checks++;
    if (busy || overrun_count != 1) begin failures++; $display("second dump: overrun %0d", overrun_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
