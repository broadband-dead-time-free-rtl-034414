// tb_spectrometer_full: one complete accumulation round at the default size.
// The top keeps all its defaults: N = 2^18 points, FP32, M = 1024 spectra per
// sum. The input is a complex tone of amplitude 1000 exactly on bin K0 (a
// frequency that is periodic in every frame), fed without gaps as 8 I/Q
// pairs per converter beat for M frames plus one frame to flush the
// pipeline. The single streamed spectrum must have N bins in natural order
// with tlast on the last, bin K0 must hold M * (1000 N)^2 within 0.1 %, and
// every other bin must stay below 1e-6 of that peak. The sizes are those of
// the original high-resolution instrument; the tone, its bin and the
// tolerances are this test's own. About 67 ms of converter time are
// simulated, which takes a few minutes.
`timescale 1ns/1ps
module tb_spectrometer_full;
  import spec_pkg::*;
  localparam int  LOG2N = 18, N = 1 << LOG2N, M = 1024;
  localparam int  K0 = 70001;
  localparam real PI = 3.14159265358979;
  localparam real AMP = 1000.0;

  logic aclk = 0, fclk = 0, dclk = 0, arst_n = 0, frst_n = 0, drst_n = 0;
  always #1.0 aclk = ~aclk;   // 512 MHz converter clock
  always #1.9 fclk = ~fclk;   // FFT clock, a little above 256 MHz
  always #5.0 dclk = ~dclk;   // 100 MHz DMA clock
  int checks = 0, failures = 0;

  logic adc_valid = 0;
  logic signed [11:0] adc_i [8], adc_q [8];
  logic [31:0] tdata;
  logic tvalid, tready = 1, tlast;
  logic ovf, busy;
  logic [15:0] overruns;
  logic [10:0] frame;

  spectrometer_top dut (
    .adc_clk(aclk), .adc_rst_n(arst_n), .adc_valid, .adc_i, .adc_q,
    .fft_clk(fclk), .fft_rst_n(frst_n), .dma_clk(dclk), .dma_rst_n(drst_n),
    .m_axis_tdata(tdata), .m_axis_tvalid(tvalid), .m_axis_tready(tready), .m_axis_tlast(tlast),
    .fifo_overflow(ovf), .readout_busy(busy), .overrun_count(overruns), .frame(frame));

  logic signed [11:0] tone_i [N], tone_q [N];

  // Round to nearest; truncation would shrink the tone by ~0.6 LSB.
  function automatic int rnd(real x);
    return (x >= 0.0) ? $rtoi(x + 0.5) : -$rtoi(0.5 - x);
  endfunction

  function automatic real f2r(logic [31:0] f);
    if (f[30:0] == 0) return 0.0;
    return real'({1'b1, f[22:0]}) * $pow(2.0, real'(int'(f[30:23]) - 150));
  endfunction

  real peak = M * (AMP * N) * (AMP * N);
  real maxother = 0.0;
  int  bin = 0;
  bit  done = 0;
  always @(posedge dclk) if (drst_n && tvalid && tready && !done) begin
    automatic real got = f2r(tdata);
    if (bin == K0) begin
      checks++;
      if (got < 0.999 * peak || got > 1.001 * peak) begin
        failures++; $display("bin %0d: got %g want %g", bin, got, peak);
      end
    end else if (got > maxother) maxother = got;
    if (tlast != (bin == N - 1)) begin
      checks++; failures++; $display("tlast wrong at bin %0d", bin);
    end
    if (bin == N - 1) done = 1;
    bin++;
  end

  initial begin
    for (int n = 0; n < N; n++) begin
      automatic real ph = 2.0 * PI * real'(longint'(K0) * n % N) / real'(N);
      tone_i[n] = 12'(rnd(AMP * $cos(ph)));
      tone_q[n] = 12'(rnd(AMP * $sin(ph)));
    end
    foreach (adc_i[j]) begin adc_i[j] = 0; adc_q[j] = 0; end
    repeat (4) @(posedge fclk);
    arst_n = 1; frst_n = 1; drst_n = 1;
    repeat (4) @(posedge fclk);
    for (longint b = 0; b < longint'(M + 1) * N / 8; b++) begin
      @(negedge aclk);
      adc_valid = 1;
      for (int j = 0; j < 8; j++) begin
        adc_i[j] = tone_i[(8 * b + j) % N];
        adc_q[j] = tone_q[(8 * b + j) % N];
      end
    end
    @(negedge aclk); adc_valid = 0;
    wait (done);
    checks += 4;
    if (bin != N) begin failures++; $display("%0d bins streamed, want %0d", bin, N); end
    if (maxother > 1.0e-6 * peak) begin failures++; $display("largest other bin %g", maxother); end
    if (ovf) begin failures++; $display("FIFO overflow"); end
    if (overruns != 0) begin failures++; $display("overrun"); end
    $display("peak bin %0d, largest other bin %g of %g", K0, maxother, peak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
