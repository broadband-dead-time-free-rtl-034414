// tb_spectrometer_top: end-to-end test of the spectrometer.
// The top runs at N = 256 and M = 16 in its default FP32 format (the default
// N = 2^18, M = 1024 run is tb_spectrometer_full). A noisy complex tone, kept
// inside |x| <= 2047, enters as 8 I/Q pairs per 2 ns converter beat with a few
// idle beats; the FFT clock is a little faster than half the converter clock,
// the DMA clock runs at 2 ns with random tready. Every streamed spectrum is
// compared bin by bin, in natural order, with the sum over its M frames of
// |DFT|^2 computed in real arithmetic.
//
// The mechanisms of the design are each forced and counted:
//   converter idle beats, FFT-side idle clocks (FIFOs empty), completed
//   accumulation rounds, AXI4-Stream back-pressure, a DMA stall long enough
//   to cause an accumulator overrun (that round is not compared), and at the
//   end a too slow FFT clock that must raise the FIFO overflow flag.
`timescale 1ns/1ps
module tb_spectrometer_top;
  import spec_pkg::*;
  localparam int LOG2N = 8, N = 256, N16 = 16, M = 16, ROUNDS = 4;
  localparam int FRAMES = ROUNDS * M;
  localparam real PI = 3.14159265358979;

  logic aclk = 0, fclk = 0, dclk = 0, arst_n = 0, frst_n = 0, drst_n = 0;
  real  fhp = 1.8;
  always #1.0  aclk = ~aclk;
  always #(fhp) fclk = ~fclk;
  always #1.0  dclk = ~dclk;
  int checks = 0, failures = 0;

  logic adc_valid = 0;
  logic signed [11:0] adc_i [8], adc_q [8];
  logic [31:0] tdata;
  logic tvalid, tready = 0, tlast;
  logic ovf, busy;
  logic [15:0] overruns;
  logic [4:0]  frame;

  spectrometer_top #(.LOG2N(LOG2N), .M(M)) dut (
    .adc_clk(aclk), .adc_rst_n(arst_n), .adc_valid, .adc_i, .adc_q,
    .fft_clk(fclk), .fft_rst_n(frst_n), .dma_clk(dclk), .dma_rst_n(drst_n),
    .m_axis_tdata(tdata), .m_axis_tvalid(tvalid), .m_axis_tready(tready), .m_axis_tlast(tlast),
    .fifo_overflow(ovf), .readout_busy(busy), .overrun_count(overruns), .frame(frame));

  // ---------------- stimulus and reference ----------------
  int  xr [FRAMES*N], xi [FRAMES*N];
  real ref_p [ROUNDS][N], tol_p [ROUNDS][N];
  real ctab [N], stab [N];

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  function automatic real f2r(logic [31:0] f);
    if (f[30:0] == 0) return 0.0;
    return real'({1'b1, f[22:0]}) * $pow(2.0, real'(int'(f[30:23]) - 150));
  endfunction

  task automatic make_reference();
    for (int k = 0; k < N; k++) begin
      ctab[k] = $cos(2.0 * PI * k / N); stab[k] = -$sin(2.0 * PI * k / N);
    end
    for (int r = 0; r < ROUNDS; r++)
      for (int k = 0; k < N; k++) begin ref_p[r][k] = 0; tol_p[r][k] = 0; end
    for (int f = 0; f < FRAMES; f++) begin
      real l1 = 0, e;
      for (int t = 0; t < N; t++) l1 += fabs(xr[f*N+t]) + fabs(xi[f*N+t]);
      e = 8.0 + 3.0e-5 * l1;
      for (int k = 0; k < N; k++) begin
        real rr = 0, ri = 0, pw;
        for (int t = 0; t < N; t++) begin
          int a = (k * t) % N;
          rr += xr[f*N+t] * ctab[a] - xi[f*N+t] * stab[a];
          ri += xr[f*N+t] * stab[a] + xi[f*N+t] * ctab[a];
        end
        pw = rr * rr + ri * ri;
        ref_p[f / M][k] += pw;
        tol_p[f / M][k] += 2.0 * $sqrt(pw) * e + 2.0 * e * e;
      end
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_adc_idle = 0, n_fft_idle = 0, n_rounds = 0, n_backpressure = 0;
  always @(posedge aclk) if (arst_n && !adc_valid) n_adc_idle++;
  always @(posedge fclk) if (frst_n && !dut.u_fft.u_dist.out_valid && n_rounds > 0) n_fft_idle++;
  always @(posedge fclk) if (frst_n && dut.dump_done) n_rounds++;
  always @(posedge dclk) if (drst_n && tvalid && !tready) n_backpressure++;

  // ---------------- output checker ----------------
  int stream = 0, bin = 0;
  always @(posedge dclk) if (drst_n && tvalid && tready) begin
    if (stream != 2 && stream < ROUNDS) begin       // round 2 is overwritten on purpose
      automatic real got = f2r(tdata);
      automatic real tol = tol_p[stream][bin] + 2.0e-5 * ref_p[stream][bin];
      checks++;
      if (fabs(got - ref_p[stream][bin]) > tol) begin
        failures++;
        if (failures < 10) $display("round %0d bin %0d: got %g want %g (tol %g)",
                                    stream, bin, got, ref_p[stream][bin], tol);
      end
    end
    checks++;
    if (tlast != (bin == N - 1)) begin failures++; $display("tlast wrong at bin %0d", bin); end
    if (bin == N - 1) begin bin = 0; stream++; end
    else bin++;
  end

  bit stall = 0;
  always @(negedge dclk) tready <= !stall && ($urandom % 4 != 0);

  initial begin
    for (int n = 0; n < FRAMES * N; n++) begin
      automatic real ph = 2.0 * PI * 37.3 * n / N;
      xr[n] = $rtoi(1500.0 * $cos(ph)) + int'($urandom % 601) - 300;
      xi[n] = $rtoi(1500.0 * $sin(ph)) + int'($urandom % 601) - 300;
    end
    make_reference();
    foreach (adc_i[j]) begin adc_i[j] = 0; adc_q[j] = 0; end
    repeat (4) @(posedge fclk);
    arst_n = 1; frst_n = 1; drst_n = 1;
    repeat (4) @(posedge fclk);
    fork
      // converter stream: all frames, then one frame of zeros to flush
      for (int b = 0; b < (FRAMES + 1) * N / 8; ) begin
        @(negedge aclk);
        adc_valid = ($urandom % 40 != 0);
        if (adc_valid) begin
          for (int j = 0; j < 8; j++) begin
            adc_i[j] = (8 * b + j < FRAMES * N) ? 12'(xr[8*b+j]) : '0;
            adc_q[j] = (8 * b + j < FRAMES * N) ? 12'(xi[8*b+j]) : '0;
          end
          b++;
        end
      end
      // DMA stall during the readout of round 2, long enough for an overrun
      begin
        wait (stream == 2 && bin == 10);
        stall = 1;
        wait (overruns != 0);
        repeat (5) @(posedge dclk);
        stall = 0;
      end
    join
    @(negedge aclk); adc_valid = 0;
    wait (stream == ROUNDS);
    repeat (50) @(posedge fclk);
    // FIFO overflow: slow the FFT clock below half the converter clock
    checks++;
    if (ovf) begin failures++; $display("FIFO overflow during normal operation"); end
    fhp = 3.5;
    repeat (20) @(posedge fclk);
    for (int b = 0; b < 200; b++) begin
      @(negedge aclk); adc_valid = 1;
    end
    @(negedge aclk); adc_valid = 0;
    checks++;
    if (!ovf) begin failures++; $display("no FIFO overflow with a slow FFT clock"); end

    $display("mechanisms: adc idle %0d, fft idle %0d, rounds %0d, backpressure %0d, overruns %0d, overflow %0b",
             n_adc_idle, n_fft_idle, n_rounds, n_backpressure, overruns, ovf);
    checks += 5;
    if (n_adc_idle == 0)     begin failures++; $display("no converter idle beat"); end
    if (n_fft_idle == 0)     begin failures++; $display("no FFT idle clock"); end
    if (n_rounds < ROUNDS)   begin failures++; $display("only %0d rounds", n_rounds); end
    if (n_backpressure == 0) begin failures++; $display("no back-pressure"); end
    if (overruns == 0)       begin failures++; $display("no overrun"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
