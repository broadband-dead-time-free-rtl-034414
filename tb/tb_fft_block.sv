// tb_fft_block: self-checking test of the whole FFT block at N = 256.
// Three frames of complex samples (random, then a full-scale tone, then
// random) enter as 8 I/Q pairs per converter beat. The fixed-point build is
// used: for N = 256 the 20-bit transform gives an exact 40-bit power. Every
// output beat p, lane r is compared with |DFT(bin bitrev4(p) + 16*bitrev4(r))|^2
// of its frame, computed in real arithmetic, allowing the twiddle rounding
// error. The FFT clock is only a little faster than half the converter
// clock, so the input side has gaps; no sample may be lost.
`timescale 1ns/1ps
module tb_fft_block;
  import spec_pkg::*;
  localparam int LOG2N = 8, N = 256, N16 = 16, FR = 3;
  logic aclk = 0, fclk = 0, arst_n = 0, frst_n = 0;
  always #1.0 aclk = ~aclk;
  always #1.8 fclk = ~fclk;
  int checks = 0, failures = 0;

  logic adc_valid = 0;
  logic signed [11:0] adc_i [8], adc_q [8];
  logic ovf, out_valid;
  logic [53:0] out_pwr [16];

  fft_block #(.LOG2N(LOG2N), .FMT(FMT_FIXED)) dut (.adc_clk(aclk), .adc_rst_n(arst_n), .adc_valid,
    .adc_i, .adc_q, .fifo_overflow(ovf), .fft_clk(fclk), .fft_rst_n(frst_n), .out_valid, .out_pwr);

  int xr [FR*N], xi [FR*N];
  real l1 [FR];

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  function automatic int br(int x, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (x[i]) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  int beat = 0;
  always @(posedge fclk) if (frst_n && out_valid && beat < FR * N16) begin
    automatic int f = beat / N16, p = beat % N16;
    for (int r = 0; r < 16; r++) begin
      automatic int k = br(p, 4) + N16 * br(r, 4);
      automatic real rr = 0, ri = 0, ang, pw, e, tol;
      for (int t = 0; t < N; t++) begin
        ang = -2.0 * 3.14159265358979 * real'((k * t) % N) / real'(N);
        rr += xr[f*N+t] * $cos(ang) - xi[f*N+t] * $sin(ang);
        ri += xr[f*N+t] * $sin(ang) + xi[f*N+t] * $cos(ang);
      end
      pw  = rr * rr + ri * ri;
      e   = 8.0 + 3.0e-5 * l1[f];
      tol = 2.0 * $sqrt(pw) * e + 2.0 * e * e;
      checks++;
      if (fabs(real'(out_pwr[r]) - pw) > tol) begin
        failures++;
        if (failures < 10) $display("frame %0d bin %0d: got %0d want %0.0f", f, k, out_pwr[r], pw);
      end
    end
    beat++;
  end

  initial begin
    for (int n = 0; n < FR * N; n++) begin
      do begin   // inside |x| <= 2047, the range the full-growth widths are exact for
        xr[n] = $signed(12'($urandom)); xi[n] = $signed(12'($urandom));
      end while (xr[n] * xr[n] + xi[n] * xi[n] > 2047 * 2047);
      if (n / N == 1) begin
        xr[n] = $rtoi(2000.0 * $cos(2.0 * 3.14159265358979 * 37.0 * n / N));
        xi[n] = $rtoi(2000.0 * $sin(2.0 * 3.14159265358979 * 37.0 * n / N));
      end
    end
    for (int f = 0; f < FR; f++) begin
      l1[f] = 0;
      for (int t = 0; t < N; t++) l1[f] += fabs(xr[f*N+t]) + fabs(xi[f*N+t]);
    end
    foreach (adc_i[j]) begin adc_i[j] = 0; adc_q[j] = 0; end
    repeat (4) @(posedge fclk);
    arst_n = 1; frst_n = 1;
    repeat (4) @(posedge fclk);
    // FR frames plus one more to flush the SDF pipelines
    for (int b = 0; b < (FR + 1) * N / 8; b++) begin
      @(negedge aclk);
      adc_valid = 1;
      for (int j = 0; j < 8; j++) begin
        adc_i[j] = (8 * b + j < FR * N) ? 12'(xr[8*b+j]) : '0;
        adc_q[j] = (8 * b + j < FR * N) ? 12'(xi[8*b+j]) : '0;
      end
    end
    @(negedge aclk); adc_valid = 0;
    repeat (200) @(posedge fclk);
    checks++;
    if (beat != FR * N16) begin failures++; $display("got %0d beats, want %0d", beat, FR * N16); end
    checks++;
    if (ovf) begin failures++; $display("FIFO overflow"); end
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
