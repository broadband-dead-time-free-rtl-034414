// tb_sdf_fft: self-checking test of the streaming radix-2 SDF FFT.
// A 64-point instance is fed three frames of random 12-bit complex samples
// (magnitude at most 2047)
// with random gaps in the valid stream. Each output frame is compared, bin
// by bin in bit-reversed order, with a direct DFT computed in real
// arithmetic; the error allowed is a few LSBs of twiddle rounding.
`timescale 1ns/1ps
module tb_sdf_fft;
  localparam int LOG2N = 6;
  localparam int N     = 1 << LOG2N;
  localparam int W     = 12;
  localparam int FR    = 3;
  localparam real TOL  = 12.0;  // accumulated Q1.16 twiddle rounding

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [W-1:0] in_re = 0, in_im = 0;
  logic out_valid;
  logic signed [W+LOG2N-1:0] out_re, out_im;
  int checks = 0, failures = 0;

  sdf_fft #(.LOG2N(LOG2N), .W(W)) dut (.*);

  always #5 clk = ~clk;

  int xr [FR*N], xi [FR*N];
  real er, ei;

  function automatic real fabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic int bitrev_i(int x, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (x[i]) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  task automatic dft(int f, int k, output real rr, output real ri);
    real ang;
    rr = 0; ri = 0;
    for (int t = 0; t < N; t++) begin
      ang = -2.0 * 3.14159265358979 * real'(k * t) / real'(N);
      rr += xr[f*N+t] * $cos(ang) - xi[f*N+t] * $sin(ang);
      ri += xr[f*N+t] * $sin(ang) + xi[f*N+t] * $cos(ang);
    end
  endtask

  // Collector
  int oc = 0;
  always @(posedge clk) if (rst_n && out_valid && oc < FR*N) begin
    automatic int f = oc / N, p = oc % N;
    automatic real rr, ri;
    dft(f, bitrev_i(p, LOG2N), rr, ri);
    checks++;
    if (fabs(real'(out_re) - rr) > TOL || fabs(real'(out_im) - ri) > TOL) begin
      failures++;
      if (failures < 10) $display("MISMATCH frame %0d pos %0d: got (%0d,%0d) want (%0.1f,%0.1f)",
                                  f, p, out_re, out_im, rr, ri);
    end
    oc++;
  end

  initial begin
    // random samples inside the circle |x| <= 2047: the full-growth widths
    // (one bit per stage) are exact for such inputs
    for (int i = 0; i < FR*N; i++)
      do begin
        xr[i] = $signed(12'($urandom)); xi[i] = $signed(12'($urandom));
      end while (xr[i] * xr[i] + xi[i] * xi[i] > 2047 * 2047);
    // full-scale tone in frame 1 to exercise the top of the range
    for (int t = 0; t < N; t++) begin
      xr[N+t] = $rtoi(2047.0 * $cos(2.0 * 3.14159265358979 * 5 * t / N));
      xi[N+t] = $rtoi(2047.0 * $sin(2.0 * 3.14159265358979 * 5 * t / N));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < FR*N + N; i++) begin
      @(negedge clk);
      while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      in_re = (i < FR*N) ? W'(xr[i]) : '0;
      in_im = (i < FR*N) ? W'(xi[i]) : '0;
    end
    @(negedge clk); in_valid = 0;
    repeat (100) @(posedge clk);
    if (oc != FR*N) begin failures++; $display("got %0d outputs, want %0d", oc, FR*N); end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
