// tb_fft16_r24: self-checking test of the 16-point radix-2^4 parallel FFT.
// Random 29-bit-range vectors (plus a full-scale one) are applied one per
// clock; every output lane r is compared with a 16-point DFT, bin bitrev4(r),
// computed in real arithmetic. The 5-clock latency is checked too.
`timescale 1ns/1ps
module tb_fft16_r24;
  localparam int W  = 29;
  localparam int NV = 200;
  localparam real TOL = 3.0;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [W-1:0] in_re [16], in_im [16];
  logic out_valid;
  logic signed [W+3:0] out_re [16], out_im [16];
  int checks = 0, failures = 0;

  fft16_r24 #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  real vr [NV][16], vi [NV][16];
  int  sent_cycle [NV];
  int  cycle = 0;

  function automatic real fabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  int oc = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int r = 0; r < 16; r++) begin
      automatic int k = {r[0], r[1], r[2], r[3]};
      automatic real rr = 0, ri = 0, ang, tol = TOL;
      for (int t = 0; t < 16; t++) begin
        tol += 2.0e-5 * (fabs(vr[oc][t]) + fabs(vi[oc][t]));  // Q1.16 constants
        ang = -2.0 * 3.14159265358979 * real'(k * t) / 16.0;
        rr += vr[oc][t] * $cos(ang) - vi[oc][t] * $sin(ang);
        ri += vr[oc][t] * $sin(ang) + vi[oc][t] * $cos(ang);
      end
      checks++;
      if (fabs(real'(out_re[r]) - rr) > tol || fabs(real'(out_im[r]) - ri) > tol) begin
        failures++;
        if (failures < 10) $display("MISMATCH vec %0d lane %0d: got (%0d,%0d) want (%0.1f,%0.1f)",
                                    oc, r, out_re[r], out_im[r], rr, ri);
      end
    end
    checks++;
    // sent after clock edge c, captured at c+1, registered out at c+5
    if (cycle - sent_cycle[oc] != 5) begin
      failures++;
      $display("latency %0d clocks, want 5", cycle - sent_cycle[oc]);
    end
    oc++;
  end
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    for (int v = 0; v < NV; v++)
      for (int j = 0; j < 16; j++) begin
        vr[v][j] = (v == 0) ? real'((1 << (W-1)) - 1) : real'($signed(W'({$urandom, $urandom})));
        vi[v][j] = (v == 0) ? -real'(1 << (W-1))      : real'($signed(W'({$urandom, $urandom})));
      end
    foreach (in_re[j]) begin in_re[j] = '0; in_im[j] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      while ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      sent_cycle[v] = cycle;
      for (int j = 0; j < 16; j++) begin
        in_re[j] = W'($rtoi(vr[v][j]));
        in_im[j] = W'($rtoi(vi[v][j]));
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (oc != NV) begin failures++; $display("got %0d vectors, want %0d", oc, NV); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
