// tb_input_distributer: self-checking test of the input distribution.
// A converter-side stream of 8 complex samples per 2 ns beat (with a few idle
// beats) is numbered sample by sample. On the FFT side (3.6 ns clock, a bit
// faster than half the converter clock) every popped vector must hold
// x(16t + j) in lane j, in order, with no sample lost; overflow must stay
// low. A second instance with a too slow FFT clock (6 ns) must raise its
// overflow flag.
`timescale 1ns/1ps
module tb_input_distributer;
  import spec_pkg::*;
  localparam int BEATS = 2000;
  logic aclk = 0, fclk = 0, sclk = 0, arst_n = 0, frst_n = 0;
  always #1.0 aclk = ~aclk;
  always #1.8 fclk = ~fclk;
  always #3.0 sclk = ~sclk;
  int checks = 0, failures = 0;

  logic adc_valid = 0;
  logic signed [11:0] adc_i [8], adc_q [8];
  logic ovf, ovf_slow, ov, ov_slow;
  logic signed [11:0] o_re [16], o_im [16], s_re [16], s_im [16];

  input_distributer dut (.adc_clk(aclk), .adc_rst_n(arst_n), .adc_valid, .adc_i, .adc_q,
    .overflow(ovf), .fft_clk(fclk), .fft_rst_n(frst_n), .out_valid(ov), .out_re(o_re), .out_im(o_im));
  input_distributer slow (.adc_clk(aclk), .adc_rst_n(arst_n), .adc_valid, .adc_i, .adc_q,
    .overflow(ovf_slow), .fft_clk(sclk), .fft_rst_n(frst_n), .out_valid(ov_slow), .out_re(s_re), .out_im(s_im));

  // sample n: I = n mod 2048, Q = pseudo-random function of n
  function automatic logic signed [11:0] qval(int n);
    return 12'((n * 2654435761) >>> 13);
  endfunction

  int vec = 0;
  always @(posedge fclk) if (frst_n && ov) begin
    for (int j = 0; j < 16; j++) begin
      automatic int n = 16 * vec + j;
      checks++;
      if (o_re[j] != 12'(n % 2048) || o_im[j] != qval(n)) begin
        failures++;
        if (failures < 10) $display("vector %0d lane %0d: got (%0d,%0d) want (%0d,%0d)",
                                    vec, j, o_re[j], o_im[j], n % 2048, qval(n));
      end
    end
    vec++;
  end

  initial begin
    foreach (adc_i[j]) begin adc_i[j] = 0; adc_q[j] = 0; end
    repeat (4) @(posedge sclk);
    arst_n = 1; frst_n = 1;
    repeat (4) @(posedge sclk);
    for (int b = 0; b < BEATS; ) begin
      @(negedge aclk);
      adc_valid = ($urandom % 50 != 0);
      if (adc_valid) begin
        for (int j = 0; j < 8; j++) begin
          adc_i[j] = 12'((8 * b + j) % 2048);
          adc_q[j] = qval(8 * b + j);
        end
        b++;
      end
    end
    @(negedge aclk); adc_valid = 0;
    repeat (50) @(posedge fclk);
    checks++;
    if (vec != BEATS / 2) begin failures++; $display("got %0d vectors, want %0d", vec, BEATS / 2); end
    checks++;
    if (ovf) begin failures++; $display("overflow with a fast enough FFT clock"); end
    checks++;
    if (!ovf_slow) begin failures++; $display("no overflow with a too slow FFT clock"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #30000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
