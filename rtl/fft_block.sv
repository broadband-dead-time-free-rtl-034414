// fft_block: the FFT block: converter samples in, 16 lane powers per beat out.
//
// Data path (N = 2^LOG2N points, n = LOG2N):
//   input_distributer  16 lane FIFOs, lane j gets x(16t + j), FFT clock out
//   sdf_fft x16        first sub-FFT: N/16-point transform of each lane
//   split_lut_rotator  general rotation W_N^{k_lo * j} on lanes 1..15
//   fft16_r24          second sub-FFT: 16-point transform across the lanes
//   power_calc x16     |X|^2 as 54-bit fixed point or FP32
// This is x~(k) = sum_j W_16^{k_hi j} W_N^{k_lo j} sum_t W_{N/16}^{k_lo t} x(16t+j)
// with k = k_lo + (N/16) k_hi. The sub-FFTs emit k_lo in bit-reversed order:
// the p-th beat of a spectrum has k_lo = bitrev(p), which is what the
// rotation index uses. Lane 0 needs no rotation and is delayed by the
// rotator latency (3 clocks) instead: 15 general rotators in all, as in the
// paper.
//
// Output: out_valid and out_pwr[r] = power of bin bitrev(p) + bitrev4(r) * N/16
// for the p-th valid beat of each spectrum (p = 0 .. N/16-1), spectra back to
// back. All stages run on fft_clk and advance with the valid flag, so the
// input may have gaps. Latency from the pop of the last sample of a spectrum
// to its last output: about N/16 beats plus 4 clocks per SDF stage and 12.
// In the FP32 build the sign bit of every out_pwr word is constant 0: a
// power is never negative.
module fft_block
  import spec_pkg::*;
#(
  parameter int unsigned LOG2N   = 18,
  parameter out_fmt_e    FMT     = FMT_FP32,
  parameter int unsigned FIFO_AW = 4,
  parameter int unsigned PWR_W   = pwr_width(FMT)
) (
  input  logic                     adc_clk,
  input  logic                     adc_rst_n,
  input  logic                     adc_valid,
  input  logic signed [ADC_W-1:0]  adc_i [ADC_PAR],
  input  logic signed [ADC_W-1:0]  adc_q [ADC_PAR],
  output logic                     fifo_overflow,
  input  logic                     fft_clk,
  input  logic                     fft_rst_n,
  output logic                     out_valid,
  output logic [PWR_W-1:0]         out_pwr [LANES]
);
  localparam int unsigned LOG2N16 = LOG2N - LOG2LANES;
  localparam int unsigned W1      = ADC_W + LOG2N16;   // after the first sub-FFT
  localparam int unsigned W2      = W1 + LOG2LANES;    // after the second: 12 + n

  // Input distribution
  logic                    d_valid;
  logic signed [ADC_W-1:0] d_re [LANES], d_im [LANES];

  input_distributer #(.FIFO_AW(FIFO_AW)) u_dist (
    .adc_clk  (adc_clk),
    .adc_rst_n(adc_rst_n),
    .adc_valid(adc_valid),
    .adc_i    (adc_i),
    .adc_q    (adc_q),
    .overflow (fifo_overflow),
    .fft_clk  (fft_clk),
    .fft_rst_n(fft_rst_n),
    .out_valid(d_valid),
    .out_re   (d_re),
    .out_im   (d_im)
  );

  // First sub-FFT, one per lane
  logic [LANES-1:0]     s_valid;
  logic signed [W1-1:0] s_re [LANES], s_im [LANES];

  for (genvar j = 0; j < LANES; j++) begin : g_sdf
    sdf_fft #(.LOG2N(LOG2N16), .W(ADC_W)) u_sdf (
      .clk      (fft_clk),
      .rst_n    (fft_rst_n),
      .in_valid (d_valid),
      .in_re    (d_re[j]),
      .in_im    (d_im[j]),
      .out_valid(s_valid[j]),
      .out_re   (s_re[j]),
      .out_im   (s_im[j])
    );
  end

  // Position of the beat within the spectrum; k_lo = bitrev(p).
  logic [LOG2N16-1:0] p;
  logic [LOG2N16-1:0] k_lo;
  always_ff @(posedge fft_clk or negedge fft_rst_n) begin
    if (!fft_rst_n)     p <= '0;
    else if (s_valid[0]) p <= p + 1'b1;
  end
  assign k_lo = LOG2N16'(bitrev(32'(p), LOG2N16));

  // General rotation W_N^{k_lo * j}
  logic [LANES-1:0]     r_valid;
  logic signed [W1-1:0] r_re [LANES], r_im [LANES];

  // Lane 0: matched delay of the rotator latency
  logic signed [W1-1:0] l0_re [3], l0_im [3];
  logic [2:0]           l0_v;
  always_ff @(posedge fft_clk) begin
    l0_re[0] <= s_re[0];  l0_im[0] <= s_im[0];
    l0_re[1] <= l0_re[0]; l0_im[1] <= l0_im[0];
    l0_re[2] <= l0_re[1]; l0_im[2] <= l0_im[1];
  end
  always_ff @(posedge fft_clk or negedge fft_rst_n) begin
    if (!fft_rst_n) l0_v <= '0;
    else            l0_v <= {l0_v[1:0], s_valid[0]};
  end
  assign r_valid[0] = l0_v[2];
  assign r_re[0]    = l0_re[2];
  assign r_im[0]    = l0_im[2];

  for (genvar j = 1; j < LANES; j++) begin : g_rot
    logic [LOG2N-1:0] m;
    assign m = LOG2N'(k_lo) * LOG2N'(j);
    split_lut_rotator #(.LOG2N(LOG2N), .W(W1)) u_rot (
      .clk      (fft_clk),
      .rst_n    (fft_rst_n),
      .in_valid (s_valid[j]),
      .in_re    (s_re[j]),
      .in_im    (s_im[j]),
      .m        (m),
      .out_valid(r_valid[j]),
      .out_re   (r_re[j]),
      .out_im   (r_im[j])
    );
  end

  // Second sub-FFT across the lanes
  logic                 f_valid;
  logic signed [W2-1:0] f_re [LANES], f_im [LANES];

  fft16_r24 #(.W(W1)) u_fft16 (
    .clk      (fft_clk),
    .rst_n    (fft_rst_n),
    .in_valid (&r_valid),   // all lanes are valid together
    .in_re    (r_re),
    .in_im    (r_im),
    .out_valid(f_valid),
    .out_re   (f_re),
    .out_im   (f_im)
  );

  // Power
  logic [LANES-1:0] pw_valid;
  for (genvar r = 0; r < LANES; r++) begin : g_pwr
    power_calc #(.W(W2), .FMT(FMT), .OUT_W(PWR_W)) u_pwr (
      .clk      (fft_clk),
      .rst_n    (fft_rst_n),
      .in_valid (f_valid),
      .in_re    (f_re[r]),
      .in_im    (f_im[r]),
      .out_valid(pw_valid[r]),
      .out_pwr  (out_pwr[r])
    );
  end
  assign out_valid = &pw_valid;

endmodule
