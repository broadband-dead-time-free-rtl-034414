// fft16_r24: fully parallel 16-point FFT in the radix-2^4 arrangement, the
// "second sub-FFT" that combines the 16 lanes.
//
// Lane j of the input carries the sample with time index t = j (bits t3..t0).
// The transform is computed as four radix-2 butterfly columns with the
// rotations between them reduced to trivial or constant ones:
//   column 1: butterflies over t3 (lanes j, j+8)
//   -i on the lanes where k_{n-4} = 1 and t2 = 1
//   column 2: butterflies over t2 (lanes j, j+4)
//   constant rotation W_16^{(k_{n-4} + 2 k_{n-3}) (t0 + 2 t1)}
//   column 3: butterflies over t1 (lanes j, j+2)
//   -i on the lanes where k_{n-2} = 1 and t0 = 1
//   column 4: butterflies over t0 (lanes j, j+1)
// This is the factorisation and the unit placement of the paper (its eight
// constant rotators W8, W16, W16^3, W8^3, W16^9 and a -i in the middle
// column). The result leaves in bit-reversed lane order: output lane r holds
// frequency index bitrev4(r), i.e. bin k_lo + bitrev4(r) * N/16.
//
// Each butterfly column and the constant rotation are registered: latency 5
// clocks, one 16-sample vector per clock, no stall. Widths grow by one bit per
// column (W in, W+4 out). Constants are Q1.16, rounded half up.
module fft16_r24
  import spec_pkg::*;
#(
  parameter int unsigned W = 29  // input component width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  in_re [LANES],
  input  logic signed [W-1:0]  in_im [LANES],
  output logic                 out_valid,
  output logic signed [W+3:0]  out_re [LANES],
  output logic signed [W+3:0]  out_im [LANES]
);
  localparam int unsigned OW = W + 4;
  localparam int unsigned PW = OW + COEF_W + 1;
  typedef logic signed [OW-1:0] val_t;

  // cos and sin of 2*pi*r/16 for r = 0..3, Q1.16
  localparam coef_t C16 [4] = '{coef_t'(65536), coef_t'(60547), coef_t'(46341), coef_t'(25080)};
  localparam coef_t S16 [4] = '{coef_t'(0),     coef_t'(25080), coef_t'(46341), coef_t'(60547)};

  // Multiply by W_16^e. The quarter turns are swaps and sign flips.
  function automatic void rot16(input val_t re, input val_t im, input int unsigned e,
                                output val_t ore, output val_t oim);
    logic signed [PW-1:0] pr, pi_;
    val_t tr, ti;
    int unsigned r;
    r = e % 4;
    if (r == 0) begin
      tr = re; ti = im;
    end else begin
      pr  = PW'(re * C16[r]) + PW'(im * S16[r]) + PW'(1 << (COEF_FRAC - 1));
      pi_ = PW'(im * C16[r]) - PW'(re * S16[r]) + PW'(1 << (COEF_FRAC - 1));
      tr  = OW'(pr  >>> COEF_FRAC);
      ti  = OW'(pi_ >>> COEF_FRAC);
    end
    unique case ((e / 4) % 4)
      0: begin ore =  tr; oim =  ti; end
      1: begin ore =  ti; oim = -tr; end   // * -i
      2: begin ore = -tr; oim = -ti; end
      default: begin ore = -ti; oim =  tr; end
    endcase
  endfunction

  val_t a_re [LANES], a_im [LANES];   // after column 1
  val_t b_re [LANES], b_im [LANES];   // after column 2
  val_t c_re [LANES], c_im [LANES];   // after constant rotation
  val_t d_re [LANES], d_im [LANES];   // after column 3
  logic [4:0] vpipe;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[3:0], in_valid};
  end
  assign out_valid = vpipe[4];

  always_ff @(posedge clk) begin
    val_t x_re, x_im, y_re, y_im, tr, ti;
    // Column 1: over t3. Lane index afterwards: t0 + 2 t1 + 4 t2 + 8 k_{n-4}.
    for (int j = 0; j < 8; j++) begin
      a_re[j]   <= OW'(in_re[j]) + OW'(in_re[j+8]);
      a_im[j]   <= OW'(in_im[j]) + OW'(in_im[j+8]);
      a_re[j+8] <= OW'(in_re[j]) - OW'(in_re[j+8]);
      a_im[j+8] <= OW'(in_im[j]) - OW'(in_im[j+8]);
    end
    // -i where k_{n-4} = 1 and t2 = 1, then column 2 over t2.
    // Lane index afterwards: t0 + 2 t1 + 4 k_{n-3} + 8 k_{n-4}.
    for (int g = 0; g < 2; g++)
      for (int j = 0; j < 4; j++) begin
        x_re = a_re[8*g+j];   x_im = a_im[8*g+j];
        if (g == 1) begin y_re = a_im[8*g+j+4]; y_im = -a_re[8*g+j+4]; end
        else        begin y_re = a_re[8*g+j+4]; y_im =  a_im[8*g+j+4]; end
        b_re[8*g+j]   <= x_re + y_re;
        b_im[8*g+j]   <= x_im + y_im;
        b_re[8*g+j+4] <= x_re - y_re;
        b_im[8*g+j+4] <= x_im - y_im;
      end
    // Constant rotation W_16^{(k_{n-4} + 2 k_{n-3}) (t0 + 2 t1)}.
    for (int j = 0; j < 16; j++) begin
      rot16(b_re[j], b_im[j], ((j >> 3) + 2 * ((j >> 2) & 1)) * (j & 3), tr, ti);
      c_re[j] <= tr;
      c_im[j] <= ti;
    end
    // Column 3 over t1. Lane index afterwards: t0 + 2 k_{n-2} + 4 k_{n-3} + 8 k_{n-4}.
    for (int g = 0; g < 4; g++)
      for (int j = 0; j < 2; j++) begin
        d_re[4*g+j]   <= c_re[4*g+j] + c_re[4*g+j+2];
        d_im[4*g+j]   <= c_im[4*g+j] + c_im[4*g+j+2];
        d_re[4*g+j+2] <= c_re[4*g+j] - c_re[4*g+j+2];
        d_im[4*g+j+2] <= c_im[4*g+j] - c_im[4*g+j+2];
      end
    // -i where k_{n-2} = 1 and t0 = 1, then column 4 over t0.
    // Lane index afterwards: k_{n-1} + 2 k_{n-2} + 4 k_{n-3} + 8 k_{n-4} = bitrev4(k_hi).
    for (int g = 0; g < 8; g++) begin
      x_re = d_re[2*g];   x_im = d_im[2*g];
      if (g % 2 == 1) begin y_re = d_im[2*g+1]; y_im = -d_re[2*g+1]; end
      else            begin y_re = d_re[2*g+1]; y_im =  d_im[2*g+1]; end
      out_re[2*g]   <= x_re + y_re;
      out_im[2*g]   <= x_im + y_im;
      out_re[2*g+1] <= x_re - y_re;
      out_im[2*g+1] <= x_im - y_im;
    end
  end

endmodule
