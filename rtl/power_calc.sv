// power_calc: power |x|^2 = re^2 + im^2 of one complex FFT output.
//
// Two output formats, chosen by FMT. FMT_FIXED (the N = 2^17 build): the
// 2W-bit exact power of a 29-bit input is 58 bits; it is cut to the paper's
// 54-bit word by dropping the 2W - 54 lowest bits (truncation; which bits the
// original drops is not stated). FMT_FP32 (the N = 2^18 build): the exact
// power is converted to IEEE single precision, rounded to nearest even.
//
// In FP32 the sign bit of out_pwr is always 0, since a power is never
// negative; it is kept so the word is a standard single-precision float.
//
// Pipeline: squares, sum, format conversion, each registered: latency 3
// clocks, one value per clock, no stall.
module power_calc
  import spec_pkg::*;
#(
  parameter int unsigned W     = 30,              // input component width
  parameter out_fmt_e    FMT   = FMT_FP32,
  parameter int unsigned OUT_W = pwr_width(FMT)  // 54 (fixed) or 32 (FP32)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  in_re,
  input  logic signed [W-1:0]  in_im,
  output logic                 out_valid,
  output logic [OUT_W-1:0]     out_pwr
);
  localparam int unsigned SW = 2 * W;                        // exact power width
  localparam int unsigned SH = (SW > OUT_W) ? SW - OUT_W : 0;

  initial assert (SW <= 64) else $error("power_calc: W above 32 is not supported");

  logic [SW-2:0] sq_re, sq_im;   // a square of a W-bit signed value fits 2W-1 bits
  logic [SW-1:0] pwr;
  logic [2:0]    vpipe;

  always_ff @(posedge clk) begin
    sq_re <= (SW - 1)'(in_re * in_re);
    sq_im <= (SW - 1)'(in_im * in_im);
    pwr   <= SW'(sq_re) + SW'(sq_im);
    if (FMT == FMT_FP32) out_pwr <= OUT_W'(u64_to_fp32(64'(pwr)));
    else                 out_pwr <= OUT_W'(pwr >> SH);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[1:0], in_valid};
  end
  assign out_valid = vpipe[2];

endmodule
