// sdf_fft: streaming radix-2 SDF FFT of size 2^LOG2N, one complex sample per
// valid beat, the "first sub-FFT" that each of the 16 lanes runs.
//
// LOG2N sdf_stage instances are chained, with delays 2^(LOG2N-1) down to 1
// (decimation in frequency). Input is in natural order; the output of each
// transform is in bit-reversed order: the p-th output of a frame is bin
// bitrev(p). No scaling is done: every stage adds one bit, so the output is
// W + LOG2N bits wide, exactly the 12 + 17 = 29 (12 + 18 = 30) bits of full
// growth. The paper builds this part with a vendor FFT core of the SDF kind;
// this module is an open re-creation of that structure with split-LUT
// twiddles, so its rounding differs from the vendor core.
//
// Frames are back to back and aligned to the first valid sample after reset.
// The first valid output is bin 0 of frame 0; outputs then follow without
// loss, one per valid input. Latency: about 2^LOG2N valid beats of fill, plus
// 4 clocks per stage with a rotator and 1 for the last stage.
module sdf_fft #(
  parameter int unsigned LOG2N = 13,  // transform size 2^LOG2N (N/16 of the spectrum)
  parameter int unsigned W     = 12   // input component width
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [W-1:0]       in_re,
  input  logic signed [W-1:0]       in_im,
  output logic                      out_valid,
  output logic signed [W+LOG2N-1:0] out_re,
  output logic signed [W+LOG2N-1:0] out_im
);
  localparam int unsigned OW = W + LOG2N;

  logic                 v  [LOG2N+1];
  logic signed [OW-1:0] re [LOG2N+1];
  logic signed [OW-1:0] im [LOG2N+1];

  assign v[0]  = in_valid;
  assign re[0] = OW'(in_re);
  assign im[0] = OW'(in_im);

  for (genvar s = 0; s < LOG2N; s++) begin : g_stage
    logic signed [W+s:0] o_re, o_im;
    sdf_stage #(.LOG2D(LOG2N - 1 - s), .W(W + s)) u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (v[s]),
      .in_re    (re[s][W+s-1:0]),
      .in_im    (im[s][W+s-1:0]),
      .out_valid(v[s+1]),
      .out_re   (o_re),
      .out_im   (o_im)
    );
    assign re[s+1] = OW'(o_re);
    assign im[s+1] = OW'(o_im);
  end

  assign out_valid = v[LOG2N];
  assign out_re    = re[LOG2N];
  assign out_im    = im[LOG2N];

endmodule
