// sdf_stage: one radix-2 single-path delay-feedback (SDF) stage of a
// decimation-in-frequency FFT: a butterfly with a feedback delay memory of
// D = 2^LOG2D words, followed by the twiddle rotation W_{2D}^j.
//
// Each block of 2D input samples is handled in two halves. In the first half
// the inputs are written to the delay memory while the memory returns the
// differences a-b left there by the previous block. In the second half the
// butterfly combines the stored sample a with the arriving one b: a+b leaves
// at once, a-b goes into the memory. So the output of a block is its D sums
// followed by its D differences, the differences rotated by W_{2D}^j
// (j = 0 .. D-1). The memory is read one beat ahead through a registered read
// port, as a block RAM would be. The first D inputs after reset produce no
// output; every later input produces exactly one.
//
// Widths grow by one bit: W-bit input, (W+1)-bit output. The rotation uses a
// split_lut_rotator (LOG2D >= 1) and adds its 3 clocks of latency; the last
// stage (D = 1) has no rotation. Latency from an input to the output it
// produces is 1 clock, plus 3 when there is a rotator. The stage advances only
// on in_valid, so gaps in the input stream are allowed.
module sdf_stage
  import spec_pkg::*;
#(
  parameter int unsigned LOG2D = 12,  // delay D = 2^LOG2D
  parameter int unsigned W     = 12   // input component width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  output logic                out_valid,
  output logic signed [W:0]   out_re,
  output logic signed [W:0]   out_im
);
  localparam int unsigned D  = 1 << LOG2D;
  localparam int unsigned AW = (LOG2D == 0) ? 1 : LOG2D;

  typedef struct packed {
    logic signed [W:0] re;
    logic signed [W:0] im;
  } cpx_t;

  cpx_t            mem [D];
  cpx_t            rd_q;          // memory word for the current beat
  logic [LOG2D:0]  cnt;           // position in the 2D-sample block
  logic            primed;        // a full block has been absorbed
  logic [AW-1:0]   slot, next_slot;
  logic            half;          // second half of the block
  cpx_t            b, wdata, odata;

  always_comb begin
    half      = cnt[LOG2D];
    slot      = AW'(cnt % (LOG2D + 1)'(D));
    next_slot = AW'((cnt + 1'b1) % (LOG2D + 1)'(D));
    b.re      = (W + 1)'(in_re);
    b.im      = (W + 1)'(in_im);
    if (!half) begin
      wdata = b;        // store first-half sample
      odata = rd_q;     // emit previous block's difference
    end else begin
      wdata.re = rd_q.re - b.re;
      wdata.im = rd_q.im - b.im;
      odata.re = rd_q.re + b.re;
      odata.im = rd_q.im + b.im;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      mem[slot] <= wdata;
      rd_q      <= (next_slot == slot) ? wdata : mem[next_slot];
    end
  end

  logic              bf_valid;
  logic signed [W:0] bf_re, bf_im;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      primed   <= 1'b0;
      bf_valid <= 1'b0;
    end else begin
      bf_valid <= in_valid && (half || primed);
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        if (half) primed <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      bf_re <= odata.re;
      bf_im <= odata.im;
    end
  end

  if (LOG2D == 0) begin : g_no_rot
    assign out_valid = bf_valid;
    assign out_re    = bf_re;
    assign out_im    = bf_im;
  end else begin : g_rot
    logic [AW-1:0] bf_j;         // twiddle exponent of the output
    always_ff @(posedge clk) if (in_valid) bf_j <= half ? '0 : slot;
    split_lut_rotator #(.LOG2N(LOG2D + 1), .W(W + 1)) u_rot (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (bf_valid),
      .in_re    (bf_re),
      .in_im    (bf_im),
      .m        ({1'b0, bf_j}),
      .out_valid(out_valid),
      .out_re   (out_re),
      .out_im   (out_im)
    );
  end

endmodule
