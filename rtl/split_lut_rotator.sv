// split_lut_rotator: general rotation y = x * W_N^m, W_N = exp(-2*pi*i/N),
// using two small twiddle tables instead of one table of N/4 entries.
//
// The rotation index m (n = LOG2N bits) is split into three fields:
//   W_N^m = W_4^{m[n-1:n-2]} * W_{N/L}^{m[n-3:l]} * W_N^{m[l-1:0]}
// The W_4 part is a swap of real and imaginary parts plus sign flips. The
// coarse part W_{N/L}^j, j < N/(4L), reads one quarter-wave cosine table of
// N/(4L) entries; its sine is the same table read at N/(4L) - j. The fine part
// W_N^f, f < L, reads a cosine and a sine table of L entries each. The total
// table size is 2L + N/(4L) real numbers. L = 2^((n-3)/2) for odd n and
// 2^((n-4)/2) for even n, the choices that minimise it (sqrt(2N) and
// 1.5*sqrt(N) entries). This decomposition and the coarse-then-fine order of
// the two multiplications follow the paper; applying the W_4 part at the input,
// the Q1.16 coefficient format, round-half-up after each multiply and
// saturation at the output are this design's choices. The tables are computed
// at elaboration from the same formula.
//
// Interface: in_valid/in_re/in_im/m enter together; out_valid/out_re/out_im
// appear LATENCY = 3 clocks later. The pipeline never stalls: a bubble (valid
// low) simply travels through. LOG2N must be at least 2.
module split_lut_rotator
  import spec_pkg::*;
#(
  parameter int unsigned LOG2N = 17,  // rotation of size N = 2^LOG2N
  parameter int unsigned W     = 29   // component width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  in_re,
  input  logic signed [W-1:0]  in_im,
  input  logic [LOG2N-1:0]     m,
  output logic                 out_valid,
  output logic signed [W-1:0]  out_re,
  output logic signed [W-1:0]  out_im
);
  // Split point l and table sizes.
  localparam int unsigned LL  = (LOG2N < 4) ? 0 :
                                ((LOG2N % 2) == 1) ? (LOG2N - 3) / 2 : (LOG2N - 4) / 2;
  localparam int unsigned CB  = LOG2N - 2 - LL;     // coarse index bits
  localparam int unsigned QN  = 1 << CB;            // coarse table entries, N/(4L)
  localparam int unsigned FL  = 1 << LL;            // fine table entries, L
  localparam int unsigned FBW = (LL == 0) ? 1 : LL;
  localparam real         PI  = 3.14159265358979323846;

  typedef coef_t coarse_tab_t [QN];
  typedef coef_t fine_tab_t   [FL];

  function automatic coarse_tab_t make_coarse();
    coarse_tab_t t;
    for (int unsigned j = 0; j < QN; j++)
      t[j] = to_coef($cos(2.0 * PI * real'(j) / real'(4 * QN)));
    return t;
  endfunction

  function automatic fine_tab_t make_fine(bit sine);
    fine_tab_t t;
    for (int unsigned j = 0; j < FL; j++)
      t[j] = sine ? to_coef($sin(2.0 * PI * real'(j) / real'(1 << LOG2N)))
                  : to_coef($cos(2.0 * PI * real'(j) / real'(1 << LOG2N)));
    return t;
  endfunction

  localparam coarse_tab_t COARSE_COS = make_coarse();
  localparam fine_tab_t   FINE_COS   = make_fine(1'b0);
  localparam fine_tab_t   FINE_SIN   = make_fine(1'b1);

  localparam int unsigned IW = W + 1;  // internal width, room for negation
  localparam int unsigned PW = IW + COEF_W + 1;

  // x * (c - i s) = (re*c + im*s) + i (im*c - re*s), rounded back to IW bits.
  function automatic logic signed [2*IW-1:0] cmul(logic signed [IW-1:0] a_re,
                                                  logic signed [IW-1:0] a_im,
                                                  coef_t c, coef_t s);
    logic signed [PW-1:0] pr, pi_;
    pr  = PW'(a_re * c) + PW'(a_im * s) + PW'(1 << (COEF_FRAC - 1));
    pi_ = PW'(a_im * c) - PW'(a_re * s) + PW'(1 << (COEF_FRAC - 1));
    pr  = pr  >>> COEF_FRAC;
    pi_ = pi_ >>> COEF_FRAC;
    return {IW'(pr), IW'(pi_)};
  endfunction

  function automatic logic signed [W-1:0] sat(logic signed [IW-1:0] x);
    localparam logic signed [IW-1:0] MAXV = IW'((1 << (W - 1)) - 1);
    localparam logic signed [IW-1:0] MINV = -IW'(1 << (W - 1));
    if (x > MAXV) return W'(MAXV);
    if (x < MINV) return W'(MINV);
    return W'(x);
  endfunction

  // Index fields of m, taken by shifts so that empty fields cost nothing.
  logic [1:0]              quad;
  int unsigned             jc;
  logic [FBW-1:0]          jf;
  always_comb begin
    quad = m[LOG2N-1 -: 2];
    jc   = int'((32'(m) >> LL) & (QN - 1));
    jf   = FBW'(32'(m) & (FL - 1));
  end

  // Stage 0: W_4 part, coarse table read, fine index pipelined.
  logic                  v0, v1;
  logic signed [IW-1:0]  x0_re, x0_im, x1_re, x1_im;
  coef_t                 cc0, cs0, fc1, fs1;
  logic [FBW-1:0]        jf0;

  always_ff @(posedge clk) begin
    unique case (quad)
      2'd0: begin x0_re <=  IW'(in_re); x0_im <=  IW'(in_im); end
      2'd1: begin x0_re <=  IW'(in_im); x0_im <= -IW'(in_re); end
      2'd2: begin x0_re <= -IW'(in_re); x0_im <= -IW'(in_im); end
      2'd3: begin x0_re <= -IW'(in_im); x0_im <=  IW'(in_re); end
    endcase
    cc0 <= COARSE_COS[jc];
    cs0 <= (jc == 0) ? coef_t'(0) : COARSE_COS[QN - jc];
    jf0 <= jf;
  end

  // Stage 1: coarse multiply, fine table read.
  always_ff @(posedge clk) begin
    {x1_re, x1_im} <= cmul(x0_re, x0_im, cc0, cs0);
    fc1            <= FINE_COS[jf0];
    fs1            <= FINE_SIN[jf0];
  end

  // Stage 2: fine multiply and saturation.
  logic signed [2*IW-1:0] y2;
  always_comb y2 = cmul(x1_re, x1_im, fc1, fs1);

  always_ff @(posedge clk) begin
    out_re <= sat(y2[2*IW-1:IW]);
    out_im <= sat(y2[IW-1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; v1 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v0 <= in_valid; v1 <= v0; out_valid <= v1;
    end
  end

endmodule
