// tb_split_lut_rotator: self-checking test of the split-LUT general rotator.
// Three instances (N = 2^17 and 2^18 as in the two builds, and N = 2^5) get
// the same random stream of samples and rotation indices. Each output is
// compared with x * exp(-2 pi i m / N) computed in real arithmetic, with an
// error budget of the two Q1.16 coefficient roundings; the 3-clock latency is
// checked through the valid flag. Index fields at the quadrant and table
// edges are forced in part of the vectors.
`timescale 1ns/1ps
module tb_split_lut_rotator;
  localparam int NV = 3000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0;
  logic signed [29:0] xr = 0, xi = 0;
  logic [17:0] mm = 0;
  logic signed [11:0] x5r, x5i;   // half scale for the 12-bit instance
  assign x5r = $signed(xr[11:0]) >>> 1;
  assign x5i = $signed(xi[11:0]) >>> 1;

  logic v17, v18, v5;
  logic signed [28:0] o17r, o17i;
  logic signed [29:0] o18r, o18i;
  logic signed [11:0] o5r, o5i;

  split_lut_rotator #(.LOG2N(17), .W(29)) u17 (.clk, .rst_n, .in_valid,
    .in_re(xr[28:0]), .in_im(xi[28:0]), .m(mm[16:0]), .out_valid(v17), .out_re(o17r), .out_im(o17i));
  split_lut_rotator #(.LOG2N(18), .W(30)) u18 (.clk, .rst_n, .in_valid,
    .in_re(xr), .in_im(xi), .m(mm), .out_valid(v18), .out_re(o18r), .out_im(o18i));
  split_lut_rotator #(.LOG2N(5), .W(12)) u5 (.clk, .rst_n, .in_valid,
    .in_re(x5r), .in_im(x5i), .m(mm[4:0]), .out_valid(v5), .out_re(o5r), .out_im(o5i));

  typedef struct { int re17, im17, re18, im18, re5, im5; int m; } vec_t;
  vec_t q[$];

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  task automatic chk(string tag, real xre, real xim, int m, int n, real gre, real gim);
    real ang = -2.0 * 3.14159265358979 * real'(m) / real'(1 << n);
    real rr = xre * $cos(ang) - xim * $sin(ang);
    real ri = xre * $sin(ang) + xim * $cos(ang);
    real tol = 1.5 + 4.0e-5 * (fabs(xre) + fabs(xim));
    checks++;
    if (fabs(gre - rr) > tol || fabs(gim - ri) > tol) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s m=%0d: got (%0.0f,%0.0f) want (%0.1f,%0.1f)",
                                  tag, m, gre, gim, rr, ri);
    end
  endtask

  // Valid must appear exactly 3 clocks after the input.
  logic [2:0] vsh;
  always @(posedge clk) begin
    if (!rst_n) vsh <= '0;
    else begin
      vsh <= {vsh[1:0], in_valid};
      checks++;
      if ((v17 != vsh[2]) || (v18 != vsh[2]) || (v5 != vsh[2])) begin
        failures++; $display("valid timing wrong");
      end
    end
  end

  int seen = 0;
  always @(posedge clk) if (rst_n && v17) begin
    automatic vec_t e = q.pop_front();
    chk("N=2^17", real'(e.re17), real'(e.im17), e.m & 17'h1ffff, 17, real'(o17r), real'(o17i));
    chk("N=2^18", real'(e.re18), real'(e.im18), e.m,             18, real'(o18r), real'(o18i));
    chk("N=2^5",  real'(e.re5),  real'(e.im5),  e.m & 31,         5, real'(o5r),  real'(o5i));
    seen++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NV; i++) begin
      vec_t e;
      @(negedge clk);
      in_valid = ($urandom % 5 != 0);
      // keep magnitudes below full scale so that the reference never saturates
      xr = 30'($signed(30'($urandom)) >>> 2);
      xi = 30'($signed(30'($urandom)) >>> 2);
      mm = 18'($urandom);
      if (i % 7 == 0) mm[17:0] = {2'(i / 7), 16'h0000};          // pure quadrant
      if (i % 7 == 1) mm[17:0] = {2'(i), 9'h1ff, 7'h7f};           // table ends
      if (in_valid) begin
        e.re18 = xr; e.im18 = xi; e.re17 = $signed(xr[28:0]); e.im17 = $signed(xi[28:0]);
        e.re5 = $signed(xr[11:0]) >>> 1; e.im5 = $signed(xi[11:0]) >>> 1; e.m = mm;
        q.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0 || seen == 0) begin failures++; $display("outputs missing: %0d", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
