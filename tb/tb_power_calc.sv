// tb_power_calc: self-checking test of the power stage in both formats.
// A 29-bit FMT_FIXED instance must give (re^2 + im^2) >> 4 exactly (54 bits);
// a 30-bit FMT_FP32 instance must give the FP32 value nearest to the exact
// power, ties to even, which is checked against the exact 64-bit integer.
// Edge values (zero, full scale, small exact values) are included, and the
// 3-clock latency is checked through the valid flag.
`timescale 1ns/1ps
module tb_power_calc;
  import spec_pkg::*;
  localparam int NV = 4000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0;
  logic signed [29:0] xr = 0, xi = 0;
  logic vf, vp;
  logic [53:0] pf;
  logic [31:0] pp;

  power_calc #(.W(29), .FMT(FMT_FIXED)) u_fix (.clk, .rst_n, .in_valid,
    .in_re(xr[28:0]), .in_im(xi[28:0]), .out_valid(vf), .out_pwr(pf));
  power_calc #(.W(30), .FMT(FMT_FP32)) u_fp (.clk, .rst_n, .in_valid,
    .in_re(xr), .in_im(xi), .out_valid(vp), .out_pwr(pp));

  typedef struct { longint r17, i17, r18, i18; } vec_t;
  vec_t q[$];

  logic [2:0] vsh;
  always @(posedge clk) begin
    if (!rst_n) vsh <= '0;
    else begin
      vsh <= {vsh[1:0], in_valid};
      checks++;
      if (vf != vsh[2] || vp != vsh[2]) begin failures++; $display("valid timing wrong"); end
    end
  end

  int seen = 0;
  always @(posedge clk) if (rst_n && vf) begin
    automatic vec_t e = q.pop_front();
    automatic longint   exact17 = e.r17 * e.r17 + e.i17 * e.i17;
    automatic longint   exact18 = e.r18 * e.r18 + e.i18 * e.i18;
    automatic int       ex = int'(pp[30:23]) - 127;
    automatic longint   fval, diff, half;
    checks++;
    if (pf != 54'(exact17 >> 4)) begin
      failures++;
      if (failures < 10) $display("FIXED got %0d want %0d", pf, exact17 >> 4);
    end
    // decode the FP32 result to an integer (exact for the values used here)
    checks++;
    if (exact18 == 0) begin
      if (pp != 0) begin failures++; $display("FP32 of zero is %h", pp); end
    end else begin
      fval = (ex >= 23) ? (longint'({1'b1, pp[22:0]}) << (ex - 23))
                        : (longint'({1'b1, pp[22:0]}) >> (23 - ex));
      diff = exact18 - fval;
      if (diff < 0) diff = -diff;
      half = (ex >= 24) ? (longint'(1) << (ex - 24)) : 0;
      if (pp[31] || diff > half || (ex >= 24 && diff == half && pp[0])) begin
        failures++;
        if (failures < 10) $display("FP32 got %h (%0d) want %0d", pp, fval, exact18);
      end
    end
    seen++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NV; i++) begin
      vec_t e;
      @(negedge clk);
      in_valid = ($urandom % 4 != 0);
      xr = 30'($urandom); xi = 30'($urandom);
      case (i % 10)
        0: begin xr = 0; xi = 0; end
        1: begin xr = -30'sd536870912; xi = -30'sd536870912; end   // 30-bit full scale
        2: begin xr = 30'($urandom % 5000); xi = 0; end            // small, exact in FP32
        3: begin xr = 30'($signed(30'($urandom)) >>> ($urandom % 28)); xi = 1; end
        default: ;
      endcase
      if (in_valid) begin
        e.r18 = longint'(xr); e.i18 = longint'(xi);
        e.r17 = longint'($signed(xr[28:0])); e.i17 = longint'($signed(xi[28:0]));
        q.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0 || seen == 0) begin failures++; $display("outputs missing"); end
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
