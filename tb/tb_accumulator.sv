// tb_accumulator: self-checking test of the spectrum accumulator.
// A fixed-point instance (54-bit in, 64-bit sums) and an FP32 instance, both
// with N/16 = 8 positions and M = 4, receive three rounds of random powers
// with gaps in the valid stream. The data-buffer writes are captured and, at
// each dump_done, compared with sums computed in the testbench: exact
// integer sums for the fixed format, sequential single-precision sums for
// FP32. The number of dumps, their start pulses and the rule that the buffer
// is only written during the last spectrum of a round are checked as well.
`timescale 1ns/1ps
module tb_accumulator;
  import spec_pkg::*;
  localparam int LOG2N16 = 3, N16 = 8, M = 4, ROUNDS = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid = 0;
  logic [53:0] in_fix [16];
  logic [31:0] in_fp  [16];

  logic               we_f, ds_f, dd_f, we_p, ds_p, dd_p;
  logic [2:0]         a_f, a_p;
  logic [16*64-1:0]   d_f;
  logic [16*32-1:0]   d_p;
  logic [2:0]         fr_f, fr_p;

  accumulator #(.LOG2N16(LOG2N16), .FMT(FMT_FIXED), .M(M)) u_fix (.clk, .rst_n, .in_valid,
    .in_pwr(in_fix), .buf_we(we_f), .buf_addr(a_f), .buf_wdata(d_f), .dump_start(ds_f),
    .dump_done(dd_f), .frame(fr_f));
  accumulator #(.LOG2N16(LOG2N16), .FMT(FMT_FP32), .M(M)) u_fp (.clk, .rst_n, .in_valid,
    .in_pwr(in_fp), .buf_we(we_p), .buf_addr(a_p), .buf_wdata(d_p), .dump_start(ds_p),
    .dump_done(dd_p), .frame(fr_p));

  // FP32 <-> real for positive normal numbers, round to nearest even.
  function automatic real f2r(logic [31:0] f);
    if (f[30:0] == 0) return 0.0;
    return real'({1'b1, f[22:0]}) * $pow(2.0, real'(int'(f[30:23]) - 150));
  endfunction

  function automatic logic [31:0] r2f(real v);
    int e = 0;
    real sc, fr;
    longint mi;
    if (v == 0.0) return '0;
    while (v >= $pow(2.0, real'(e + 1))) e++;
    while (v < $pow(2.0, real'(e))) e--;
    sc = v * $pow(2.0, real'(23 - e));          // exact: scaling by a power of two
    mi = longint'($floor(sc));
    fr = sc - real'(mi);
    if (fr > 0.5 || (fr == 0.5 && mi[0])) mi++;
    if (mi == (longint'(1) << 24)) begin mi = mi >> 1; e++; end
    return {1'b0, 8'(e + 127), mi[22:0]};
  endfunction

  longint      ref_fix [ROUNDS][N16][16];
  logic [31:0] ref_fp  [ROUNDS][N16][16];
  logic [63:0] got_fix [N16][16];
  logic [31:0] got_fp  [N16][16];
  int dumps_f = 0, dumps_p = 0, starts_f = 0, starts_p = 0;

  always @(posedge clk) if (rst_n) begin
    if (we_f) for (int l = 0; l < 16; l++) got_fix[a_f][l] = d_f[l*64 +: 64];
    if (we_p) for (int l = 0; l < 16; l++) got_fp[a_p][l]  = d_p[l*32 +: 32];
    if (ds_f) starts_f++;
    if (ds_p) starts_p++;
    if (dd_f) begin
      for (int a = 0; a < N16; a++) for (int l = 0; l < 16; l++) begin
        checks++;
        if (got_fix[a][l] != 64'(ref_fix[dumps_f][a][l])) begin
          failures++;
          if (failures < 10) $display("FIXED round %0d addr %0d lane %0d: got %0d want %0d",
                                      dumps_f, a, l, got_fix[a][l], ref_fix[dumps_f][a][l]);
        end
      end
      dumps_f++;
    end
    if (dd_p) begin
      for (int a = 0; a < N16; a++) for (int l = 0; l < 16; l++) begin
        checks++;
        if (got_fp[a][l] != ref_fp[dumps_p][a][l]) begin
          failures++;
          if (failures < 10) $display("FP32 round %0d addr %0d lane %0d: got %h want %h",
                                      dumps_p, a, l, got_fp[a][l], ref_fp[dumps_p][a][l]);
        end
      end
      dumps_p++;
    end
    // buffer writes only during the last spectrum of a round
    checks++;
    if (we_f && !(fr_f == 3'(M - 1) || (fr_f == 0 && a_f >= 3'(N16 - 3)))) begin
      failures++; $display("buffer written outside the last spectrum");
    end
  end

  initial begin
    foreach (in_fix[l]) begin in_fix[l] = '0; in_fp[l] = '0; end
    for (int r = 0; r < ROUNDS; r++)
      for (int a = 0; a < N16; a++)
        for (int l = 0; l < 16; l++) begin ref_fix[r][a][l] = 0; ref_fp[r][a][l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROUNDS; r++)
      for (int m = 0; m < M; m++)
        for (int a = 0; a < N16; a++) begin
          @(negedge clk);
          while ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1;
          for (int l = 0; l < 16; l++) begin
            in_fix[l] = (r == 1 && a == 0) ? '1 : 54'({$urandom, $urandom});  // max value too
            // positive FP32 numbers with exponents close enough that a double sum is exact
            in_fp[l]  = {1'b0, 8'(140 + $urandom % 12), 23'($urandom)};
            if (l == 5 && a == 2) in_fp[l] = '0;
            ref_fix[r][a][l] += longint'(in_fix[l]);
            ref_fp[r][a][l] = r2f(f2r(ref_fp[r][a][l]) + f2r(in_fp[l]));
          end
        end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (dumps_f != ROUNDS || dumps_p != ROUNDS || starts_f != ROUNDS || starts_p != ROUNDS) begin
      failures++;
      $display("dumps %0d/%0d starts %0d/%0d, want %0d", dumps_f, dumps_p, starts_f, starts_p, ROUNDS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
