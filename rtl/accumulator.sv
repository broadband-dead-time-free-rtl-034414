// accumulator: sums M consecutive power spectra bin by bin, 16 bins per beat.
//
// Every valid beat carries the 16 lane powers of one frequency position p
// (p = 0 .. N/16-1, the order the FFT delivers them in). The running sums
// S_m(k) = S_{m-1}(k) + p_m(k) live in a partial-sum RAM of N/16 words of
// 16 sums. For the first spectrum of a round the stored value is ignored; for
// the last (m = M-1) the finished S_M(k) goes to the output data buffer
// instead of back into the RAM. Then a new round starts at once, so no
// spectrum is ever skipped. This follows the paper's accumulator (two RAMs, a
// feedback adder, the result moved to a data buffer after M spectra).
//
// FMT_FIXED: 54-bit powers summed into 64-bit words (M = 1024 cannot
// overflow). FMT_FP32: FP32 sums of FP32 powers, round to nearest even, done
// with a single-cycle adder here rather than a pipelined HLS one.
//
// Timing: the RAM is read in the beat's clock and written one clock later;
// one beat per clock, no stall. buf_we/buf_addr/buf_wdata write the data
// buffer two clocks after the beat. dump_start pulses with the first buffer
// write of a round and dump_done one clock after the last one. frame counts
// the spectra of the current round. N/16 must be at least 2.
module accumulator
  import spec_pkg::*;
#(
  parameter int unsigned LOG2N16 = 14,             // log2(N/16)
  parameter out_fmt_e    FMT     = FMT_FP32,
  parameter int unsigned M       = 1024,           // spectra per sum
  parameter int unsigned IN_W    = pwr_width(FMT),
  parameter int unsigned ACC_W   = acc_width(FMT)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [IN_W-1:0]            in_pwr [LANES],
  output logic                       buf_we,
  output logic [LOG2N16-1:0]         buf_addr,
  output logic [LANES*ACC_W-1:0]     buf_wdata,
  output logic                       dump_start,
  output logic                       dump_done,
  output logic [$clog2(M+1)-1:0]     frame
);
  localparam int unsigned N16 = 1 << LOG2N16;
  localparam int unsigned MW  = $clog2(M + 1);

  initial assert (LOG2N16 >= 1 && M >= 1) else $error("accumulator: N/16 >= 2 and M >= 1 needed");

  logic [LANES*ACC_W-1:0] sum_mem [N16];

  logic [LOG2N16-1:0]     p;
  logic [MW-1:0]          m;

  // Beat registered together with the RAM read.
  logic                   v_q, first_q, last_q;
  logic [LOG2N16-1:0]     p_q;
  logic [IN_W-1:0]        in_q [LANES];
  logic [LANES*ACC_W-1:0] rd_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p   <= '0;
      m   <= '0;
      v_q <= 1'b0;
    end else begin
      v_q <= in_valid;
      if (in_valid) begin
        p <= p + 1'b1;
        if (p == LOG2N16'(N16 - 1))
          m <= (m == MW'(M - 1)) ? '0 : m + 1'b1;
      end
    end
  end
  assign frame = m;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      rd_q    <= sum_mem[p];
      in_q    <= in_pwr;
      p_q     <= p;
      first_q <= (m == '0);
      last_q  <= (m == MW'(M - 1));
    end
  end

  // Feedback adder.
  logic [LANES*ACC_W-1:0] sum;
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [ACC_W-1:0] old, nw;
      old = first_q ? '0 : rd_q[l*ACC_W +: ACC_W];
      if (FMT == FMT_FP32) nw = ACC_W'(fp32_add_pos(32'(old), 32'(in_q[l])));
      else                 nw = old + ACC_W'(in_q[l]);
      sum[l*ACC_W +: ACC_W] = nw;
    end
  end

  always_ff @(posedge clk) begin
    if (v_q && !last_q) sum_mem[p_q] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_we     <= 1'b0;
      dump_start <= 1'b0;
      dump_done  <= 1'b0;
    end else begin
      buf_we     <= v_q && last_q;
      dump_start <= v_q && last_q && (p_q == '0);
      dump_done  <= buf_we && (buf_addr == LOG2N16'(N16 - 1));
    end
  end

  always_ff @(posedge clk) begin
    if (v_q && last_q) begin
      buf_addr  <= p_q;
      buf_wdata <= sum;
    end
  end

endmodule
