// input_distributer: widens the converter output from 8 to 16 samples per
// beat and moves it to the FFT clock.
//
// The RF data converter delivers, per 512 MHz clock, 8 consecutive samples of
// each of the two ADCs (I and Q), i.e. 8 complex samples x(8c) .. x(8c+7).
// Beats alternate between lane groups: even beats go to lane FIFOs 0..7 and
// odd beats to lane FIFOs 8..15, so lane j always receives x(16t + j). On the
// FFT clock all 16 lanes are popped together as soon as none of them is
// empty, giving one 16-sample vector per valid beat. The FFT clock must be
// at least half the converter clock for the FIFOs not to fill (the paper
// runs the FFT at 256 MHz nominal and quotes 4.8 GSPS FFT throughput). A
// sample that meets a full FIFO is dropped and sets the sticky overflow flag,
// which then marks the lane alignment as lost until reset.
//
// Output: out_valid with out_re/out_im (lane j = I/Q of x(16t + j)),
// registered, one clock after the pop.
module input_distributer
  import spec_pkg::*;
#(
  parameter int unsigned FIFO_AW = 4  // log2 of each lane FIFO depth
) (
  input  logic                        adc_clk,
  input  logic                        adc_rst_n,
  input  logic                        adc_valid,
  input  logic signed [ADC_W-1:0]     adc_i [ADC_PAR],
  input  logic signed [ADC_W-1:0]     adc_q [ADC_PAR],
  output logic                        overflow,
  input  logic                        fft_clk,
  input  logic                        fft_rst_n,
  output logic                        out_valid,
  output logic signed [ADC_W-1:0]     out_re [LANES],
  output logic signed [ADC_W-1:0]     out_im [LANES]
);
  logic              phase;             // 0: lanes 0..7, 1: lanes 8..15
  logic [LANES-1:0]  wr_en, full, empty;
  logic [2*ADC_W-1:0] rd_data [LANES];
  logic              pop;

  always_ff @(posedge adc_clk or negedge adc_rst_n) begin
    if (!adc_rst_n) begin
      phase    <= 1'b0;
      overflow <= 1'b0;
    end else if (adc_valid) begin
      phase <= ~phase;
      if (|(wr_en & full)) overflow <= 1'b1;
    end
  end

  assign pop = ~|empty;

  for (genvar j = 0; j < LANES; j++) begin : g_lane
    assign wr_en[j] = adc_valid && (phase == (j >= ADC_PAR));
    async_fifo #(.DW(2 * ADC_W), .AW(FIFO_AW)) u_fifo (
      .wr_clk  (adc_clk),
      .wr_rst_n(adc_rst_n),
      .wr_en   (wr_en[j]),
      .wr_data ({adc_i[j % ADC_PAR], adc_q[j % ADC_PAR]}),
      .full    (full[j]),
      .rd_clk  (fft_clk),
      .rd_rst_n(fft_rst_n),
      .rd_en   (pop),
      .rd_data (rd_data[j]),
      .empty   (empty[j])
    );
  end

  always_ff @(posedge fft_clk or negedge fft_rst_n) begin
    if (!fft_rst_n) out_valid <= 1'b0;
    else            out_valid <= pop;
  end

  always_ff @(posedge fft_clk) begin
    for (int j = 0; j < LANES; j++) begin
      out_re[j] <= rd_data[j][2*ADC_W-1:ADC_W];
      out_im[j] <= rd_data[j][ADC_W-1:0];
    end
  end

endmodule
