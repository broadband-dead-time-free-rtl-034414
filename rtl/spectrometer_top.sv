// spectrometer_top: dead-time-free FFT spectrometer, programmable-logic part.
//
// Two 12-bit ADCs sample the I and Q outputs of an IQ mixer at 4.096 GSPS;
// the RF data converter hands over 8 samples of each per 512 MHz clock. This
// module turns that stream, without dropping any sample, into power spectra
// of N = 2^LOG2N complex points (4.096 GHz wide, 4.096 GHz / N resolution),
// sums M of them and streams each sum to the DMA in natural bin order.
//
//   fft_block          distributer + 16 lane SDF FFTs + 15 split-LUT
//                      rotators + 16-point radix-2^4 FFT + |X|^2
//   accumulator        sums M spectra, 16 bins per beat
//   spectrum_buffer    data buffer, FFT clock in, DMA clock out
//   spectrum_readout   bit-reversed to natural order, AXI4-Stream to DMA
//
// Defaults are the high-resolution build: N = 2^18 (15.625 kHz bins), FP32
// powers and sums, M = 1024 (one sum per 65.536 ms). The other published
// build is LOG2N = 17 with FMT = FMT_FIXED (54-bit powers, 64-bit sums,
// 32.768 ms). Clocks: adc_clk is the 512 MHz converter clock, fft_clk the FFT
// clock (at least adc_clk / 2), dma_clk the 100 MHz DMA clock; each has its
// own active-low reset. The ADCs, the RF data converter, the DMA core and the
// processor are outside this module: their signals are its ports.
module spectrometer_top
  import spec_pkg::*;
#(
  parameter int unsigned LOG2N   = 18,        // FFT size N = 2^LOG2N
  parameter out_fmt_e    FMT     = FMT_FP32,  // power/sum number format
  parameter int unsigned M       = 1024,      // spectra per sum
  parameter int unsigned FIFO_AW = 4,         // log2 depth of the lane FIFOs
  parameter int unsigned PWR_W   = pwr_width(FMT),
  parameter int unsigned ACC_W   = acc_width(FMT)
) (
  // RF data converter side
  input  logic                     adc_clk,
  input  logic                     adc_rst_n,
  input  logic                     adc_valid,
  input  logic signed [ADC_W-1:0]  adc_i [ADC_PAR],
  input  logic signed [ADC_W-1:0]  adc_q [ADC_PAR],
  // FFT and accumulator clock
  input  logic                     fft_clk,
  input  logic                     fft_rst_n,
  // DMA side (AXI4-Stream master)
  input  logic                     dma_clk,
  input  logic                     dma_rst_n,
  output logic [ACC_W-1:0]         m_axis_tdata,
  output logic                     m_axis_tvalid,
  input  logic                     m_axis_tready,
  output logic                     m_axis_tlast,
  // Status (FFT clock domain except fifo_overflow, which is on adc_clk)
  output logic                     fifo_overflow,
  output logic                     readout_busy,
  output logic [15:0]              overrun_count,
  output logic [$clog2(M+1)-1:0]   frame
);
  localparam int unsigned LOG2N16 = LOG2N - LOG2LANES;

  logic               p_valid;
  logic [PWR_W-1:0]   p_pwr [LANES];

  fft_block #(.LOG2N(LOG2N), .FMT(FMT), .FIFO_AW(FIFO_AW), .PWR_W(PWR_W)) u_fft (
    .adc_clk      (adc_clk),
    .adc_rst_n    (adc_rst_n),
    .adc_valid    (adc_valid),
    .adc_i        (adc_i),
    .adc_q        (adc_q),
    .fifo_overflow(fifo_overflow),
    .fft_clk      (fft_clk),
    .fft_rst_n    (fft_rst_n),
    .out_valid    (p_valid),
    .out_pwr      (p_pwr)
  );

  logic                     buf_we, dump_start, dump_done;
  logic [LOG2N16-1:0]       buf_waddr, buf_raddr;
  logic [LANES*ACC_W-1:0]   buf_wdata, buf_rdata;
  logic                     buf_re;

  accumulator #(.LOG2N16(LOG2N16), .FMT(FMT), .M(M), .IN_W(PWR_W), .ACC_W(ACC_W)) u_acc (
    .clk       (fft_clk),
    .rst_n     (fft_rst_n),
    .in_valid  (p_valid),
    .in_pwr    (p_pwr),
    .buf_we    (buf_we),
    .buf_addr  (buf_waddr),
    .buf_wdata (buf_wdata),
    .dump_start(dump_start),
    .dump_done (dump_done),
    .frame     (frame)
  );

  spectrum_buffer #(.AW(LOG2N16), .DW(LANES * ACC_W)) u_buf (
    .wr_clk (fft_clk),
    .wr_en  (buf_we),
    .wr_addr(buf_waddr),
    .wr_data(buf_wdata),
    .rd_clk (dma_clk),
    .rd_en  (buf_re),
    .rd_addr(buf_raddr),
    .rd_data(buf_rdata)
  );

  spectrum_readout #(.LOG2N(LOG2N), .ACC_W(ACC_W)) u_rd (
    .fft_clk      (fft_clk),
    .fft_rst_n    (fft_rst_n),
    .dump_start   (dump_start),
    .dump_done    (dump_done),
    .busy         (readout_busy),
    .overrun_count(overrun_count),
    .dma_clk      (dma_clk),
    .dma_rst_n    (dma_rst_n),
    .buf_rd_en    (buf_re),
    .buf_rd_addr  (buf_raddr),
    .buf_rd_data  (buf_rdata),
    .m_axis_tdata (m_axis_tdata),
    .m_axis_tvalid(m_axis_tvalid),
    .m_axis_tready(m_axis_tready),
    .m_axis_tlast (m_axis_tlast)
  );

endmodule
