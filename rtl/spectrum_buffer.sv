// spectrum_buffer: the data buffer that holds one finished sum spectrum.
//
// A simple dual-port RAM of N/16 words, each word the 16 lane sums of one
// frequency position. It is written on the FFT clock by the accumulator and
// read on the DMA clock by the readout, so it is also the clock-domain
// crossing for the data; the readout only reads a round after the
// accumulator has announced it complete. The paper builds it from UltraRAM;
// here it is an inferred two-clock RAM. The read port is registered and only
// updates when rd_en is high, so rd_data holds still while the consumer
// stalls. Read latency: 1 clock.
module spectrum_buffer #(
  parameter int unsigned AW = 14,        // log2 of the depth, log2(N/16)
  parameter int unsigned DW = 16 * 32    // word width, 16 lanes of sums
) (
  input  logic          wr_clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data,
  input  logic          rd_clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data
);
  logic [DW-1:0] mem [1 << AW];

  always_ff @(posedge wr_clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge rd_clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
