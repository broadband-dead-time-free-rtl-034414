// async_fifo: dual-clock FIFO with Gray-coded pointers.
//
// Carries one lane of samples from the converter clock (512 MHz in the paper)
// to the FFT clock. The write and read pointers are kept in binary and Gray
// code; each Gray pointer crosses into the other domain through a two-flop
// synchroniser, so full and empty are conservative (they may stay asserted a
// few clocks longer than needed, never too short). The read side is
// first-word-fall-through: rd_data shows the head word while empty is low,
// and rd_en pops it. A write while full is dropped. The depth and the Gray
// code scheme are this design's choices; the paper only says that
// asynchronous FIFOs double the lane count and halve the clock.
module async_fifo #(
  parameter int unsigned DW = 24,  // word width: 12-bit I and Q
  parameter int unsigned AW = 4    // log2 of the depth
) (
  input  logic          wr_clk,
  input  logic          wr_rst_n,
  input  logic          wr_en,
  input  logic [DW-1:0] wr_data,
  output logic          full,
  input  logic          rd_clk,
  input  logic          rd_rst_n,
  input  logic          rd_en,
  output logic [DW-1:0] rd_data,
  output logic          empty
);
  logic [DW-1:0] mem [1 << AW];
  logic [AW:0]   wbin, wgray, rbin, rgray;
  logic [AW:0]   rgray_w1, rgray_w2;   // read pointer in the write domain
  logic [AW:0]   wgray_r1, wgray_r2;   // write pointer in the read domain
  logic [AW:0]   wbin_nx, rbin_nx;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // Write side
  assign full    = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign wbin_nx = wbin + (AW + 1)'(wr_en && !full);

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nx;
      wgray    <= bin2gray(wbin_nx);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wr_data;
  end

  // Read side
  assign empty   = (rgray == wgray_r2);
  assign rbin_nx = rbin + (AW + 1)'(rd_en && !empty);
  assign rd_data = mem[rbin[AW-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nx;
      rgray    <= bin2gray(rbin_nx);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

endmodule
