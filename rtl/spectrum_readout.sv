// spectrum_readout: sends a finished sum spectrum to the DMA as an AXI4-Stream
// in natural frequency order, on the DMA clock.
//
// The data buffer holds the spectrum in the order the FFT produced it: word
// address p carries bins k_lo = bitrev(p) (log2(N/16) bits), and lane r of
// the word carries bin k_lo + bitrev4(r) * N/16. For bin k = 0 .. N-1 the
// readout therefore reads address bitrev(k mod N/16) and lane
// bitrev4(k / (N/16)): the bit-reverse to natural reordering the paper does
// after accumulation. One bin leaves per DMA clock while tready is high; the
// last bin of a spectrum carries tlast.
//
// Handshake between the domains: dump_done (FFT clock) flips a request
// toggle, which is synchronised into the DMA domain and starts a transfer; at
// its end an acknowledge toggle goes back. busy is high from dump_done until
// the acknowledge arrives. A dump_start while busy means the accumulator has
// begun overwriting a spectrum that is still being read: overrun_count counts
// such events (saturating). The toggle handshake, the AXI4-Stream interface
// and the overrun counter are this design's choices; the paper names a
// vendor DMA core at 100 MHz as the consumer.
module spectrum_readout
  import spec_pkg::*;
#(
  parameter int unsigned LOG2N = 18,
  parameter int unsigned ACC_W = 32
) (
  // FFT clock domain
  input  logic                       fft_clk,
  input  logic                       fft_rst_n,
  input  logic                       dump_start,
  input  logic                       dump_done,
  output logic                       busy,
  output logic [15:0]                overrun_count,
  // DMA clock domain
  input  logic                       dma_clk,
  input  logic                       dma_rst_n,
  output logic                       buf_rd_en,
  output logic [LOG2N-5:0]           buf_rd_addr,
  input  logic [LANES*ACC_W-1:0]     buf_rd_data,
  output logic [ACC_W-1:0]           m_axis_tdata,
  output logic                       m_axis_tvalid,
  input  logic                       m_axis_tready,
  output logic                       m_axis_tlast
);
  localparam int unsigned LOG2N16 = LOG2N - 4;
  localparam int unsigned N       = 1 << LOG2N;

  // ---------------- FFT clock domain ----------------
  logic       req_tog;
  logic [1:0] ack_sync;
  logic       ack_tog;   // DMA domain, declared here for the synchroniser

  always_ff @(posedge fft_clk or negedge fft_rst_n) begin
    if (!fft_rst_n) begin
      req_tog       <= 1'b0;
      ack_sync      <= '0;
      overrun_count <= '0;
    end else begin
      ack_sync <= {ack_sync[0], ack_tog};
      if (dump_done) req_tog <= ~req_tog;
      if (dump_start && busy && overrun_count != '1)
        overrun_count <= overrun_count + 1'b1;
    end
  end
  assign busy = req_tog ^ ack_sync[1];

  // ---------------- DMA clock domain ----------------
  logic [1:0]     req_sync;
  logic           running;
  logic [LOG2N:0] k;
  logic [3:0]     lane_q;
  logic           issue;

  assign issue = running && (k < (LOG2N + 1)'(N)) && (!m_axis_tvalid || m_axis_tready);

  always_ff @(posedge dma_clk or negedge dma_rst_n) begin
    if (!dma_rst_n) begin
      req_sync      <= '0;
      ack_tog       <= 1'b0;
      running       <= 1'b0;
      k             <= '0;
      m_axis_tvalid <= 1'b0;
      m_axis_tlast  <= 1'b0;
      lane_q        <= '0;
    end else begin
      req_sync <= {req_sync[0], req_tog};
      if (!running && (req_sync[1] != ack_tog)) begin
        running <= 1'b1;
        k       <= '0;
      end
      if (issue) begin
        k             <= k + 1'b1;
        m_axis_tvalid <= 1'b1;
        m_axis_tlast  <= (k == (LOG2N + 1)'(N - 1));
        lane_q        <= 4'(bitrev(32'(k[LOG2N-1:LOG2N16]), 4));
      end else if (m_axis_tready) begin
        m_axis_tvalid <= 1'b0;
      end
      if (m_axis_tvalid && m_axis_tready && m_axis_tlast) begin
        running <= 1'b0;
        ack_tog <= ~ack_tog;
        m_axis_tlast <= 1'b0;
      end
    end
  end

  assign buf_rd_en    = issue;
  assign buf_rd_addr  = LOG2N16'(bitrev(32'(k[LOG2N16-1:0]), LOG2N16));
  assign m_axis_tdata = buf_rd_data[lane_q*ACC_W +: ACC_W];

  // AXI4-Stream rule: data and last hold still while valid waits for ready.
  logic [ACC_W-1:0] hold_data;
  logic             hold_last, hold;
  always_ff @(posedge dma_clk or negedge dma_rst_n) begin
    if (!dma_rst_n) hold <= 1'b0;
    else            hold <= m_axis_tvalid && !m_axis_tready;
  end
  always_ff @(posedge dma_clk) begin
    hold_data <= m_axis_tdata;
    hold_last <= m_axis_tlast;
  end
  always_ff @(posedge dma_clk or negedge dma_rst_n) begin
    if (!dma_rst_n) begin
    end else if (hold)
      assert (m_axis_tvalid && m_axis_tdata == hold_data && m_axis_tlast == hold_last)
        else $error("spectrum_readout: AXI4-Stream output changed while stalled");
  end

endmodule
