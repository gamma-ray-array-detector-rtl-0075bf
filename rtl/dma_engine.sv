// dma_engine: master control and DMA engine of the transmission FPGA.
//
// Outbound, it moves trigger data words from the local 32-bit FIFO to the
// host: each word is offered on the PCI core's master port (m_valid/m_ready)
// together with the host address at which to write it. Addresses run through
// a ring buffer of dma_words 32-bit words starting at dma_base and wrap at its
// end; words_sent counts every word delivered so software can follow the ring.
// Inbound, it receives the configuration (PS) file as 32-bit words
// (ps_valid/ps_ready, ps_last on the final word) and hands it to the flash
// controller one byte at a time, least significant byte first, marking the
// last byte. Both paths are valid/ready streams; a transfer happens in a cycle
// where both are high. The two roles come from the paper's figure; the ring
// buffer, the streams and the byte order are this design's choices.
module dma_engine (
  input  logic        clk,
  input  logic        rst_n,
  // trigger data from the local FIFO (show-ahead)
  input  logic        lf_empty,
  input  logic [31:0] lf_dout,
  output logic        lf_rd,
  // master port towards the PCI core
  input  logic [31:0] dma_base,
  input  logic [15:0] dma_words,
  output logic        m_valid,
  output logic [31:0] m_addr,
  output logic [31:0] m_data,
  input  logic        m_ready,
  output logic [31:0] words_sent,
  // PS file from the PCI core
  input  logic        ps_valid,
  input  logic [31:0] ps_data,
  input  logic        ps_last,
  output logic        ps_ready,
  // byte stream to the flash controller
  output logic        pb_valid,
  output logic [7:0]  pb_data,
  output logic        pb_last,
  input  logic        pb_ready
);

  // ---- outbound: FIFO -> host ring buffer ----
  logic [15:0] widx;

  assign m_valid = !lf_empty;
  assign m_data  = lf_dout;
  assign m_addr  = dma_base + {14'd0, widx, 2'b00};
  assign lf_rd   = m_valid && m_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx       <= '0;
      words_sent <= '0;
    end else if (lf_rd) begin
      widx       <= (widx + 16'd1 >= dma_words) ? '0 : widx + 16'd1;
      words_sent <= words_sent + 1'b1;
    end
  end

  // ---- inbound: PS file words -> bytes ----
  logic [31:0] word;
  logic [1:0]  bidx;
  logic        have, word_last;

  assign ps_ready = !have;
  assign pb_valid = have;
  assign pb_data  = word[8*bidx +: 8];
  assign pb_last  = word_last && (bidx == 2'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have      <= 1'b0;
      word      <= '0;
      bidx      <= '0;
      word_last <= 1'b0;
    end else if (!have) begin
      if (ps_valid) begin
        have      <= 1'b1;
        word      <= ps_data;
        word_last <= ps_last;
        bidx      <= '0;
      end
    end else if (pb_ready) begin
      bidx <= bidx + 1'b1;
      if (bidx == 2'd3) have <= 1'b0;
    end
  end

endmodule
