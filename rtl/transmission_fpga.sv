// transmission_fpga: the PXI transmission and reconfiguration FPGA.
//
// Runs on the 33 MHz PCI clock, which it also forwards to the trigger FPGA as
// CLK_33M. Parameter path: PCI target writes -> target_ctrl -> parameter
// buffer -> xfer_ctrl -> link (write mode). Data path: link (read mode) ->
// xfer_ctrl -> local 32-bit FIFO (sync_fifo) -> dma_engine -> PCI master port.
// Reconfiguration path: PS-file words from the PCI core -> dma_engine (bytes)
// -> flash_ctrl -> M25P80; on the reconfiguration order ps_config reads the
// file back through flash_ctrl and drives the trigger FPGA's PS pins. The PCI
// core itself (a vendor IP core) is outside: its local-side signals are ports.
// The block structure follows the paper's figure of this FPGA; the local
// interfaces between blocks are this design's choices.
module transmission_fpga #(
  parameter int unsigned LF_DEPTH = 16
) (
  input  logic        clk,          // 33 MHz PCI clock
  input  logic        rst_n,
  // link to the trigger FPGA
  output logic        clk33_out,
  output logic        wr_rd,
  output logic        enable,
  output logic [31:0] link_dout,
  output logic        link_oe,
  input  logic [31:0] link_din,
  input  logic        link_empty,
  // PCI core local side: target writes
  input  logic        t_wr,
  input  logic [7:0]  t_addr,
  input  logic [31:0] t_data,
  output logic        t_ready,
  // PCI core local side: master (DMA) writes
  output logic        m_valid,
  output logic [31:0] m_addr,
  output logic [31:0] m_data,
  input  logic        m_ready,
  output logic [31:0] words_sent,
  // PCI core local side: configuration file
  input  logic        ps_valid,
  input  logic [31:0] ps_data,
  input  logic        ps_last,
  output logic        ps_ready,
  // serial flash
  output logic        f_cs_n,
  output logic        f_sck,
  output logic        f_mosi,
  input  logic        f_miso,
  // PS configuration pins of the trigger FPGA
  output logic        nconfig,
  input  logic        nstatus,
  input  logic        conf_done,
  output logic        dclk,
  output logic        data0,
  output logic        flash_busy,
  output logic        cfg_busy,
  output logic        cfg_done,
  output logic        cfg_error
);


  logic        pbuf_rd, pbuf_empty, erase_req, reconfig_req;
  logic [31:0] pbuf_dout, dma_base, lf_din, lf_dout;
  logic [23:0] ps_len;
  logic [15:0] dma_words;
  logic        lf_wr, lf_full, lf_rd, lf_empty;
  logic        pb_valid, pb_last, pb_ready, rb_valid, rb_ready, rd_start, rd_stop;
  logic [7:0]  pb_data, rb_data;

  assign clk33_out = clk;

  target_ctrl u_target (
    .clk, .rst_n, .t_wr, .t_addr, .t_data, .t_ready,
    .pbuf_rd, .pbuf_dout, .pbuf_empty,
    .erase_req, .reconfig_req, .ps_len, .dma_base, .dma_words
  );

  xfer_ctrl u_xfer (
    .clk, .rst_n, .wr_rd, .enable, .link_dout, .link_oe, .link_din, .link_empty,
    .pbuf_empty, .pbuf_dout, .pbuf_rd, .lf_full, .lf_wr, .lf_din
  );

  sync_fifo #(.WIDTH(32), .DEPTH(LF_DEPTH)) u_lfifo (
    .clk, .rst_n, .wr_en(lf_wr), .din(lf_din), .full(lf_full),
    .rd_en(lf_rd), .dout(lf_dout), .empty(lf_empty), .count()
  );

  dma_engine u_dma (
    .clk, .rst_n, .lf_empty, .lf_dout, .lf_rd,
    .dma_base, .dma_words, .m_valid, .m_addr, .m_data, .m_ready, .words_sent,
    .ps_valid, .ps_data, .ps_last, .ps_ready,
    .pb_valid, .pb_data, .pb_last, .pb_ready
  );

  flash_ctrl u_flash (
    .clk, .rst_n, .erase_req, .rd_start, .rd_stop, .busy(flash_busy),
    .pb_valid, .pb_data, .pb_last, .pb_ready,
    .rb_valid, .rb_data, .rb_ready,
    .cs_n(f_cs_n), .sck(f_sck), .mosi(f_mosi), .miso(f_miso)
  );

  ps_config u_ps (
    .clk, .rst_n, .start(reconfig_req), .ps_len,
    .busy(cfg_busy), .done(cfg_done), .error(cfg_error),
    .rd_start, .rd_stop, .rb_valid, .rb_data, .rb_ready,
    .nconfig, .nstatus, .conf_done, .dclk, .data0
  );

endmodule
