// grad_trigger_module: the GRAD trigger board, top of the design.
//
// Two FPGAs. The kernel trigger FPGA (kernel_fpga) takes the 64 fast hit
// lines of the MATE front-end chips, aligns each event within a software
// window, counts the hits, evaluates the five trigger conditions in a
// three-cycle pipeline and issues the fast L1 decision to the DAQ, the 12-bit
// L1 word to the global trigger (serial, 40 MHz) and the 32 track-and-hold
// lines to the FEE modules. The transmission FPGA (transmission_fpga) connects
// it to the PXI (PCI) bus: it loads parameters into the trigger FPGA, collects
// the hit data of accepted events for the host, stores new trigger firmware in
// the serial flash and reloads the trigger FPGA from it.
//
// The two FPGAs share 32 bidirectional data lines and four control lines
// (CLK_33M, Wr/Rd, Enable, Empty). Here the bidirectional lines are resolved
// as a multiplexer: the side whose output enable is high drives them. Parts
// outside the FPGAs (LVDS buffers, PLL, clock fan-out, PCI core, flash chip,
// the trigger FPGA's configuration pins) connect through ports. All clocks are
// inputs: clk (100 MHz, from the trigger FPGA's PLL), clk_ext (40 MHz
// experiment clock) and clk_pci (33 MHz PCI clock).
module grad_trigger_module
  import grad_pkg::*;
(
  input  logic             clk,
  input  logic             clk_ext,
  input  logic             clk_pci,
  input  logic             rst_n,
  // front end
  input  hits_t            hit_in,
  input  logic             gate_in,
  output logic             mate_reset,
  output logic [N_FEE-1:0] hold,
  input  logic             hold_release,  // from the DAQ after read-out
  // DAQ and global trigger
  output logic             daq_trig,
  output logic             daq_reject,
  output logic             gts_sd,
  output logic             gts_overrun,
  output logic             data_dropped,
  // PCI core local side
  input  logic             t_wr,
  input  logic [7:0]       t_addr,
  input  logic [31:0]      t_data,
  output logic             t_ready,
  output logic             m_valid,
  output logic [31:0]      m_addr,
  output logic [31:0]      m_data,
  input  logic             m_ready,
  output logic [31:0]      words_sent,
  input  logic             ps_valid,
  input  logic [31:0]      ps_data,
  input  logic             ps_last,
  output logic             ps_ready,
  // serial flash
  output logic             f_cs_n,
  output logic             f_sck,
  output logic             f_mosi,
  input  logic             f_miso,
  // trigger FPGA configuration pins
  output logic             nconfig,
  input  logic             nstatus,
  input  logic             conf_done,
  output logic             dclk,
  output logic             data0,
  output logic             flash_busy,
  output logic             cfg_busy,
  output logic             cfg_done,
  output logic             cfg_error
);

  logic              clk33, wr_rd, enable, link_empty, k_oe, t_oe;
  logic [LINK_W-1:0] k_dout, t_dout, lines;

  // the 32 dual-port lines
  assign lines = k_oe ? k_dout : t_dout;

  kernel_fpga u_kernel (
    .clk, .rst_n, .hit_in, .gate_in, .mate_reset, .hold, .hold_release, .daq_trig, .daq_reject,
    .clk_ext, .ext_rst_n(rst_n), .gts_sd,
    .clk33, .link_rst_n(rst_n), .wr_rd, .enable, .link_din(lines),
    .link_dout(k_dout), .link_oe(k_oe), .link_empty,
    .gts_overrun, .data_dropped
  );

  transmission_fpga u_trans (
    .clk(clk_pci), .rst_n, .clk33_out(clk33), .wr_rd, .enable,
    .link_dout(t_dout), .link_oe(t_oe), .link_din(lines), .link_empty,
    .t_wr, .t_addr, .t_data, .t_ready, .m_valid, .m_addr, .m_data, .m_ready,
    .words_sent, .ps_valid, .ps_data, .ps_last, .ps_ready,
    .f_cs_n, .f_sck, .f_mosi, .f_miso,
    .nconfig, .nstatus, .conf_done, .dclk, .data0,
    .flash_busy, .cfg_busy, .cfg_done, .cfg_error
  );

  // Never both FPGAs driving the shared lines.
  a_one_driver: assert property (@(posedge clk_pci) disable iff (!rst_n)
                                 !(k_oe && t_oe));

endmodule
