// kernel_fpga: the kernel trigger FPGA of the GRAD trigger module.
//
// Data path (100 MHz trigger clock): the 64 fast hit lines are synchronised
// (hit_sync), gathered over the window time into one aligned word
// (window_align), buffered in the 64-bit event FIFO (sync_fifo) and judged by
// the three-cycle trigger pipeline (kernel_trigger). An accepted event raises
// daq_trig (fast L1 decision to the DAQ), sends its 12-bit L1 word to the
// global trigger on the 40 MHz serial link (gts_tx) and is written, as two
// 32-bit words, into the asynchronous FIFO (event_writer, async_fifo) that the
// transmission FPGA reads through link_slave on CLK_33M. A rejected event
// raises daq_reject. The 32 hold timers (hold_timers) raise each FEE module's
// track-and-hold line a software-set time after that module's first hit; the
// holds are released when the event is rejected or when the DAQ signals
// (hold_release) that it has read the held values. At the end of each window
// mate_reset clears the MATE hit latches.
//
// The parameters written over the link live in the 33 MHz domain; they change
// only between runs and reach the 100 MHz logic through two flip-flops.
// Latency from the aligned write to daq_trig: 1 cycle through the FIFO plus 3
// pipeline cycles. The block structure follows the paper; how the blocks
// hand over to each other is this design's choice.
module kernel_fpga
  import grad_pkg::*;
#(
  parameter int unsigned EVT_FIFO_DEPTH  = 16,
  parameter int unsigned DATA_FIFO_DEPTH = 16
) (
  input  logic               clk,          // 100 MHz from the PLL
  input  logic               rst_n,
  input  hits_t              hit_in,       // from the LVDS receivers
  input  logic               gate_in,      // start-detector gate
  output logic               mate_reset,   // to the MATE chips
  output logic [N_FEE-1:0]   hold,         // to the LVDS drivers
  input  logic               hold_release, // from the DAQ: event read out
  output logic               daq_trig,     // L1 accept to the DAQ
  output logic               daq_reject,   // L1 reject to the DAQ
  input  logic               clk_ext,      // 40 MHz experiment clock
  input  logic               ext_rst_n,
  output logic               gts_sd,       // serial L1 word to the GTS
  input  logic               clk33,        // CLK_33M from the transmission FPGA
  input  logic               link_rst_n,
  input  logic               wr_rd,
  input  logic               enable,
  input  logic [LINK_W-1:0]  link_din,
  output logic [LINK_W-1:0]  link_dout,
  output logic               link_oe,
  output logic               link_empty,
  output logic               gts_overrun,  // status pulses
  output logic               data_dropped
);

  localparam int unsigned DAW = $clog2(DATA_FIFO_DEPTH);

  hits_t        hit_reg, evt_din, evt_dout, acc_hits;
  logic         evt_we, evt_empty, evt_full;
  logic         out_valid;
  l1_word_t     l1;
  trig_params_t par33, par_s1, par;
  logic         dw_en, f_rd_en, f_empty, f_full;
  logic [31:0]  dw_data, f_rdata;
  logic [DAW:0] f_free;

  // Parameters: 33 MHz registers -> 100 MHz (quasi-static).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      par_s1 <= '0;
      par    <= '0;
    end else begin
      par_s1 <= par33;
      par    <= par_s1;
    end
  end

  hit_sync #(.WIDTH(N_SECT)) u_sync (
    .clk, .rst_n, .hit_async(hit_in), .hit_reg
  );

  window_align #(.WIDTH(N_SECT), .WIN_W(WIN_W)) u_align (
    .clk, .rst_n, .hit_reg, .gate(gate_in), .use_gate(par.use_gate),
    .window_time(par.window_time), .fifo_we(evt_we), .fifo_din(evt_din),
    .mate_reset, .busy()
  );

  sync_fifo #(.WIDTH(N_SECT), .DEPTH(EVT_FIFO_DEPTH)) u_evt_fifo (
    .clk, .rst_n, .wr_en(evt_we), .din(evt_din), .full(evt_full),
    .rd_en(!evt_empty), .dout(evt_dout), .empty(evt_empty), .count()
  );

  kernel_trigger u_trig (
    .clk, .rst_n, .in_valid(!evt_empty), .in_hits(evt_dout),
    .mult_n(par.mult_n), .cond_mask(par.cond_mask),
    .out_valid, .accept(daq_trig), .reject(daq_reject), .l1, .out_hits(acc_hits)
  );

  hold_timers #(.N_FEE(N_FEE), .HOLD_W(HOLD_W)) u_hold (
    .clk, .rst_n, .hit_reg, .hold_time(par.hold_time), .clear(daq_reject || hold_release), .hold
  );

  gts_tx u_gts (
    .clk, .rst_n, .l1_valid(daq_trig), .l1, .overrun(gts_overrun),
    .clk_ext, .ext_rst_n, .gts_sd
  );

  event_writer #(.FREE_W(DAW+1)) u_evw (
    .clk, .rst_n, .accept(daq_trig), .hits(acc_hits), .wfree(f_free),
    .wr_en(dw_en), .wdata(dw_data), .dropped(data_dropped)
  );

  async_fifo #(.WIDTH(32), .DEPTH(DATA_FIFO_DEPTH)) u_data_fifo (
    .wclk(clk), .wrst_n(rst_n), .wr_en(dw_en), .wdata(dw_data),
    .wfull(f_full), .wfree(f_free),
    .rclk(clk33), .rrst_n(link_rst_n), .rd_en(f_rd_en), .rdata(f_rdata),
    .rempty(f_empty)
  );

  link_slave u_link (
    .clk33, .rst_n(link_rst_n), .wr_rd, .enable, .data_in(link_din),
    .data_out(link_dout), .data_oe(link_oe), .empty(link_empty),
    .fifo_rd_en(f_rd_en), .fifo_rdata(f_rdata), .fifo_empty(f_empty),
    .params(par33)
  );

  // An event takes at least window_time+9 cycles to align and the pipeline
  // drains one per cycle, so the event FIFO can never be full when written.
  a_evt_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    evt_we |-> !evt_full);
  // Every word of the data FIFO is written only after event_writer has seen
  // room for the whole event.
  a_data_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    dw_en |-> !f_full);
  // Each event leaving the pipeline is either accepted or rejected.
  a_decision: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid == (daq_trig || daq_reject));

endmodule
