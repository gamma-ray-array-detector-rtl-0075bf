// link_slave: trigger-FPGA end of the link to the transmission FPGA.
//
// The link is 32 bidirectional data lines and four control lines, all timed by
// CLK_33M, which the transmission FPGA drives. Wr/Rd selects the direction:
// with wr_rd = 0 (read) this side drives the head word of the asynchronous
// FIFO onto the lines, reports the FIFO's Empty flag, and pops the word at a
// clock edge with enable high. With wr_rd = 1 (write) the transmission FPGA
// drives a parameter word, which is taken at an edge with enable high.
// Parameter word: {address[7:0], 8'h00, value[15:0]}, addresses from
// grad_pkg::par_addr_e; unknown addresses are ignored.
//
// The line count and the roles of Wr/Rd, Enable, Empty and CLK_33M follow the
// paper; the polarity of Wr/Rd, the use of Enable as the parameter strobe, the
// word format and the reset values are this design's choices. The reset values
// set N = 2 and enable condition 2 only, the setting the paper reports using.
module link_slave
  import grad_pkg::*;
(
  input  logic               clk33,
  input  logic               rst_n,
  input  logic               wr_rd,
  input  logic               enable,
  input  logic [LINK_W-1:0]  data_in,
  output logic [LINK_W-1:0]  data_out,
  output logic               data_oe,
  output logic               empty,
  output logic               fifo_rd_en,
  input  logic [LINK_W-1:0]  fifo_rdata,
  input  logic               fifo_empty,
  output trig_params_t       params
);

  logic [7:0]  addr;
  logic [15:0] value;

  assign addr       = data_in[31:24];
  assign value      = data_in[15:0];
  assign data_oe    = !wr_rd;
  assign data_out   = fifo_rdata;
  assign empty      = fifo_empty;
  assign fifo_rd_en = !wr_rd && enable && !fifo_empty;

  always_ff @(posedge clk33 or negedge rst_n) begin
    if (!rst_n) begin
      params.window_time <= WIN_W'(10);
      params.mult_n      <= HITNUM_W'(2);
      params.cond_mask   <= info_t'(1 << C_MULT);
      params.hold_time   <= HOLD_W'(20);
      params.use_gate    <= 1'b0;
    end else if (wr_rd && enable) begin
      case (addr)
        PAR_WINDOW: params.window_time <= value[WIN_W-1:0];
        PAR_MULT_N: params.mult_n      <= value[HITNUM_W-1:0];
        PAR_COND:   params.cond_mask   <= value[INFO_W-1:0];
        PAR_HOLD:   params.hold_time   <= value[HOLD_W-1:0];
        PAR_MODE:   params.use_gate    <= value[0];
        default: ;
      endcase
    end
  end

endmodule
