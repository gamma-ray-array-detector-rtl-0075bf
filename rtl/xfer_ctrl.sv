// xfer_ctrl: transmission controller, master of the inter-FPGA link.
//
// It owns the link's four control lines (CLK_33M is its own clock). Normally
// the link is in read mode (wr_rd = 0): whenever the trigger FPGA's FIFO is
// not Empty and the local 32-bit FIFO has room, Enable is raised and the word
// on the data lines is written into the local FIFO at the same clock edge at
// which the trigger FPGA pops it. When the parameter buffer holds words, the
// controller turns the link round (one idle cycle with Enable low), drives
// wr_rd = 1 and sends one parameter word per cycle with Enable high, then turns
// the link back (one more idle cycle). Sending parameters takes priority over
// reading data. Link roles follow the paper; the priority, turnaround and
// cycle timing are this design's choices.
module xfer_ctrl (
  input  logic        clk,          // 33 MHz, also forwarded as CLK_33M
  input  logic        rst_n,
  // link
  output logic        wr_rd,
  output logic        enable,
  output logic [31:0] link_dout,
  output logic        link_oe,
  input  logic [31:0] link_din,
  input  logic        link_empty,
  // parameter buffer
  input  logic        pbuf_empty,
  input  logic [31:0] pbuf_dout,
  output logic        pbuf_rd,
  // local data FIFO, write side
  input  logic        lf_full,
  output logic        lf_wr,
  output logic [31:0] lf_din
);

  typedef enum logic [1:0] {RD, TURN_W, WR, TURN_R} state_e;
  state_e state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= RD;
    else begin
      unique case (state)
        RD:     if (!pbuf_empty) state <= TURN_W;
        TURN_W: state <= WR;
        WR:     if (pbuf_empty) state <= TURN_R;
        TURN_R: state <= RD;
        default: state <= RD;
      endcase
    end
  end

  always_comb begin
    wr_rd     = (state == TURN_W) || (state == WR);
    link_oe   = wr_rd;
    link_dout = pbuf_dout;
    pbuf_rd   = 1'b0;
    lf_wr     = 1'b0;
    lf_din    = link_din;
    enable    = 1'b0;
    if (state == RD && pbuf_empty && !link_empty && !lf_full) begin
      enable = 1'b1;
      lf_wr  = 1'b1;
    end
    if (state == WR && !pbuf_empty) begin
      enable  = 1'b1;
      pbuf_rd = 1'b1;
    end
  end

endmodule
