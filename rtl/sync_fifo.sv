// sync_fifo: single-clock first-in first-out buffer.
//
// Used as the 64-bit event FIFO between alignment and trigger processing, and
// in the transmission FPGA as the 32-bit data FIFO and the parameter buffer.
// The read port is show-ahead: dout always holds the oldest word while empty
// is low, and rd_en removes it at the clock edge. A write to a full FIFO and a
// read from an empty one are ignored. Storage is a plain array so that FPGA
// tools map it to block RAM. Depth and read style are this design's choices.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_wr, do_rd;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign dout  = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_rd) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

endmodule
