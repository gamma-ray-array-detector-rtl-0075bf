// event_writer: stores the hit word of every accepted event in the 32-bit
// asynchronous FIFO read by the transmission FPGA.
//
// An accept pulse writes the low half (sections 0..31, inner ring) in the next
// cycle and the high half (sections 32..63, outer ring) in the cycle after.
// Events are stored whole or not at all: if fewer than two FIFO entries are
// free, or the previous event is still being written, the event is dropped and
// dropped pulses. Storing the 64-bit hit data in a 32-bit FIFO follows the
// paper; the word order and the drop rule are this design's choices.
module event_writer #(
  parameter int unsigned FREE_W = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              accept,
  input  logic [63:0]       hits,
  input  logic [FREE_W-1:0] wfree,
  output logic              wr_en,
  output logic [31:0]       wdata,
  output logic              dropped
);

  logic        second;
  logic [31:0] high;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      second  <= 1'b0;
      high    <= '0;
      wr_en   <= 1'b0;
      wdata   <= '0;
      dropped <= 1'b0;
    end else begin
      wr_en   <= 1'b0;
      dropped <= 1'b0;
      if (second) begin
        wr_en  <= 1'b1;
        wdata  <= high;
        second <= 1'b0;
        if (accept) dropped <= 1'b1;
      end else if (accept) begin
        if (wfree >= FREE_W'(2)) begin
          wr_en  <= 1'b1;
          wdata  <= hits[31:0];
          high   <= hits[63:32];
          second <= 1'b1;
        end else begin
          dropped <= 1'b1;
        end
      end
    end
  end

endmodule
