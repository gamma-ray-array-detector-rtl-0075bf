// target_ctrl: register decoder behind the PCI core's target (slave) port.
//
// The host software writes 32-bit words to small register addresses.
// Addresses 0x00-0x0F are trigger parameters: each is packed as
// {address, 8'h00, value[15:0]} and queued in the parameter buffer, from which
// the transmission controller sends it to the trigger FPGA. The other
// addresses are local: 0x10 orders a flash bulk erase, 0x11 orders a
// reconfiguration of the trigger FPGA, 0x12 sets the configuration file length
// in bytes, 0x14 the host ring-buffer base address and 0x15 its size in words
// for the DMA engine. Writes take one cycle; t_ready is low while the
// parameter buffer is full. The target-control / parameter-buffer split
// follows the paper's figure; the register map is this design's choice.
module target_ctrl #(
  parameter int unsigned PBUF_DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        t_wr,
  input  logic [7:0]  t_addr,
  input  logic [31:0] t_data,
  output logic        t_ready,
  // parameter buffer, read side
  input  logic        pbuf_rd,
  output logic [31:0] pbuf_dout,
  output logic        pbuf_empty,
  // local registers and orders
  output logic        erase_req,
  output logic        reconfig_req,
  output logic [23:0] ps_len,
  output logic [31:0] dma_base,
  output logic [15:0] dma_words
);


  logic           pbuf_full, is_param;

  assign is_param = (t_addr[7:4] == 4'h0);
  assign t_ready  = !pbuf_full;

  sync_fifo #(.WIDTH(32), .DEPTH(PBUF_DEPTH)) u_pbuf (
    .clk, .rst_n,
    .wr_en(t_wr && is_param), .din({t_addr, 8'h00, t_data[15:0]}), .full(pbuf_full),
    .rd_en(pbuf_rd), .dout(pbuf_dout), .empty(pbuf_empty), .count()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      erase_req    <= 1'b0;
      reconfig_req <= 1'b0;
      ps_len       <= '0;
      dma_base     <= '0;
      dma_words    <= 16'd1024;
    end else begin
      erase_req    <= t_wr && (t_addr == 8'h10);
      reconfig_req <= t_wr && (t_addr == 8'h11);
      if (t_wr) begin
        case (t_addr)
          8'h12: ps_len    <= t_data[23:0];
          8'h14: dma_base  <= t_data;
          8'h15: dma_words <= t_data[15:0];
          default: ;
        endcase
      end
    end
  end

endmodule
