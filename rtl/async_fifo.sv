// async_fifo: dual-clock FIFO that hands accepted events' hit data from the
// 100 MHz trigger domain to the 33 MHz inter-FPGA link clock.
//
// Gray-coded read and write pointers, each passed to the other clock through
// two flip-flops; full and empty are computed from the synchronised pointers
// and are therefore pessimistic for two cycles. The read port is show-ahead:
// rdata is the oldest word while rempty is low, rd_en pops it. wfree tells the
// writer how many entries are certainly free. The 32-bit width and the
// asynchronous FIFO follow the paper; the depth and construction are this
// design's choices. DEPTH must be a power of two.
module async_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             wfull,
  output logic [AW:0]      wfree,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             rempty
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0] rbin_w;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // write domain
  assign rbin_w = gray2bin(rgray_w2);
  assign wfree  = (AW+1)'(DEPTH) - (wbin - rbin_w);
  assign wfull  = (wfree == '0);

  always_ff @(posedge wclk) begin
    if (wr_en && !wfull) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !wfull) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  // read domain
  assign rempty = (rgray == wgray_r2);
  assign rdata  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !rempty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

endmodule
