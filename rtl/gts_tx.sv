// gts_tx: serial link that delivers the 12-bit L1 word to the global trigger.
//
// The global trigger and this module share the 40 MHz experiment clock, so
// the word is sent as a plain synchronous serial frame on that clock: the line
// idles at 0, a frame is one start bit (1) followed by the 12 bits MSB first
// (hit number first, then the 5 condition bits), 13 external clock cycles in
// all. The word enters from the 100 MHz trigger domain through a toggle
// handshake: the 100 MHz side holds the word and flips req; the 40 MHz side
// sees the flip through two flops, loads the shift register and returns the
// toggle as ack. A word offered while the previous one has not been taken is
// dropped and overrun pulses. The 40 MHz serial link is the paper's; the frame
// format and the handshake are this design's choices.
//
// Timing: from l1_valid to the start bit about 3-4 external clocks; one frame
// per 13 external clocks at most.
module gts_tx
  import grad_pkg::*;
(
  input  logic     clk,          // 100 MHz trigger clock
  input  logic     rst_n,
  input  logic     l1_valid,
  input  l1_word_t l1,
  output logic     overrun,
  input  logic     clk_ext,      // 40 MHz external clock
  input  logic     ext_rst_n,
  output logic     gts_sd
);

  localparam int unsigned FRAME = L1_W + 1;

  // 100 MHz side
  l1_word_t hold_word;
  logic     req_tog;
  logic [1:0] ack_sync;
  logic     pending;

  // 40 MHz side
  logic [2:0]            req_sync;   // [1:0] synchroniser, [2] last value taken
  logic [FRAME-1:0]      shreg;
  logic [$clog2(FRAME):0] bits_left;

  assign pending = (req_tog != ack_sync[1]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_word <= '0;
      req_tog   <= 1'b0;
      ack_sync  <= '0;
      overrun   <= 1'b0;
    end else begin
      ack_sync <= {ack_sync[0], req_sync[2]};
      overrun  <= 1'b0;
      if (l1_valid) begin
        if (pending) overrun <= 1'b1;
        else begin
          hold_word <= l1;
          req_tog   <= !req_tog;
        end
      end
    end
  end

  always_ff @(posedge clk_ext or negedge ext_rst_n) begin
    if (!ext_rst_n) begin
      req_sync  <= '0;
      shreg     <= '0;
      bits_left <= '0;
      gts_sd    <= 1'b0;
    end else begin
      req_sync[1:0] <= {req_sync[0], req_tog};
      if (bits_left != '0) begin
        gts_sd    <= shreg[FRAME-1];
        shreg     <= shreg << 1;
        bits_left <= bits_left - 1'b1;
      end else begin
        gts_sd <= 1'b0;
        if (req_sync[1] != req_sync[2]) begin
          // hold_word is stable: the 100 MHz side waits for the ack.
          shreg     <= {1'b1, hold_word};
          bits_left <= ($clog2(FRAME)+1)'(FRAME);
          req_sync[2] <= req_sync[1];
        end
      end
    end
  end

endmodule
