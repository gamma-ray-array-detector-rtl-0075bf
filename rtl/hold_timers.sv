// hold_timers: 32 track-and-hold timers, one per FEE module.
//
// A MATE chip samples its shaped energy signals when it receives a hold
// signal, which has to come when the pulses peak. FEE module k carries the
// MATE of inner section k and of outer section k+32. When either of the two
// hit lines is first seen high, timer k starts; when it has counted hold_time
// further cycles the module's hold line goes high and stays high until clear.
// While clear is high all timers are stopped and cleared. In the trigger FPGA
// clear is the reject decision or the DAQ's release after read-out, so a held
// value survives the MATE hit-latch reset that ends the alignment window.
//
// Timing: hit first registered at edge t0 -> hold[k] high after edge
// t0 + hold_time + 1. The per-module timers and the software hold time follow
// the paper; the section-to-module mapping, the hold length (until clear) and
// the counter width are this design's choices.
module hold_timers #(
  parameter int unsigned N_FEE  = 32,
  parameter int unsigned HOLD_W = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [2*N_FEE-1:0]  hit_reg,
  input  logic [HOLD_W-1:0]   hold_time,
  input  logic                clear,
  output logic [N_FEE-1:0]    hold
);

  logic [HOLD_W-1:0] cnt [N_FEE];
  logic [N_FEE-1:0]  running;

  for (genvar k = 0; k < N_FEE; k++) begin : g_timer
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        running[k] <= 1'b0;
        hold[k]    <= 1'b0;
        cnt[k]     <= '0;
      end else if (clear) begin
        running[k] <= 1'b0;
        hold[k]    <= 1'b0;
        cnt[k]     <= '0;
      end else if (running[k]) begin
        if (cnt[k] == hold_time) begin
          hold[k]    <= 1'b1;
          running[k] <= 1'b0;
        end else begin
          cnt[k] <= cnt[k] + 1'b1;
        end
      end else if (!hold[k] && (hit_reg[k] || hit_reg[k+N_FEE])) begin
        running[k] <= 1'b1;
        cnt[k]     <= '0;
      end
    end
  end

endmodule
