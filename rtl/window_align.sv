// window_align: gathers the hits of one event into a single aligned 64-bit word.
//
// Hits of one event reach the trigger at different times. The MATE chips hold
// a hit line at '1' until they are reset, so the trigger may wait: the first
// non-zero hit word (or, in gate mode, a rising edge of the start-detector
// gate) starts a timer; when the timer equals the software window time the
// event FIFO write enable is pulsed once with the current hit word, the timer
// is cleared and a reset pulse goes to the MATE chips. This is the circuit of
// the paper's alignment figure (">0" start, timer, window-time register,
// comparator driving WriteEnable, the MATE reset and the timer clear).
//
// Timing: if the start is seen at clock edge t0, fifo_we and mate_reset rise
// together at edge t0 + window_time + 1. mate_reset stays high RST_CYCLES
// cycles; then HOLDOFF further cycles pass (for cleared lines to leave the
// synchroniser) before a new event may start. The reset length, the hold-off,
// the gate synchroniser and the cycle unit of the window are this design's
// choices.
module window_align #(
  parameter int unsigned WIDTH      = 64,
  parameter int unsigned WIN_W      = 8,
  parameter int unsigned RST_CYCLES = 4,
  parameter int unsigned HOLDOFF    = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] hit_reg,
  input  logic             gate,        // start-detector gate, asynchronous
  input  logic             use_gate,    // 1: events start on the gate
  input  logic [WIN_W-1:0] window_time,
  output logic             fifo_we,
  output logic [WIDTH-1:0] fifo_din,
  output logic             mate_reset,
  output logic             busy
);

  typedef enum logic [1:0] {IDLE, COUNT, RESET, HOLD} state_e;

  state_e           state;
  logic [WIN_W-1:0] timer;
  logic [7:0]       rcnt;
  logic [2:0]       gate_sync;
  logic             gate_rise, start;

  assign gate_rise = gate_sync[1] && !gate_sync[2];
  assign start     = use_gate ? gate_rise : (hit_reg != '0);
  assign busy      = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gate_sync <= '0;
    else        gate_sync <= {gate_sync[1:0], gate};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      timer      <= '0;
      rcnt       <= '0;
      fifo_we    <= 1'b0;
      fifo_din   <= '0;
      mate_reset <= 1'b0;
    end else begin
      fifo_we <= 1'b0;
      unique case (state)
        IDLE: begin
          timer <= '0;
          if (start) state <= COUNT;
        end
        COUNT: begin
          if (timer == window_time) begin
            fifo_we    <= 1'b1;
            fifo_din   <= hit_reg;
            mate_reset <= 1'b1;
            timer      <= '0;
            rcnt       <= 8'(RST_CYCLES - 1);
            state      <= RESET;
          end else begin
            timer <= timer + 1'b1;
          end
        end
        RESET: begin
          if (rcnt == '0) begin
            mate_reset <= 1'b0;
            rcnt       <= 8'(HOLDOFF);
            state      <= HOLD;
          end else begin
            rcnt <= rcnt - 1'b1;
          end
        end
        HOLD: begin
          if (rcnt == '0) state <= IDLE;
          else            rcnt  <= rcnt - 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // The write enable is a single-cycle pulse and always coincides with the
  // start of the MATE reset.
  a_we_pulse: assert property (@(posedge clk) disable iff (!rst_n)
                               fifo_we |=> !fifo_we);
  a_we_reset: assert property (@(posedge clk) disable iff (!rst_n)
                               fifo_we |-> mate_reset);

endmodule
