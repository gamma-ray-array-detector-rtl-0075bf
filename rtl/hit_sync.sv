// hit_sync: brings the 64 asynchronous fast hit lines into the 100 MHz
// trigger clock domain.
//
// As in the paper, each line first passes a D flip-flop clocked by the trigger
// clock and then the 64-bit register that holds the trigger data word. The two
// stages also act as a two-flop synchroniser; the MATE chips hold a hit line at
// '1' until they are reset, so no pulse is shorter than a clock period.
// Latency: a level on hit_async appears on hit_reg two clock edges later.
// Reset (clearing both stages) is this design's choice.
module hit_sync #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] hit_async,
  output logic [WIDTH-1:0] hit_reg
);

  logic [WIDTH-1:0] hit_ff;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_ff  <= '0;
      hit_reg <= '0;
    end else begin
      hit_ff  <= hit_async;
      hit_reg <= hit_ff;
    end
  end

endmodule
