// kernel_trigger: the three-cycle trigger pipeline of the trigger FPGA.
//
// Cycle 1 adds up the 64 bits of the aligned hit word into a 7-bit hit number.
// Cycle 2 forms the 5-bit trigger information (paper's Table 1): bit 0 hit
// number >= 1, bit 1 hit number >= N, bit 2 two adjacent inner-ring sections
// hit, bit 3 two adjacent outer-ring sections hit, bit 4 an inner section and
// the outer section behind it hit. Cycle 3 compares the information with the
// 5-bit condition mask: the event is accepted when every enabled condition is
// met, i.e. each information bit is >= its mask bit. It then outputs the 12-bit
// L1 word {hit number, information} and the hit word.
//
// Timing: an event sampled with in_valid at edge t appears with out_valid (and
// exactly one of accept / reject) after edge t+3. One event per clock may enter.
// The pipeline stages follow the paper; the bit order of the information, the
// neighbour relation (see grad_pkg) and the ">=" reading of the comparison are
// this design's choices (the paper also words it as "not equal -> invalid").
module kernel_trigger
  import grad_pkg::*;
#(
  parameter bit RING_WRAP = 1'b0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  hits_t    in_hits,
  input  hitnum_t  mult_n,
  input  info_t    cond_mask,
  output logic     out_valid,
  output logic     accept,
  output logic     reject,
  output l1_word_t l1,
  output hits_t    out_hits
);

  logic    s1_valid, s2_valid;
  hits_t   s1_hits, s2_hits;
  hitnum_t s1_num, s2_num;
  info_t   s2_info;
  logic    pass;

  assign pass = ((s2_info & cond_mask) == cond_mask);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s2_valid  <= 1'b0;
      out_valid <= 1'b0;
      accept    <= 1'b0;
      reject    <= 1'b0;
    end else begin
      s1_valid  <= in_valid;
      s2_valid  <= s1_valid;
      out_valid <= s2_valid;
      accept    <= s2_valid && pass;
      reject    <= s2_valid && !pass;
    end
  end

  // Data stages (no reset needed: qualified by the valid chain).
  always_ff @(posedge clk) begin
    // cycle 1: hit number
    s1_hits  <= in_hits;
    s1_num   <= popcount64(in_hits);
    // cycle 2: trigger information
    s2_hits  <= s1_hits;
    s2_num   <= s1_num;
    s2_info  <= trig_info(s1_hits, s1_num, mult_n, RING_WRAP);
    // cycle 3: decision and outputs
    out_hits <= s2_hits;
    l1       <= '{hitnum: s2_num, info: s2_info};
  end

  a_one_decision: assert property (@(posedge clk) disable iff (!rst_n)
                                   out_valid |-> (accept ^ reject));

endmodule
