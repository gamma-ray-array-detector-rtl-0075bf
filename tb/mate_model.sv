// mate_model: behavioural model of the hit outputs of the 64 MATE front-end
// chips, for simulation only. Each chip ORs the discriminators of its 16
// scintillators into one fast hit line and holds that line at 1 until it is
// reset by the trigger; while reset is high no new hit is latched. fire[i]
// stands for "some scintillator of section i crossed its threshold". The
// analog chain (charge amplifier, shapers, threshold DAC, track-and-hold) is
// not modelled; hold[] is only counted.
module mate_model (
  input  logic [63:0] fire,
  input  logic        reset,
  input  logic [31:0] hold,
  output logic [63:0] hit
);
  int nholds = 0;
  initial hit = '0;
  always @(fire or reset) begin
    for (int i = 0; i < 64; i++) begin
      if (reset) hit[i] = 1'b0;
      else if (fire[i]) hit[i] = 1'b1;
    end
  end
  always @(posedge hold[0] or posedge hold[31]) nholds++;
endmodule
