// fpga_ps_model: behavioural model of the passive-serial configuration pins
// of an FPGA, for simulation only. nCONFIG low pulls nSTATUS low and clears
// CONF_DONE; 200 ns after nCONFIG returns high nSTATUS is released. While
// nSTATUS is high, each rising DCLK takes one DATA0 bit, least significant bit
// of each byte first; after NBYTES bytes CONF_DONE goes high. The bytes
// received are kept in rx[] and counted in nrx; initialisation clocks after
// CONF_DONE are counted in ninit.
module fpga_ps_model #(
  parameter int unsigned NBYTES = 64
) (
  input  logic nconfig,
  output logic nstatus,
  output logic conf_done,
  input  logic dclk,
  input  logic data0
);
  logic [7:0] rx [NBYTES];
  logic [7:0] sh;
  int nrx, nbit, ninit, nconfigs;

  initial begin nstatus = 1; conf_done = 0; nrx = 0; nbit = 0; ninit = 0; nconfigs = 0; sh = 0; end

  always @(negedge nconfig) begin
    nstatus = 0; conf_done = 0; nrx = 0; nbit = 0; ninit = 0; nconfigs++;
  end
  always @(posedge nconfig) begin
    #200ns;
    if (nconfig) nstatus = 1;
  end
  always @(posedge dclk) if (nconfig && nstatus) begin
    if (conf_done) ninit++;
    else begin
      sh = {data0, sh[7:1]};
      nbit++;
      if (nbit == 8) begin
        nbit = 0;
        if (nrx < int'(NBYTES)) rx[nrx] = sh;
        nrx++;
        if (nrx == int'(NBYTES)) conf_done = 1;
      end
    end
  end
endmodule
