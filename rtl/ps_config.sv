// ps_config: passive-serial (PS) configuration controller for the trigger FPGA.
//
// On a reconfiguration order it drives the configuration pins of the trigger
// FPGA with the file stored in the serial flash:
//   1. nCONFIG low for at least NCONFIG_CYCLES and until nSTATUS is seen low;
//   2. nCONFIG high, wait for the FPGA to release nSTATUS (high);
//   3. start a flash read and shift every byte out on DATA0, least
//      significant bit first, one bit per DCLK period (DCLK = clk/2, DATA0
//      changes while DCLK is low, the FPGA samples on the rising edge);
//   4. after a byte, CONF_DONE high ends the load; INIT_CLKS further DCLK
//      periods let the device initialise, then done is raised.
// Error: nSTATUS low during the load, or ps_len bytes sent without CONF_DONE.
// The controller's role follows the paper; the pin sequence is the standard
// Cyclone passive-serial scheme and its timing constants are this design's
// choices.
module ps_config #(
  parameter int unsigned NCONFIG_CYCLES = 8,
  parameter int unsigned INIT_CLKS      = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [23:0] ps_len,
  output logic        busy,
  output logic        done,
  output logic        error,
  // flash read stream
  output logic        rd_start,
  output logic        rd_stop,
  input  logic        rb_valid,
  input  logic [7:0]  rb_data,
  output logic        rb_ready,
  // configuration pins of the trigger FPGA
  output logic        nconfig,
  input  logic        nstatus,
  input  logic        conf_done,
  output logic        dclk,
  output logic        data0
);

  typedef enum logic [2:0] {IDLE, NCFG, WAIT_ST, LOAD, SHIFT, CHECK, INIT} state_e;

  state_e      state;
  logic [7:0]  cnt;
  logic [23:0] nbytes;
  logic [7:0]  sh;
  logic [2:0]  bitn;
  logic        ph;
  logic        nst_q, cdone_q;   // synchronised pin inputs

  assign busy     = (state != IDLE);
  assign rb_ready = (state == LOAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nst_q   <= 1'b1;
      cdone_q <= 1'b0;
    end else begin
      nst_q   <= nstatus;
      cdone_q <= conf_done;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; cnt <= '0; nbytes <= '0; sh <= '0; bitn <= '0; ph <= 1'b0;
      nconfig <= 1'b1; dclk <= 1'b0; data0 <= 1'b0;
      done <= 1'b0; error <= 1'b0; rd_start <= 1'b0; rd_stop <= 1'b0;
    end else begin
      rd_start <= 1'b0;
      rd_stop  <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state <= NCFG; nconfig <= 1'b0; cnt <= '0;
          done <= 1'b0; error <= 1'b0; nbytes <= '0;
        end
        NCFG: begin
          if (cnt != 8'hFF) cnt <= cnt + 1'b1;
          if (cnt >= 8'(NCONFIG_CYCLES) && !nst_q) begin
            nconfig <= 1'b1; state <= WAIT_ST;
          end
        end
        WAIT_ST: if (nst_q) begin
          rd_start <= 1'b1; state <= LOAD;
        end
        LOAD: if (rb_valid) begin
          sh <= rb_data; bitn <= '0; ph <= 1'b0; state <= SHIFT;
          nbytes <= nbytes + 1'b1;
        end
        SHIFT: begin
          if (!ph) begin
            dclk <= 1'b0; data0 <= sh[0]; ph <= 1'b1;
          end else begin
            dclk <= 1'b1; ph <= 1'b0; sh <= sh >> 1;
            if (bitn == 3'd7) begin
              // the pins are checked once the byte's last bit has been clocked
              state <= CHECK;
              cnt   <= '0;
            end
            bitn <= bitn + 1'b1;
          end
        end
        CHECK: begin
          // two cycles for CONF_DONE / nSTATUS to pass the input flops
          cnt <= cnt + 1'b1;
          if (cnt == 8'd2) begin
            cnt <= '0;
            if (cdone_q) begin
              state <= INIT; rd_stop <= 1'b1; ph <= 1'b0; dclk <= 1'b0;
            end else if (!nst_q || nbytes == ps_len) begin
              state <= IDLE; rd_stop <= 1'b1; error <= 1'b1; dclk <= 1'b0;
            end else begin
              state <= LOAD;
            end
          end
        end
        INIT: begin
          ph <= !ph;
          if (!ph) begin
            dclk <= 1'b0;
            if (cnt >= 8'(INIT_CLKS)) begin
              state <= IDLE; done <= 1'b1;
            end
          end else begin
            dclk <= 1'b1;
            cnt  <= cnt + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
