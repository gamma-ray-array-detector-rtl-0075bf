// tb_transmission_fpga: the transmission FPGA with a stand-in for the trigger
// FPGA's link end, the M25P80 model and the FPGA configuration-pin model.
// Checks: parameter words written by the host reach the link in order;
// trigger data words queued on the link reach the PCI master port in order
// with ring-buffer addresses; a configuration file sent as PS-file words is
// erased/programmed into the flash and, on the reconfiguration order, shifted
// into the configuration model byte for byte until CONF_DONE.
module tb_transmission_fpga;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #15 clk = ~clk;
  localparam int NB = 48;   // configuration file bytes

  logic clk33_out, wr_rd, enable, link_oe, link_empty, t_wr, t_ready, m_valid, m_ready;
  logic [31:0] link_dout, link_din, t_data, m_addr, m_data, words_sent, ps_data;
  logic [7:0] t_addr;
  logic ps_valid, ps_last, ps_ready, f_cs_n, f_sck, f_mosi, f_miso;
  logic nconfig, nstatus, conf_done, dclk, data0, flash_busy, cfg_busy, cfg_done, cfg_error;
  logic [31:0] kq[$], kexp[$], plog[$];
  logic [7:0] file [NB];
  int nm = 0;

  transmission_fpga dut (.clk, .rst_n, .clk33_out, .wr_rd, .enable, .link_dout, .link_oe,
    .link_din, .link_empty, .t_wr, .t_addr, .t_data, .t_ready, .m_valid, .m_addr, .m_data,
    .m_ready, .words_sent, .ps_valid, .ps_data, .ps_last, .ps_ready,
    .f_cs_n, .f_sck, .f_mosi, .f_miso, .nconfig, .nstatus, .conf_done, .dclk, .data0,
    .flash_busy, .cfg_busy, .cfg_done, .cfg_error);
  m25p80_model #(.SIZE(4096)) flash (.cs_n(f_cs_n), .sck(f_sck), .mosi(f_mosi), .miso(f_miso));
  fpga_ps_model #(.NBYTES(NB)) fpga (.nconfig, .nstatus, .conf_done, .dclk, .data0);

  // trigger-FPGA link end stand-in
  assign link_empty = (kq.size() == 0);
  assign link_din   = wr_rd ? link_dout : (link_empty ? 32'h0 : kq[0]);
  // (the pop is made just after the edge, once the design has sampled the lines)
  always @(posedge clk33_out) if (rst_n && enable) begin
    if (wr_rd) plog.push_back(link_dout);
    else begin #1; void'(kq.pop_front()); end
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    check(nm < kexp.size() && m_data == kexp[nm], $sformatf("dma word %0d", nm));
    check(m_addr == 32'h2000 + 4 * (nm % 8), $sformatf("dma addr %h", m_addr));
    nm++;
  end
  always @(negedge clk) m_ready <= $urandom_range(0, 1);

  task automatic twr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); t_wr = 1; t_addr = a; t_data = d;
    @(negedge clk); t_wr = 0;
  endtask

  initial begin
    t_wr = 0; t_addr = 0; t_data = 0; ps_valid = 0; ps_data = 0; ps_last = 0;
    for (int i = 0; i < NB; i++) file[i] = 8'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    twr(8'h14, 32'h2000); twr(8'h15, 8);
    for (int i = 0; i < 20; i++) begin automatic logic [31:0] w = $urandom; kq.push_back(w); kexp.push_back(w); end
    twr(8'h00, 32'd25); twr(8'h02, 32'h1F); twr(8'h04, 32'd1);
    repeat (100) @(negedge clk);
    check(plog.size() == 3 && plog[0] == 32'h0000_0019 && plog[1] == 32'h0200_001F && plog[2] == 32'h0400_0001,
          "parameter words on the link");
    check(nm == 20 && words_sent == 20, $sformatf("dma words %0d", nm));
    // reconfiguration file: erase, program, reconfigure
    twr(8'h10, 0);
    repeat (3) @(negedge clk);
    wait (!flash_busy);
    for (int w = 0; w < NB / 4; w++) begin
      @(negedge clk); ps_valid = 1; ps_last = (w == NB / 4 - 1);
      ps_data = {file[4*w+3], file[4*w+2], file[4*w+1], file[4*w]};
      @(posedge clk); while (!ps_ready) @(posedge clk);
      @(negedge clk); ps_valid = 0; ps_last = 0;
    end
    repeat (50) @(negedge clk);
    wait (!flash_busy);
    begin
      int bad = 0;
      for (int i = 0; i < NB; i++) if (flash.mem[i] != file[i]) bad++;
      check(bad == 0, $sformatf("flash contents: %0d bad", bad));
    end
    twr(8'h12, NB + 16);
    twr(8'h11, 0);
    wait (cfg_done || cfg_error);
    check(cfg_done && !cfg_error, "configured");
    begin
      int bad = 0;
      for (int i = 0; i < NB; i++) if (fpga.rx[i] != file[i]) bad++;
      check(fpga.nrx == NB && bad == 0, $sformatf("configuration bytes %0d, %0d bad", fpga.nrx, bad));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
