// tb_ps_config: the PS controller fed by a byte source in the bench (random
// delays, like the flash controller) and driving the FPGA configuration-pin
// model. Checks the nCONFIG pulse, that every byte arrives at the FPGA LSB
// first and in order, that the load stops at CONF_DONE with INIT_CLKS
// further clocks and done, and that a file shorter than the device needs
// ends with error.
module tb_ps_config;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #15 clk = ~clk;
  localparam int NB = 40;
  logic start, busy, done, error, rd_start, rd_stop, rb_valid, rb_ready;
  logic [7:0] rb_data;
  logic [23:0] ps_len;
  logic nconfig, nstatus, conf_done, dclk, data0;
  logic [7:0] file [NB + 8];
  int src = 0, nstart = 0, nstop = 0, ncfg_low = 0;
  bit streaming = 0;

  ps_config #(.NCONFIG_CYCLES(8), .INIT_CLKS(16)) dut (.clk, .rst_n, .start, .ps_len, .busy, .done, .error,
    .rd_start, .rd_stop, .rb_valid, .rb_data, .rb_ready,
    .nconfig, .nstatus, .conf_done, .dclk, .data0);
  fpga_ps_model #(.NBYTES(NB)) fpga (.nconfig, .nstatus, .conf_done, .dclk, .data0);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // byte source standing in for the flash controller's read stream
  always @(posedge clk) if (rst_n) begin
    if (rd_start) begin streaming <= 1; src <= 0; nstart++; end
    if (rd_stop) begin streaming <= 0; nstop++; end
    if (!nconfig) ncfg_low++;
    if (rb_valid && rb_ready) begin rb_valid <= 0; src <= src + 1; end
    else if (streaming && !rb_valid && !rd_stop && $urandom_range(0, 2) == 0) begin
      rb_valid <= 1; rb_data <= file[src];
    end
  end

  initial begin
    start = 0; ps_len = NB; rb_valid = 0; rb_data = 0;
    for (int i = 0; i < NB + 8; i++) file[i] = 8'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done || error);
    @(negedge clk);
    check(done && !error, "done");
    check(ncfg_low >= 8, $sformatf("nCONFIG low %0d cycles", ncfg_low));
    check(fpga.nrx == NB, $sformatf("bytes at FPGA %0d", fpga.nrx));
    for (int i = 0; i < NB; i++)
      check(fpga.rx[i] == file[i], $sformatf("byte %0d: %h, expected %h", i, fpga.rx[i], file[i]));
    check(fpga.ninit == 16, $sformatf("init clocks %0d", fpga.ninit));
    check(nstart == 1 && nstop == 1, "one flash read");
    check(!busy, "idle");
    // a file shorter than the device expects
    ps_len = NB - 5;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done || error);
    @(negedge clk);
    check(error && !done, "short file -> error");
    check(fpga.nrx == NB - 5 && !conf_done, "stopped after ps_len bytes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
