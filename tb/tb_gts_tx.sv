// tb_gts_tx: L1 words offered at 100 MHz are received from the 40 MHz serial
// line by a decoder in the bench (start bit, then 12 bits MSB first) and
// compared in order. Checks the frame length, the start latency, that a word
// offered while the previous one is still pending is dropped with overrun
// (one word may wait while a frame is being sent),
// and that the line idles low.
module tb_gts_tx;
  import grad_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, clk_ext = 0, rst_n = 0;
  always #5 clk = ~clk;          // 100 MHz
  always #12.5 clk_ext = ~clk_ext; // 40 MHz

  logic l1_valid, overrun, gts_sd;
  l1_word_t l1;
  logic [11:0] sent[$];
  int nrx = 0, novr = 0;

  gts_tx dut (.clk, .rst_n, .l1_valid, .l1, .overrun, .clk_ext, .ext_rst_n(rst_n), .gts_sd);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // serial decoder
  initial begin
    logic [11:0] w;
    forever begin
      @(posedge clk_ext);
      if (rst_n && gts_sd) begin
        for (int i = 11; i >= 0; i--) begin @(posedge clk_ext); w[i] = gts_sd; end
        nrx++;
        if (sent.size() == 0) check(0, "frame without word");
        else begin
          automatic logic [11:0] e = sent.pop_front();
          check(w == e, $sformatf("rx %h exp %h", w, e));
        end
        @(posedge clk_ext);
        check(!gts_sd, "line low after frame");
      end
    end
  end

  always @(posedge clk) if (rst_n && overrun) novr++;

  task automatic offer(logic [11:0] w, bit expect_taken);
    @(negedge clk); l1_valid = 1; l1 = w;
    if (expect_taken) sent.push_back(w);
    @(negedge clk); l1_valid = 0;
  endtask

  initial begin
    time t0;
    l1_valid = 0; l1 = '0;
    repeat (3) @(posedge clk_ext);
    rst_n = 1;
    repeat (3) @(posedge clk_ext);
    // latency: start bit within 5 external clocks of the offer
    @(negedge clk); t0 = $time;
    offer(12'hA5C, 1);
    wait (gts_sd);
    check($time - t0 <= 5 * 25, $sformatf("start latency %0t", $time - t0));
    wait (nrx == 1);
    for (int i = 0; i < 30; i++) begin
      offer(12'($urandom), 1);
      repeat (13 * 3 + 12) @(negedge clk);    // > 13 external clocks apart
    end
    wait (nrx == 31);
    // a second word 100 ns after the first waits in the hold register while
    // the first frame is sent; a third one 20 ns later is dropped (overrun)
    offer(12'h123, 1);
    repeat (10) @(negedge clk);
    offer(12'h456, 1);
    offer(12'h789, 0);
    repeat (200) @(negedge clk);
    check(nrx == 33, $sformatf("received %0d", nrx));
    check(novr == 1, $sformatf("overruns %0d", novr));
    check(sent.size() == 0, "all words received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
