// tb_async_fifo: writes at 100 MHz, reads at 33 MHz with random enables on
// both sides; every word read must be the next one written. Checks that
// wfree never exceeds the true free space, that full blocks writes, and that
// the FIFO drains to empty.
module tb_async_fifo;
  int checks = 0, failures = 0;
  logic wclk = 0, rclk = 0, rst_n = 0;
  always #5 wclk = ~wclk;
  always #15 rclk = ~rclk;
  logic wr_en, wfull, rd_en, rempty;
  logic [31:0] wdata, rdata;
  logic [4:0] wfree;
  logic [31:0] q[$];
  int nread = 0, nfull = 0;

  async_fifo #(.WIDTH(32), .DEPTH(16)) dut (.wclk, .wrst_n(rst_n), .wr_en, .wdata, .wfull, .wfree,
                                          .rclk, .rrst_n(rst_n), .rd_en, .rdata, .rempty);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  bit wphase = 1;
  always @(posedge wclk) if (rst_n) begin
    check(int'(wfree) <= 16 - q.size(), $sformatf("wfree %0d real %0d", wfree, 16 - q.size()));
    if (wfull) nfull++;
    if (wr_en && !wfull) q.push_back(wdata);
  end
  always @(negedge wclk) begin
    wr_en <= rst_n && ($urandom_range(0, 99) < (wphase ? 60 : 0));
    wdata <= $urandom;
  end
  always @(posedge rclk) if (rst_n) begin
    if (rd_en && !rempty) begin
      check(q.size() > 0 && rdata == q[0], $sformatf("rdata %h", rdata));
      if (q.size() > 0) void'(q.pop_front());
      nread++;
    end
  end
  always @(negedge rclk) rd_en <= ($urandom_range(0, 99) < 70);

  initial begin
    wr_en = 0; rd_en = 0; wdata = 0;
    #40 rst_n = 1;
    #20us wphase = 0;
    #10us;
    check(rempty && q.size() == 0, "drained");
    check(nfull > 0, "full reached");
    check(nread > 300, $sformatf("words read %0d", nread));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
