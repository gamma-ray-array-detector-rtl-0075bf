// tb_xfer_ctrl: the link master against a stand-in for the trigger FPGA end
// (a queue of data words, a parameter log). Checks that data words move in
// order into the local FIFO only while it has room, that parameter words are
// sent in order and take priority, that Enable is low in the turnaround cycle
// on each change of Wr/Rd, and that the lines are only driven in write mode.
module tb_xfer_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #15 clk = ~clk;
  logic wr_rd, enable, link_oe, link_empty, pbuf_empty, pbuf_rd, lf_full, lf_wr;
  logic [31:0] link_dout, link_din, pbuf_dout, lf_din;
  logic [31:0] kq[$], pq[$], lf[$], plog[$], dsent[$];
  logic wr_rd_q;
  int nturn = 0;

  xfer_ctrl dut (.clk, .rst_n, .wr_rd, .enable, .link_dout, .link_oe, .link_din, .link_empty,
                 .pbuf_empty, .pbuf_dout, .pbuf_rd, .lf_full, .lf_wr, .lf_din);

  assign link_empty = (kq.size() == 0);
  assign link_din   = link_empty ? 32'h0 : kq[0];
  assign pbuf_empty = (pq.size() == 0);
  assign pbuf_dout  = pbuf_empty ? 32'h0 : pq[0];
  assign lf_full    = (lf.size() >= 4);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    check(link_oe == wr_rd, "drive only in write mode");
    if (wr_rd != wr_rd_q) begin check(!enable, "turnaround cycle"); nturn++; end
    wr_rd_q <= wr_rd;
    if (enable && !wr_rd) begin
      check(lf_wr && !lf_full, "read only with room");
      lf.push_back(lf_din); void'(kq.pop_front());
    end
    if (enable && wr_rd) begin
      check(pbuf_rd, "pop parameter");
      plog.push_back(link_dout); void'(pq.pop_front());
    end
    if ($urandom_range(0, 3) == 0 && lf.size() > 0) begin
      check(lf[0] == dsent[0], "data order");
      void'(lf.pop_front()); void'(dsent.pop_front());
    end
  end

  initial begin
    wr_rd_q = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) begin automatic logic [31:0] d = $urandom; kq.push_back(d); dsent.push_back(d); end
    repeat (10) @(negedge clk);
    for (int i = 0; i < 3; i++) pq.push_back(32'h0100_0000 + i);
    repeat (200) @(negedge clk);
    check(kq.size() == 0 && pq.size() == 0, "all moved");
    check(plog.size() == 3 && plog[0] == 32'h0100_0000 && plog[2] == 32'h0100_0002, "parameters in order");
    check(nturn == 2, $sformatf("turnarounds %0d", nturn));
    check(wr_rd == 0, "back in read mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
