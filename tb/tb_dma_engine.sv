// tb_dma_engine: trigger data words must reach the master port in order with
// host addresses base + 4*i wrapping at the ring size, under random m_ready
// back-pressure, and words_sent must count them. PS-file words must come out
// as bytes, least significant first, with pb_last on the final byte only.
module tb_dma_engine;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #15 clk = ~clk;
  logic lf_empty, lf_rd, m_valid, m_ready, ps_valid, ps_last, ps_ready, pb_valid, pb_last, pb_ready;
  logic [31:0] lf_dout, dma_base, m_addr, m_data, words_sent, ps_data;
  logic [15:0] dma_words;
  logic [7:0] pb_data;
  logic [31:0] lq[$], psq[$];
  logic [7:0] bq[$];
  int nout = 0, nbytes = 0, nlast = 0;

  dma_engine dut (.clk, .rst_n, .lf_empty, .lf_dout, .lf_rd, .dma_base, .dma_words,
    .m_valid, .m_addr, .m_data, .m_ready, .words_sent,
    .ps_valid, .ps_data, .ps_last, .ps_ready, .pb_valid, .pb_data, .pb_last, .pb_ready);

  assign lf_empty = (lq.size() == 0);
  assign lf_dout  = lf_empty ? 0 : lq[0];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      check(m_data == lq[0], "data order");
      check(m_addr == dma_base + 4 * (nout % 5), $sformatf("addr %h n %0d", m_addr, nout));
      void'(lq.pop_front()); nout++;
    end
    if (pb_valid && pb_ready) begin
      check(bq.size() > 0 && pb_data == bq[0], $sformatf("byte %h", pb_data));
      void'(bq.pop_front()); nbytes++;
      if (pb_last) begin nlast++; check(bq.size() == 0, "last on final byte"); end
    end
  end
  always @(negedge clk) begin m_ready <= $urandom_range(0, 2) != 0; pb_ready <= $urandom_range(0, 1); end

  initial begin
    ps_valid = 0; ps_data = 0; ps_last = 0; dma_base = 32'h1000; dma_words = 5;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 23; i++) lq.push_back($urandom);
    for (int i = 0; i < 6; i++) begin
      automatic logic [31:0] w = $urandom;
      for (int b = 0; b < 4; b++) bq.push_back(w[8*b +: 8]);
      @(negedge clk); ps_valid = 1; ps_data = w; ps_last = (i == 5);
      @(posedge clk); while (!ps_ready) @(posedge clk);
      @(negedge clk); ps_valid = 0;
    end
    repeat (100) @(negedge clk);
    check(nout == 23 && words_sent == 23, $sformatf("words %0d/%0d", nout, words_sent));
    check(nbytes == 24 && nlast == 1, $sformatf("bytes %0d last %0d", nbytes, nlast));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
