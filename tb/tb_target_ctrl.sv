// tb_target_ctrl: PCI target writes to parameter addresses must come out of
// the parameter buffer in order and correctly packed; writes to 0x10/0x11
// must pulse the erase and reconfiguration orders once; 0x12, 0x14 and 0x15
// must load their registers; a full buffer must drop t_ready.
module tb_target_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #15 clk = ~clk;
  logic t_wr, t_ready, pbuf_rd, pbuf_empty, erase_req, reconfig_req;
  logic [7:0] t_addr;
  logic [31:0] t_data, pbuf_dout, dma_base;
  logic [23:0] ps_len;
  logic [15:0] dma_words;
  int nerase = 0, nreconf = 0;

  target_ctrl #(.PBUF_DEPTH(8)) dut (.clk, .rst_n, .t_wr, .t_addr, .t_data, .t_ready,
    .pbuf_rd, .pbuf_dout, .pbuf_empty, .erase_req, .reconfig_req, .ps_len, .dma_base, .dma_words);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask
  always @(posedge clk) if (rst_n) begin nerase += erase_req; nreconf += reconfig_req; end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); t_wr = 1; t_addr = a; t_data = d;
    @(negedge clk); t_wr = 0;
  endtask

  initial begin
    logic [31:0] exp[$];
    t_wr = 0; t_addr = 0; t_data = 0; pbuf_rd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5; i++) begin
      automatic logic [7:0] a = 8'(i);
      automatic logic [31:0] d = $urandom;
      wr(a, d);
      exp.push_back({a, 8'h00, d[15:0]});
    end
    wr(8'h12, 32'h0012_3456); wr(8'h14, 32'h8000_0000); wr(8'h15, 32'd64);
    wr(8'h10, 0);
    repeat (2) @(negedge clk);
    check(nerase == 1 && nreconf == 0, "0x10 -> erase only");
    wr(8'h11, 0);
    repeat (2) @(negedge clk);
    check(nerase == 1 && nreconf == 1, "0x11 -> reconfigure only");
    check(ps_len == 24'h12_3456 && dma_base == 32'h8000_0000 && dma_words == 64, "registers");
    while (!pbuf_empty) begin
      check(exp.size() > 0 && pbuf_dout == exp[0], $sformatf("pbuf %h", pbuf_dout));
      void'(exp.pop_front());
      @(negedge clk); pbuf_rd = 1;
      @(negedge clk); pbuf_rd = 0;
    end
    check(exp.size() == 0, "all parameters buffered");
    for (int i = 0; i < 8; i++) wr(8'h01, i);
    check(!t_ready, "full -> not ready");
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
