// tb_window_align: events with hits arriving at staggered times. A small MATE
// latch model in the bench holds each hit until mate_reset. Checks that one
// aligned word with all of the event's hits is written exactly
// window_time + 1 cycles after the first hit, that mate_reset lasts
// RST_CYCLES and coincides with the write, that hits arriving during the
// hold-off do not open a second event early, and that in gate mode events start
// on the gate edge only.
module tb_window_align;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [63:0] latch, hit_reg, fifo_din;
  logic gate, use_gate, fifo_we, mate_reset, busy;
  logic [7:0] window_time;
  int cyc = 0, we_cyc, nwe, rst_len;
  logic [63:0] we_data;

  window_align dut (.clk, .rst_n, .hit_reg, .gate, .use_gate, .window_time,
                    .fifo_we, .fifo_din, .mate_reset, .busy);

  // the bench feeds the latch directly as hit_reg (synchroniser not included)
  assign hit_reg = latch;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (fifo_we) begin we_cyc <= cyc; we_data <= fifo_din; nwe <= nwe + 1;
      check(mate_reset, "reset with write");
    end
    if (mate_reset) rst_len <= rst_len + 1;
  end

  task automatic hit(int bitn);
    @(negedge clk); if (!mate_reset) latch[bitn] = 1'b1;
  endtask

  always @(posedge clk) if (mate_reset) latch <= '0;

  task automatic run_event(int win, int t0_bits[$], int delays[$]);
    int t0;
    window_time = 8'(win);
    nwe = 0; rst_len = 0;
    @(negedge clk);
    t0 = cyc;           // cycle whose closing edge first sees the hit
    latch[t0_bits[0]] = 1'b1;
    for (int i = 1; i < t0_bits.size(); i++) begin
      repeat (delays[i]) @(negedge clk);
      latch[t0_bits[i]] = 1'b1;
    end
    wait (nwe == 1);
    @(negedge clk);
    // fifo_we rises after edge t0+win+1 and is recorded at the next edge
    check(we_cyc == t0 + win + 2, $sformatf("write seen at %0d exp %0d", we_cyc, t0 + win + 2));
    begin
      logic [63:0] exp = '0;
      foreach (t0_bits[i]) exp[t0_bits[i]] = 1'b1;
      check(we_data == exp, $sformatf("data %h exp %h", we_data, exp));
    end
    wait (!busy);
    check(rst_len == 4, $sformatf("reset length %0d", rst_len));
    check(nwe == 1, "exactly one write");
  endtask

  initial begin
    latch = '0; gate = 0; use_gate = 0; window_time = 5; nwe = 0; rst_len = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    check(!busy && !fifo_we, "idle");
    run_event(5, '{3, 40, 17}, '{0, 2, 3});
    run_event(0, '{63}, '{0});
    run_event(20, '{0, 1, 32, 33}, '{0, 5, 5, 9});
    // gate mode: hits alone do not start an event
    use_gate = 1; nwe = 0;
    @(negedge clk); latch[5] = 1;
    repeat (30) @(negedge clk);
    check(nwe == 0 && !busy, "no event without gate");
    window_time = 7;
    @(negedge clk); gate = 1;
    @(negedge clk); latch[37] = 1;
    repeat (3) @(negedge clk); gate = 0;
    wait (nwe == 1);
    check(we_data == (64'h1 << 5 | 64'h1 << 37), "gate-mode data");
    wait (!busy);
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
