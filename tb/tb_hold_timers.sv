// tb_hold_timers: hits on inner and outer sections of chosen FEE modules at
// chosen times; checks that each module's hold rises exactly hold_time + 1
// cycles after its first hit, that both sections of a module share one timer,
// that other modules stay low, and that clear drops all holds.
module tb_hold_timers;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [63:0] hit_reg;
  logic [7:0] hold_time;
  logic clear;
  logic [31:0] hold;
  int cyc = 0;
  int rise [32];

  hold_timers dut (.clk, .rst_n, .hit_reg, .hold_time, .clear, .hold);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  logic [31:0] hold_q;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    hold_q <= hold;
    for (int k = 0; k < 32; k++) if (hold[k] && !hold_q[k]) rise[k] = cyc;
  end

  task automatic trial(int ht, int m1, bit outer1, int m2, int dly);
    int t0;
    hold_time = 8'(ht);
    for (int k = 0; k < 32; k++) rise[k] = -1;
    @(negedge clk);
    t0 = cyc;
    hit_reg[outer1 ? m1 + 32 : m1] = 1;
    repeat (2) @(negedge clk);
    hit_reg[m1 + 32] = 1;  // second section of the same module: no restart
    repeat (dly - 2) @(negedge clk);
    hit_reg[m2] = 1;
    repeat (ht + dly + 5) @(negedge clk);
    // rise recorded one edge after the edge that set hold
    check(rise[m1] == t0 + ht + 2, $sformatf("m%0d rise %0d exp %0d", m1, rise[m1], t0 + ht + 2));
    check(rise[m2] == t0 + dly + ht + 2, $sformatf("m%0d rise %0d exp %0d", m2, rise[m2], t0 + dly + ht + 2));
    for (int k = 0; k < 32; k++)
      if (k != m1 && k != m2) check(!hold[k], $sformatf("module %0d idle", k));
    @(negedge clk); clear = 1; hit_reg = '0;
    @(negedge clk); clear = 0;
    @(negedge clk);
    check(hold == '0, "clear drops holds");
  endtask

  initial begin
    hit_reg = '0; hold_time = 10; clear = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    trial(10, 3, 0, 20, 4);
    trial(0, 31, 1, 0, 3);
    trial(37, 7, 1, 8, 10);
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
