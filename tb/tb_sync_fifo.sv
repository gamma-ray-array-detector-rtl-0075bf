// tb_sync_fifo: random writes and reads against a queue model; checks the
// head word, empty, full and count every cycle, including writes when full
// and reads when empty.
module tb_sync_fifo;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int D = 8;
  logic wr_en, rd_en, full, empty;
  logic [15:0] din, dout;
  logic [3:0] count;
  logic [15:0] q[$];

  sync_fifo #(.WIDTH(16), .DEPTH(D)) dut (.clk, .rst_n, .wr_en, .din, .full,
                                          .rd_en, .dout, .empty, .count);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == D), "full");
      check(count == 4'(q.size()), "count");
      if (q.size() > 0) check(dout == q[0], $sformatf("dout %h exp %h", dout, q[0]));
      // phases: mostly writing, mostly reading, mixed
      wr_en = ($urandom_range(0, 99) < ((i / 300) % 2 ? 30 : 70));
      rd_en = ($urandom_range(0, 99) < ((i / 300) % 2 ? 70 : 30));
      din = 16'($urandom);
      @(posedge clk);
      begin
        automatic int pre = q.size();
        if (rd_en && pre > 0) void'(q.pop_front());
        if (wr_en && pre < D) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
