// tb_event_writer: accepted events must appear as two FIFO writes, low half
// then high half, in the two cycles after accept; an event is dropped whole
// when fewer than two entries are free or when it arrives while the previous
// event's second word is being written.
module tb_event_writer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic accept, wr_en, dropped;
  logic [63:0] hits;
  logic [4:0] wfree;
  logic [31:0] wdata;
  logic [31:0] got[$];
  int ndrop = 0;

  event_writer #(.FREE_W(5)) dut (.clk, .rst_n, .accept, .hits, .wfree, .wr_en, .wdata, .dropped);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (wr_en) got.push_back(wdata);
    if (dropped) ndrop++;
  end

  task automatic ev(logic [63:0] h, int free, bit stored, int gap);
    got.delete(); ndrop = 0;
    @(negedge clk); accept = 1; hits = h; wfree = 5'(free);
    @(negedge clk); accept = 0;
    repeat (gap) @(negedge clk);
    if (stored) begin
      check(got.size() == 2, $sformatf("writes %0d", got.size()));
      if (got.size() == 2) check(got[0] == h[31:0] && got[1] == h[63:32], "word order");
      check(ndrop == 0, "no drop");
    end else begin
      check(got.size() == 0 && ndrop == 1, "dropped");
    end
  endtask

  initial begin
    accept = 0; hits = 0; wfree = 16;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) ev({$urandom, $urandom}, $urandom_range(2, 16), 1, 3);
    ev(64'h1234_5678_9abc_def0, 1, 0, 3);
    ev(64'h1, 0, 0, 3);
    // two accepts one cycle apart: the second is dropped
    got.delete(); ndrop = 0;
    @(negedge clk); accept = 1; hits = 64'hAAAA_BBBB_CCCC_DDDD; wfree = 16;
    @(negedge clk); hits = 64'h1111_2222_3333_4444;
    @(negedge clk); accept = 0;
    repeat (3) @(negedge clk);
    check(got.size() == 2 && got[0] == 32'hCCCC_DDDD && got[1] == 32'hAAAA_BBBB && ndrop == 1,
          "overlap drop");
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
