// tb_hit_sync: drives random 64-bit hit patterns and checks that each appears
// on hit_reg exactly two clock edges later, and that reset clears the output.
module tb_hit_sync;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [63:0] hit_async, hit_reg, hist [3];
  always #5 clk = ~clk;

  hit_sync dut (.clk, .rst_n, .hit_async, .hit_reg);

  initial begin
    hit_async = '1;
    repeat (3) @(posedge clk);
    #1 if (hit_reg !== '0) failures++;
    checks++;
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      hit_async = {$urandom, $urandom};
      hist[2] = hist[1]; hist[1] = hist[0]; hist[0] = hit_async;
      @(posedge clk); #1;
      if (i >= 2) begin
        checks++;
        if (hit_reg !== hist[1]) begin
          failures++; $display("FAIL cycle %0d: %h exp %h", i, hit_reg, hist[1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
