// tb_kernel_trigger: the three-cycle trigger pipeline against a reference
// model in the bench (hit count with $countones, neighbour tests with loops,
// decision as "every enabled condition met"). Events enter back to back and
// with gaps; each result must appear exactly 3 cycles after its event with
// the right L1 word, hit word and accept/reject. Directed events cover each
// condition alone and the masks the paper discusses (N = 2, condition 2).
module tb_kernel_trigger;
  import grad_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, accept, reject;
  hits_t in_hits, out_hits;
  hitnum_t mult_n;
  info_t cond_mask;
  l1_word_t l1;
  int cyc = 0;

  typedef struct { int t; hits_t h; logic [11:0] l1; bit acc; } exp_t;
  exp_t expq[$];
  int nacc = 0, nrej = 0;

  kernel_trigger dut (.clk, .rst_n, .in_valid, .in_hits, .mult_n, .cond_mask,
                      .out_valid, .accept, .reject, .l1, .out_hits);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  function automatic exp_t model(hits_t h, int t);
    exp_t e;
    int n = $countones(h);
    logic [4:0] inf = '0;
    inf[0] = n >= 1;
    inf[1] = n >= int'(mult_n);
    for (int k = 0; k < 31; k++) begin
      if (h[k] && h[k+1]) inf[2] = 1;
      if (h[32+k] && h[33+k]) inf[3] = 1;
    end
    for (int k = 0; k < 32; k++) if (h[k] && h[32+k]) inf[4] = 1;
    e.t = t; e.h = h; e.l1 = {7'(n), inf};
    e.acc = 1;
    for (int b = 0; b < 5; b++) if (cond_mask[b] && !inf[b]) e.acc = 0;
    return e;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid) expq.push_back(model(in_hits, cyc));
    if (!rst_n) ;
    else if (out_valid) begin
      exp_t e;
      if (expq.size() == 0) check(0, "unexpected output");
      else begin
        e = expq.pop_front();
        check(cyc == e.t + 3, $sformatf("latency %0d", cyc - e.t));
        check(l1 == e.l1, $sformatf("l1 %h exp %h", l1, e.l1));
        check(out_hits == e.h, "hits");
        check(accept == e.acc && reject == !e.acc, $sformatf("decision acc=%0d exp %0d", accept, e.acc));
        if (accept) nacc++; else nrej++;
      end
    end else check(!accept && !reject, "decision without valid");
  end

  task automatic send(hits_t h);
    @(negedge clk); in_valid = 1; in_hits = h;
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_hits = '0; mult_n = 2; cond_mask = 5'b00010;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // paper's setting: N = 2, condition 2 only
    send(64'h1);                 // one hit: reject
    send(64'h3);                 // two: accept
    send(64'h1_0000_0001);       // inner/outer pair
    for (int m = 0; m < 32; m++) begin
      cond_mask = 5'(m);
      mult_n = 7'($urandom_range(1, 5));
      send(64'h1 << $urandom_range(0, 63));
      send(64'h3 << $urandom_range(0, 30));
      send(64'h3 << $urandom_range(32, 62));
      send(64'h1_0000_0001 << $urandom_range(0, 31));
      send({$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom});
      repeat (4) @(negedge clk);
    end
    // back-to-back events at full rate
    @(negedge clk);
    // (mask and N are static parameters: changed only between bursts)
    for (int b = 0; b < 10; b++) begin
      cond_mask = 5'($urandom);
      mult_n = 7'($urandom_range(0, 8));
      for (int i = 0; i < 40; i++) begin
        in_valid = 1;
        in_hits = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
        @(negedge clk);
      end
      in_valid = 0;
      repeat (4) @(negedge clk);
    end
    in_valid = 0;
    repeat (5) @(negedge clk);
    check(expq.size() == 0, "all events answered");
    check(nacc > 20 && nrej > 20, $sformatf("both outcomes seen acc=%0d rej=%0d", nacc, nrej));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
