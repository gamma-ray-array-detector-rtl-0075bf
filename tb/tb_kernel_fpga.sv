// tb_kernel_fpga: the trigger FPGA on its own, with the MATE model on its hit
// inputs and a bench driver for the link. Parameters are written over the
// link; events with staggered hits are generated; each event's expected hit
// word, L1 word and decision come from a reference model in the bench. Checks
// daq_trig / daq_reject, the L1 word received on the serial GTS line, the two
// data words read back over the link for every accepted event, the hold line
// of each hit module, and gate mode.
module tb_kernel_fpga;
  import grad_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, clk_ext = 0, clk33 = 0, rst_n = 0;
  always #5 clk = ~clk;
  always #12.5 clk_ext = ~clk_ext;
  always #15 clk33 = ~clk33;

  logic [63:0] fire, hit_in;
  logic gate_in, mate_reset, daq_trig, daq_reject, gts_sd, wr_rd, enable, link_oe, link_empty;
  logic gts_overrun, data_dropped, hold_release;
  logic [31:0] hold, link_din, link_dout;
  logic [11:0] l1q[$], l1rx[$];
  logic [31:0] dq[$], drx[$];
  int nacc = 0, nrej = 0;

  kernel_fpga dut (.clk, .rst_n, .hit_in, .gate_in, .mate_reset, .hold, .hold_release, .daq_trig, .daq_reject,
    .clk_ext, .ext_rst_n(rst_n), .gts_sd, .clk33, .link_rst_n(rst_n), .wr_rd, .enable,
    .link_din, .link_dout, .link_oe, .link_empty, .gts_overrun, .data_dropped);
  mate_model mate (.fire, .reset(mate_reset), .hold, .hit(hit_in));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (daq_trig) nacc++;
    if (daq_reject) nrej++;
  end

  // GTS decoder
  initial forever begin
    @(posedge clk_ext);
    if (rst_n && gts_sd) begin
      logic [11:0] w;
      for (int i = 11; i >= 0; i--) begin @(posedge clk_ext); w[i] = gts_sd; end
      l1rx.push_back(w);
    end
  end

  // link master: parameter writes have priority, otherwise read data
  logic [31:0] pq[$];
  always @(negedge clk33) begin
    if (pq.size() > 0) begin wr_rd <= 1; enable <= 1; link_din <= pq.pop_front(); end
    else begin wr_rd <= 0; enable <= !link_empty && !wr_rd; end
  end
  always @(posedge clk33) if (rst_n && enable && !wr_rd && !link_empty) drx.push_back(link_dout);

  function automatic logic [11:0] ref_l1(logic [63:0] h, int n_mult);
    int n = $countones(h);
    logic [4:0] inf = '0;
    inf[0] = n >= 1; inf[1] = n >= n_mult;
    for (int k = 0; k < 31; k++) begin
      if (h[k] && h[k+1]) inf[2] = 1;
      if (h[32+k] && h[33+k]) inf[3] = 1;
    end
    for (int k = 0; k < 32; k++) if (h[k] && h[32+k]) inf[4] = 1;
    return {7'(n), inf};
  endfunction

  // fire the event's sections at staggered times, all within the window
  task automatic event_hits(logic [63:0] h, int mask, int n_mult, int maxdly);
    logic [11:0] l;
    int n0 = nacc + nrej;
    l = ref_l1(h, n_mult);
    // each hit fires in a random slot of the first maxdly cycles of the event
    begin
      int slot [64];
      int first = 64;
      for (int i = 0; i < 64; i++) begin
        slot[i] = $urandom_range(0, maxdly);
        if (h[i] && slot[i] < first) first = slot[i];
      end
      for (int i = 0; i < 64; i++) if (h[i] && slot[i] == first) slot[i] = 0;
      for (int c = 0; c <= maxdly; c++) begin
        @(negedge clk);
        for (int i = 0; i < 64; i++) fire[i] = h[i] && slot[i] == c;
      end
      @(negedge clk); fire = '0;
    end
    wait (nacc + nrej == n0 + 1);
    fire = '0;
    if ((l[4:0] & 5'(mask)) == 5'(mask)) begin
      l1q.push_back(l); dq.push_back(h[31:0]); dq.push_back(h[63:32]);
      repeat (20) @(negedge clk);
      for (int k = 0; k < 32; k++) if (h[k] || h[k+32]) check(hold[k], $sformatf("hold %0d after accept", k));
      @(negedge clk); hold_release = 1; @(negedge clk); hold_release = 0;
    end
    repeat (30) @(negedge clk);
  endtask

  initial begin
    fire = '0; gate_in = 0; hold_release = 0; wr_rd = 0; enable = 0; link_din = 0;
    repeat (3) @(posedge clk33);
    rst_n = 1;
    // window 20 cycles, N = 3, conditions 1+2, hold 15
    pq.push_back({8'h00, 8'h00, 16'd20});
    pq.push_back({8'h01, 8'h00, 16'd3});
    pq.push_back({8'h02, 8'h00, 16'h03});
    pq.push_back({8'h03, 8'h00, 16'd15});
    repeat (20) @(negedge clk33);
    // hold line of module 5 rises 16 cycles after its hit is registered
    begin
      int t0, t1;
      @(negedge clk); fire[37] = 1; t0 = $time;
      @(negedge clk); fire[37] = 0;
      wait (hold[5]); t1 = $time;
      check((t1 - t0) / 10 >= 16 && (t1 - t0) / 10 <= 19, $sformatf("hold delay %0d cycles", (t1 - t0) / 10));
      check(hold == 32'h20, "only module 5 held");
      wait (nacc + nrej == 1);
      fire = '0;
      check(nrej == 1, "single hit rejected with N = 3");
      repeat (3) @(negedge clk);
      check(hold == '0, "hold cleared by the reject");
    end
    event_hits(64'h0000_0007_0000_0000, 3, 3, 3);
    event_hits(64'h8000_0000_0000_0003, 3, 3, 3);
    event_hits(64'h0000_0000_0000_0003, 3, 3, 3);
    for (int i = 0; i < 15; i++)
      event_hits({$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom}, 3, 3, 15);
    // gate mode
    pq.push_back({8'h04, 8'h00, 16'd1});
    repeat (10) @(negedge clk33);
    @(negedge clk); fire[1] = 1; fire[2] = 1; fire[33] = 1;
    @(negedge clk); fire = '0;
    repeat (40) @(negedge clk);
    check(nacc + nrej == 19, "no event before the gate");
    @(negedge clk); gate_in = 1;
    repeat (5) @(negedge clk); gate_in = 0;
    wait (nacc + nrej == 20);
    fire = '0;
    l1q.push_back(ref_l1(64'h2_0000_0006, 3)); dq.push_back(32'h6); dq.push_back(32'h2);
    repeat (300) @(negedge clk);
    check(l1rx.size() == l1q.size(), $sformatf("L1 words %0d exp %0d", l1rx.size(), l1q.size()));
    for (int i = 0; i < l1q.size() && i < l1rx.size(); i++)
      check(l1rx[i] == l1q[i], $sformatf("L1 %0d: %h exp %h", i, l1rx[i], l1q[i]));
    check(drx.size() == dq.size(), $sformatf("data words %0d exp %0d", drx.size(), dq.size()));
    for (int i = 0; i < dq.size() && i < drx.size(); i++)
      check(drx[i] == dq[i], $sformatf("data %0d: %h exp %h", i, drx[i], dq[i]));
    check(nacc >= 3 && nrej >= 2, $sformatf("acc %0d rej %0d", nacc, nrej));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
