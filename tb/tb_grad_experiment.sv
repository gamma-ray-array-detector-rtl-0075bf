// tb_grad_experiment: runs the board in the configuration of the in-beam
// gamma-ray test: 16 FEE modules connected (inner sections 0..15 and the outer
// sections 32..47 behind them; the other 32 hit lines stay 0), events opened by
// the start-detector gate, N = 2.
//
// Stimulus: each event is one gamma ray entering inner section k. It may leak
// into the outer section behind it, into an inner neighbour or into an outer
// neighbour, and every connected channel may add an uncorrelated noise hit.
// The leak probabilities are chosen so that the fractions of events meeting
// each condition come out near those of the reported event-rate table
// (729/692/136/158/689 Hz for conditions 1..5); they are stimulus, not
// design. Hits arrive 0..6 cycles after the gate, inside the 10-cycle window.
//
// Checked: every decision and every L1 word (read from the serial GTS line)
// against a reference model, the count of events meeting each condition, the
// hit data delivered to the host, a constant gate-to-decision delay, and a
// delay of 4 clocks (40 ns, under the 50 ns budget) from the aligned
// event-FIFO write to the decision. The run is done twice: with condition 2
// only (the setting used in the experiment), then with condition 5 only.
// Finally the relations the rate table shows are checked on the counts:
// cond1 >= cond2 >= cond5, and cond5 above cond3 and cond4.
module tb_grad_experiment;
  import grad_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, clk_ext = 0, clk_pci = 0, rst_n = 0;
  always #5 clk = ~clk;            // 100 MHz
  always #12.5 clk_ext = ~clk_ext; // 40 MHz
  always #15 clk_pci = ~clk_pci;   // 33 MHz
  localparam int NEVT = 300;       // events per run

  logic [63:0] fire, hit_in;
  logic gate_in, mate_reset, hold_release, daq_trig, daq_reject, gts_sd, gts_overrun, data_dropped;
  logic [31:0] hold;
  logic t_wr, t_ready, m_valid, m_ready, ps_valid, ps_last, ps_ready;
  logic [7:0] t_addr;
  logic [31:0] t_data, m_addr, m_data, words_sent, ps_data;
  logic f_cs_n, f_sck, f_mosi, f_miso, nconfig, nstatus, conf_done, dclk, data0;
  logic flash_busy, cfg_busy, cfg_done, cfg_error;

  grad_trigger_module dut (.clk, .clk_ext, .clk_pci, .rst_n, .hit_in, .gate_in, .mate_reset,
    .hold, .hold_release, .daq_trig, .daq_reject, .gts_sd, .gts_overrun, .data_dropped,
    .t_wr, .t_addr, .t_data, .t_ready, .m_valid, .m_addr, .m_data, .m_ready, .words_sent,
    .ps_valid, .ps_data, .ps_last, .ps_ready, .f_cs_n, .f_sck, .f_mosi, .f_miso,
    .nconfig, .nstatus, .conf_done, .dclk, .data0, .flash_busy, .cfg_busy, .cfg_done, .cfg_error);
  mate_model mate (.fire, .reset(mate_reset), .hold, .hit(hit_in));
  m25p80_model flash (.cs_n(f_cs_n), .sck(f_sck), .mosi(f_mosi), .miso(f_miso));
  fpga_ps_model #(.NBYTES(16)) fpga (.nconfig, .nstatus, .conf_done, .dclk, .data0);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------- reference model ----------------
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

  // ---------------- observers ----------------
  int cyc = 0;
  always @(posedge clk) cyc++;
  int n_acc = 0, n_rej = 0;
  always @(posedge clk) if (rst_n) begin n_acc += daq_trig; n_rej += daq_reject; end

  // pipeline delay: aligned event-FIFO write -> decision
  int t_we = -1, pipe_lat = -1, pipe_bad = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_kernel.evt_we) t_we = cyc;
    if ((daq_trig || daq_reject) && t_we >= 0) begin
      if (pipe_lat < 0) pipe_lat = cyc - t_we;
      else if (cyc - t_we != pipe_lat) pipe_bad++;
    end
  end

  // DAQ stand-in: releases the holds some time after each accepted event
  always @(posedge clk) if (rst_n && daq_trig) begin
    repeat (20) @(negedge clk);
    hold_release = 1; @(negedge clk); hold_release = 0;
  end

  // GTS receiver
  logic [11:0] l1_exp[$];
  int n_l1 = 0;
  initial forever begin
    @(posedge clk_ext);
    if (rst_n && gts_sd) begin
      logic [11:0] w;
      for (int i = 11; i >= 0; i--) begin @(posedge clk_ext); w[i] = gts_sd; end
      check(n_l1 < l1_exp.size() && w == l1_exp[n_l1], $sformatf("L1 %0d: %h", n_l1, w));
      n_l1++;
    end
  end

  // host DMA sink
  logic [31:0] d_exp[$];
  int n_words = 0;
  always @(posedge clk_pci) if (rst_n && m_valid && m_ready) begin
    check(n_words < d_exp.size() && m_data == d_exp[n_words], $sformatf("DMA word %0d: %h", n_words, m_data));
    n_words++;
  end
  assign m_ready = 1'b1;

  task automatic host_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk_pci); t_wr = 1; t_addr = a; t_data = d;
    @(negedge clk_pci); while (!t_ready) @(negedge clk_pci);
    t_wr = 0;
  endtask

  // ---------------- gamma-ray event model ----------------
  function automatic bit chance(int permille);
    return $urandom_range(0, 999) < permille;
  endfunction

  function automatic logic [63:0] gamma_event();
    logic [63:0] h = '0;
    int k = $urandom_range(0, 15);
    h[k] = 1'b1;
    if (chance(930)) h[32+k] = 1'b1;                          // outer section behind
    if (chance(190)) h[(k == 15 || (k > 0 && chance(500))) ? k - 1 : k + 1] = 1'b1;
    if (chance(220)) h[32 + ((k == 15 || (k > 0 && chance(500))) ? k - 1 : k + 1)] = 1'b1;
    for (int c = 0; c < 16; c++) begin                         // channel noise
      if (chance(3)) h[c] = 1'b1;
      if (chance(3)) h[32+c] = 1'b1;
    end
    return h;
  endfunction

  int gate_lat = -1, gate_bad = 0;
  task automatic run_event(logic [63:0] h, int mask, ref int n_cond[5]);
    int n0 = n_acc + n_rej, acc0 = n_acc;
    logic [11:0] l = ref_l1(h, 2);
    int slot[64];
    int t_gate;
    bit acc_exp = (l[4:0] & 5'(mask)) == 5'(mask);
    for (int i = 0; i < 64; i++) slot[i] = $urandom_range(0, 6);
    @(negedge clk); gate_in = 1; t_gate = cyc;
    for (int c = 0; c <= 6; c++) begin
      if (c == 3) gate_in = 0;
      for (int i = 0; i < 64; i++) fire[i] = h[i] && slot[i] == c;
      @(negedge clk);
    end
    fire = '0;
    while (n_acc + n_rej == n0) @(negedge clk);
    check(n_acc + n_rej == n0 + 1, "one decision per event");
    check((n_acc - acc0) == int'(acc_exp), $sformatf("decision for %h", h));
    if (gate_lat < 0) gate_lat = cyc - t_gate;
    else if (cyc - t_gate != gate_lat) gate_bad++;
    for (int b = 0; b < 5; b++) n_cond[b] += l[b];
    if (acc_exp) begin
      l1_exp.push_back(l); d_exp.push_back(h[31:0]); d_exp.push_back(h[63:32]);
    end
    repeat (50) @(negedge clk);
  endtask

  int cond_a[5] = '{default: 0}, cond_b[5] = '{default: 0};
  int acc_a, acc_b;

  initial begin
    int a0;
    fire = '0; gate_in = 0; hold_release = 0; t_wr = 0; t_addr = 0; t_data = 0;
    ps_valid = 0; ps_data = 0; ps_last = 0;
    repeat (4) @(posedge clk_pci);
    rst_n = 1;
    host_wr(8'h14, 32'h0020_0000); host_wr(8'h15, 1024);
    host_wr(8'h00, 10); host_wr(8'h01, 2); host_wr(8'h02, 5'b00010);
    host_wr(8'h03, 12); host_wr(8'h04, 1);
    repeat (20) @(negedge clk_pci);
    // run A: condition 2 only
    a0 = n_acc;
    for (int e = 0; e < NEVT; e++) run_event(gamma_event(), 5'b00010, cond_a);
    acc_a = n_acc - a0;
    check(acc_a == cond_a[1], $sformatf("run A accepted %0d, expected %0d", acc_a, cond_a[1]));
    // run B: condition 5 only
    host_wr(8'h02, 5'b10000);
    repeat (20) @(negedge clk_pci);
    a0 = n_acc;
    for (int e = 0; e < NEVT; e++) run_event(gamma_event(), 5'b10000, cond_b);
    acc_b = n_acc - a0;
    check(acc_b == cond_b[4], $sformatf("run B accepted %0d, expected %0d", acc_b, cond_b[4]));
    repeat (2000) @(negedge clk);
    check(n_l1 == l1_exp.size(), $sformatf("L1 words %0d, expected %0d", n_l1, l1_exp.size()));
    check(n_words == d_exp.size(), $sformatf("DMA words %0d, expected %0d", n_words, d_exp.size()));
    check(gts_overrun === 1'b0 && data_dropped === 1'b0, "no loss at this event rate");
    // timing
    $display("gate-to-decision %0d cycles, event-FIFO write to decision %0d cycles", gate_lat, pipe_lat);
    check(gate_bad == 0, "constant gate-to-decision delay");
    check(pipe_bad == 0 && pipe_lat == 4, "4-cycle (40 ns) decision delay");
    // the pattern of the rate table, summed over both runs
    for (int b = 0; b < 5; b++) cond_a[b] += cond_b[b];
    $display("events %0d: cond1 %0d cond2 %0d cond3 %0d cond4 %0d cond5 %0d",
             2 * NEVT, cond_a[0], cond_a[1], cond_a[2], cond_a[3], cond_a[4]);
    check(cond_a[0] == 2 * NEVT, "every event meets condition 1");
    check(cond_a[0] >= cond_a[1] && cond_a[1] >= cond_a[4], "cond1 >= cond2 >= cond5");
    check(cond_a[4] > cond_a[2] && cond_a[4] > cond_a[3], "cond5 above cond3 and cond4");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
