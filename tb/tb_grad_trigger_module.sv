// tb_grad_trigger_module: end-to-end test of the GRAD trigger board at its
// default sizes. Around the design: the MATE hit-latch model on the 64 hit
// lines, a DAQ stand-in that releases the holds after each accepted event, a
// GTS receiver on the serial L1 line, a host stand-in on the PCI local side
// (register writes, DMA sink, configuration-file source), the M25P80 model and
// the configuration-pin model of the trigger FPGA.
//
// Phases: (1) parameters over PCI -> link; (2) directed and random events with
// the paper's setting (N = 2, condition 2), then with each single condition
// enabled, checking decision, L1 word and the hit data delivered by DMA
// against a reference model; (3) gate mode; (4) a burst of events faster than
// the GTS link and the host can take, with DMA stalled, forcing GTS overruns
// and dropped event data; (5) writing a configuration file to flash and
// reconfiguring the trigger FPGA. Every mechanism is counted and a failure is
// recorded for any that never happened.
module tb_grad_trigger_module;
  import grad_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, clk_ext = 0, clk_pci = 0, rst_n = 0;
  always #5 clk = ~clk;            // 100 MHz
  always #12.5 clk_ext = ~clk_ext; // 40 MHz
  always #15 clk_pci = ~clk_pci;   // 33 MHz
  localparam int NB = 64;          // configuration file bytes

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
  fpga_ps_model #(.NBYTES(NB)) fpga (.nconfig, .nstatus, .conf_done, .dclk, .data0);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_acc = 0, n_rej = 0, n_hold = 0, n_release = 0, n_overrun = 0, n_drop = 0;
  int n_wrap = 0, n_gate_evt = 0, n_param = 0;
  int n_cond [5] = '{default: 0};
  bit compare = 1;

  always @(posedge clk) if (rst_n) begin
    n_acc += daq_trig; n_rej += daq_reject;
    n_overrun += gts_overrun; n_drop += data_dropped;
  end
  logic [31:0] hold_q = '0;
  always @(posedge clk) begin
    hold_q <= hold;
    if (rst_n && (hold & ~hold_q) != 0) n_hold++;
  end
  always @(posedge clk_pci) if (rst_n && dut.wr_rd && dut.enable) n_param++;

  // DAQ stand-in: read-out takes 40 cycles, then the holds are released
  always @(posedge clk) if (rst_n && daq_trig) begin
    repeat (40) @(negedge clk);
    hold_release = 1; @(negedge clk); hold_release = 0; n_release++;
  end

  // ---------------- reference model and expectations ----------------
  logic [11:0] l1_exp[$];
  logic [31:0] d_exp[$];
  int n_l1 = 0, n_words = 0;

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

  // GTS receiver
  initial forever begin
    @(posedge clk_ext);
    if (rst_n && gts_sd) begin
      logic [11:0] w;
      for (int i = 11; i >= 0; i--) begin @(posedge clk_ext); w[i] = gts_sd; end
      for (int b = 0; b < 5; b++) n_cond[b] += w[b];
      if (compare) begin
        check(n_l1 < l1_exp.size() && w == l1_exp[n_l1], $sformatf("L1 %0d: %h", n_l1, w));
      end
      n_l1++;
    end
  end

  // host DMA sink
  int ring = 8;
  always @(posedge clk_pci) if (rst_n && m_valid && m_ready) begin
    if (compare) begin
      check(n_words < d_exp.size() && m_data == d_exp[n_words], $sformatf("DMA word %0d: %h", n_words, m_data));
      check(m_addr == 32'h0010_0000 + 4 * (n_words % ring), $sformatf("DMA addr %h", m_addr));
    end
    if (n_words % ring == ring - 1) n_wrap++;
    n_words++;
  end
  bit host_stall = 0;
  always @(negedge clk_pci) m_ready <= !host_stall && $urandom_range(0, 3) != 0;

  // ---------------- stimulus helpers ----------------
  task automatic host_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk_pci); t_wr = 1; t_addr = a; t_data = d;
    @(negedge clk_pci); while (!t_ready) @(negedge clk_pci);
    t_wr = 0;
  endtask

  int cur_n = 2, cur_mask = 2;
  task automatic set_trigger(int n_mult, int mask);
    host_wr(8'h01, n_mult); host_wr(8'h02, mask);
    cur_n = n_mult; cur_mask = mask;
    repeat (20) @(negedge clk_pci);
  endtask

  // one event: its sections fire at random times within the first 15 cycles
  task automatic event_hits(logic [63:0] h);
    int n0 = n_acc + n_rej;
    logic [11:0] l = ref_l1(h, cur_n);
    int slot [64];
    int first = 64;
    for (int i = 0; i < 64; i++) begin
      slot[i] = $urandom_range(0, 15);
      if (h[i] && slot[i] < first) first = slot[i];
    end
    for (int i = 0; i < 64; i++) if (h[i] && slot[i] == first) slot[i] = 0;
    for (int c = 0; c <= 15; c++) begin
      @(negedge clk);
      for (int i = 0; i < 64; i++) fire[i] = h[i] && slot[i] == c;
    end
    @(negedge clk); fire = '0;
    wait (n_acc + n_rej == n0 + 1);
    if ((l[4:0] & 5'(cur_mask)) == 5'(cur_mask)) begin
      l1_exp.push_back(l); d_exp.push_back(h[31:0]); d_exp.push_back(h[63:32]);
    end
    repeat (60) @(negedge clk);
  endtask

  function automatic logic [63:0] rnd_hits();
    return {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
  endfunction

  initial begin
    int acc0;
    fire = '0; gate_in = 0; hold_release = 0; t_wr = 0; t_addr = 0; t_data = 0;
    ps_valid = 0; ps_data = 0; ps_last = 0;
    repeat (4) @(posedge clk_pci);
    rst_n = 1;
    // (1) parameters: window 20 cycles, hold 15 cycles, DMA ring of 8 words
    host_wr(8'h14, 32'h0010_0000); host_wr(8'h15, ring);
    host_wr(8'h00, 20); host_wr(8'h03, 15);
    set_trigger(2, 5'b00010);
    check(dut.u_kernel.par.window_time == 20 && dut.u_kernel.par.hold_time == 15, "parameters arrived");
    // (2) the paper's setting: N = 2, condition 2
    event_hits(64'h0000_0000_0000_0100);   // one section: rejected
    event_hits(64'h0000_0000_0000_0300);   // inner neighbours
    event_hits(64'h0000_0003_0000_0000);   // outer neighbours
    event_hits(64'h0000_0010_0000_0010);   // inner + outer of one module
    event_hits(64'h0000_0000_0001_0001);   // two far apart
    for (int i = 0; i < 6; i++) event_hits(rnd_hits());
    // each single condition
    for (int c = 0; c < 5; c++) begin
      set_trigger(3, 1 << c);
      event_hits(64'h0000_0000_0000_0006);
      event_hits(64'h0000_0006_0000_0000);
      event_hits(64'h0000_0004_0000_0004);
      event_hits(64'h0000_0000_0000_0001);
      event_hits(rnd_hits());
    end
    set_trigger(2, 5'b00010);
    // (3) gate mode: hits alone do not open an event, the gate does
    host_wr(8'h04, 1);
    repeat (20) @(negedge clk_pci);
    @(negedge clk); fire[9] = 1; fire[41] = 1;
    @(negedge clk); fire = '0;
    repeat (50) @(negedge clk);
    acc0 = n_acc + n_rej;
    check(!dut.u_kernel.u_align.busy, "no event before the gate");
    @(negedge clk); gate_in = 1;
    repeat (4) @(negedge clk); gate_in = 0;
    wait (n_acc + n_rej == acc0 + 1);
    n_gate_evt++;
    l1_exp.push_back(ref_l1(64'h0000_0200_0000_0200, 2));
    d_exp.push_back(32'h200); d_exp.push_back(32'h200);
    host_wr(8'h04, 0);
    repeat (300) @(negedge clk);
    // all expected results in by now
    repeat (2000) @(negedge clk);
    check(n_l1 == l1_exp.size(), $sformatf("L1 words %0d exp %0d", n_l1, l1_exp.size()));
    check(n_words == d_exp.size(), $sformatf("DMA words %0d exp %0d", n_words, d_exp.size()));
    // (4) burst: window 0, events every ~12 cycles, host stalled
    compare = 0;
    host_stall = 1;
    host_wr(8'h00, 0);
    repeat (20) @(negedge clk_pci);
    acc0 = n_acc;
    begin
      automatic int w0 = n_words, l0 = n_l1, o0 = n_overrun, d0 = n_drop;
      for (int i = 0; i < 40; i++) begin
        @(negedge clk); fire[3] = 1; fire[4] = 1;
        @(negedge clk); fire = '0;
        repeat (12) @(negedge clk);
      end
      repeat (200) @(negedge clk);
      host_stall = 0;
      repeat (3000) @(negedge clk);
      check(n_overrun > o0 && n_drop > d0, "overrun and drop happened");
      check((n_l1 - l0) + (n_overrun - o0) == n_acc - acc0,
            $sformatf("L1 frames %0d + overruns %0d vs accepts %0d", n_l1 - l0, n_overrun - o0, n_acc - acc0));
      check((n_words - w0) == 2 * ((n_acc - acc0) - (n_drop - d0)),
            $sformatf("DMA words %0d, accepts %0d, drops %0d", n_words - w0, n_acc - acc0, n_drop - d0));
    end
    // (5) configuration file -> flash -> trigger FPGA
    begin
      logic [7:0] file [NB];
      for (int i = 0; i < NB; i++) file[i] = 8'($urandom);
      host_wr(8'h10, 0);
      repeat (5) @(negedge clk_pci);
      wait (!flash_busy);
      for (int w = 0; w < NB / 4; w++) begin
        @(negedge clk_pci); ps_valid = 1; ps_last = (w == NB / 4 - 1);
        ps_data = {file[4*w+3], file[4*w+2], file[4*w+1], file[4*w]};
        @(posedge clk_pci); while (!ps_ready) @(posedge clk_pci);
        @(negedge clk_pci); ps_valid = 0; ps_last = 0;
      end
      repeat (50) @(negedge clk_pci);
      wait (!flash_busy);
      host_wr(8'h12, NB + 8);
      host_wr(8'h11, 0);
      wait (cfg_done || cfg_error);
      check(cfg_done && !cfg_error, "trigger FPGA configured");
      begin
        int bad = 0;
        for (int i = 0; i < NB; i++) if (fpga.rx[i] != file[i]) bad++;
        check(fpga.nrx == NB && bad == 0, $sformatf("configuration bytes %0d, %0d wrong", fpga.nrx, bad));
      end
    end
    // mechanism coverage
    $display("mechanisms: accept %0d reject %0d cond1..5 %0d %0d %0d %0d %0d hold %0d release %0d",
             n_acc, n_rej, n_cond[0], n_cond[1], n_cond[2], n_cond[3], n_cond[4], n_hold, n_release);
    $display("            gate %0d params %0d ring-wraps %0d gts-overrun %0d data-drop %0d configs %0d",
             n_gate_evt, n_param, n_wrap, n_overrun, n_drop, fpga.nconfigs);
    check(n_acc > 0, "accept"); check(n_rej > 0, "reject");
    for (int b = 0; b < 5; b++) check(n_cond[b] > 0, $sformatf("condition %0d seen", b + 1));
    check(n_hold > 0, "hold"); check(n_release > 0, "hold release");
    check(n_gate_evt > 0, "gate mode"); check(n_param > 0, "parameter write");
    check(n_wrap > 0, "DMA ring wrap"); check(n_overrun > 0, "GTS overrun");
    check(n_drop > 0, "event data dropped"); check(fpga.nconfigs > 0, "reconfiguration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
