// tb_link_slave: write mode must load each parameter register from its
// address and ignore unknown addresses; read mode must drive the FIFO head
// on the lines, mirror Empty and pop exactly on Enable. Also checks the reset
// values (N = 2, condition 2 enabled).
module tb_link_slave;
  import grad_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #15 clk = ~clk;
  logic wr_rd, enable, data_oe, empty, fifo_rd_en, fifo_empty;
  logic [31:0] data_in, data_out, fifo_rdata;
  trig_params_t params;
  logic [31:0] q[$];
  int npop = 0;

  link_slave dut (.clk33(clk), .rst_n, .wr_rd, .enable, .data_in, .data_out, .data_oe,
                  .empty, .fifo_rd_en, .fifo_rdata, .fifo_empty, .params);

  // FIFO stand-in
  assign fifo_empty = (q.size() == 0);
  assign fifo_rdata = fifo_empty ? 32'hDEAD_BEEF : q[0];
  always @(posedge clk) if (fifo_rd_en) begin void'(q.pop_front()); npop++; end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic wpar(logic [7:0] a, logic [15:0] v);
    @(negedge clk); wr_rd = 1; enable = 1; data_in = {a, 8'h00, v};
    @(negedge clk); enable = 0;
  endtask

  initial begin
    wr_rd = 0; enable = 0; data_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(params.mult_n == 2 && params.cond_mask == 5'b00010 && !params.use_gate, "reset values");
    wpar(8'h00, 16'd33);  wpar(8'h01, 16'd5);  wpar(8'h02, 16'h15);
    wpar(8'h03, 16'd77);  wpar(8'h04, 16'd1);  wpar(8'h09, 16'hFFFF);
    @(negedge clk);
    check(params.window_time == 33, "window");
    check(params.mult_n == 5, "N");
    check(params.cond_mask == 5'h15, "mask");
    check(params.hold_time == 77, "hold");
    check(params.use_gate == 1, "mode");
    check(data_oe == 0, "write mode: lines not driven");
    // parameters need Enable
    @(negedge clk); wr_rd = 1; enable = 0; data_in = {8'h01, 8'h00, 16'd9};
    @(negedge clk); check(params.mult_n == 5, "no write without enable");
    // read mode
    for (int i = 0; i < 6; i++) q.push_back($urandom);
    @(negedge clk); wr_rd = 0; enable = 0;
    @(negedge clk);
    check(data_oe && !empty && data_out == q[0], "read mode drives head");
    for (int i = 0; i < 12; i++) begin
      logic [31:0] head;
      @(negedge clk);
      head = fifo_empty ? 0 : q[0];
      check(empty == fifo_empty, "empty mirrors");
      if (!fifo_empty) check(data_out == head, "data");
      enable = (i % 3 != 1);
    end
    @(negedge clk); enable = 0;
    @(negedge clk);
    check(npop == 6 && empty, $sformatf("pops %0d", npop));
    // enable in write mode never pops
    q.push_back(32'h5);
    wpar(8'h02, 16'h3);
    check(npop == 6, "no pop in write mode");
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
