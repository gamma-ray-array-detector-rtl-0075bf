// tb_flash_ctrl: the flash controller against the M25P80 model. Erases the
// flash, programs a 300-byte stream (crossing the first page boundary, with
// random source stalls), then reads 300 bytes back with random consumer
// stalls. Checks the model's memory and the read stream against the data, and
// that a page program never crosses a page (bytes 256.. land at 256..).
module tb_flash_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #15 clk = ~clk;
  logic erase_req, rd_start, rd_stop, busy, pb_valid, pb_last, pb_ready, rb_valid, rb_ready;
  logic [7:0] pb_data, rb_data;
  logic cs_n, sck, mosi, miso;
  localparam int N = 300;
  logic [7:0] data [N];
  int np = 0, nr = 0;

  flash_ctrl dut (.clk, .rst_n, .erase_req, .rd_start, .rd_stop, .busy,
    .pb_valid, .pb_data, .pb_last, .pb_ready, .rb_valid, .rb_data, .rb_ready,
    .cs_n, .sck, .mosi, .miso);
  m25p80_model #(.SIZE(4096)) flash (.cs_n, .sck, .mosi, .miso);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (pb_valid && pb_ready) np++;
    if (rb_valid && rb_ready) begin
      if (nr < N) check(rb_data == data[nr], $sformatf("read %0d: %h exp %h", nr, rb_data, data[nr]));
      nr++;
    end
  end

  initial begin
    erase_req = 0; rd_start = 0; rd_stop = 0; pb_valid = 0; pb_last = 0; pb_data = 0; rb_ready = 0;
    for (int i = 0; i < N; i++) data[i] = 8'($urandom);
    for (int i = 0; i < 4096; i++) flash.mem[i] = 8'h00;   // erase must restore FFh
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); erase_req = 1; @(negedge clk); erase_req = 0;
    @(negedge clk); wait (!busy);
    check(flash.mem[0] == 8'hFF && flash.mem[4095] == 8'hFF, "erased");
    // program stream
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      pb_valid = 1; pb_data = data[i]; pb_last = (i == N - 1);
      @(posedge clk); while (!pb_ready) @(posedge clk);
      @(negedge clk); pb_valid = 0; pb_last = 0;
    end
    wait (!busy);
    #5us;
    wait (!busy);
    check(np == N, $sformatf("bytes taken %0d", np));
    begin
      int bad = 0;
      for (int i = 0; i < N; i++) if (flash.mem[i] != data[i]) bad++;
      check(bad == 0, $sformatf("%0d bytes differ in flash", bad));
      check(flash.mem[N] == 8'hFF, "nothing beyond the stream");
    end
    // read back
    @(negedge clk); rd_start = 1; @(negedge clk); rd_start = 0;
    while (nr < N) begin
      @(negedge clk); rb_ready = $urandom_range(0, 1);
    end
    @(negedge clk); rb_ready = 0; rd_stop = 1; @(negedge clk); rd_stop = 0;
    wait (!busy);
    check(cs_n, "chip deselected");
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
