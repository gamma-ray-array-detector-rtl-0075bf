// tb_grad_pkg: checks the package's hit-count and trigger-condition functions
// against an independent reference written with plain loops, over directed
// patterns (single hits, ring neighbours, ring ends, inner/outer pairs) and
// random words, including the ring_wrap option.
module tb_grad_pkg;
  import grad_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic info_t ref_info(hits_t h, int n, int mult, bit wrap);
    info_t r = '0;
    r[0] = n >= 1;
    r[1] = n >= mult;
    for (int k = 0; k < 32; k++) begin
      int nb = k + 1;
      if (nb == 32) begin if (!wrap) continue; nb = 0; end
      if (h[k] && h[nb]) r[2] = 1;
      if (h[32+k] && h[32+nb]) r[3] = 1;
    end
    for (int k = 0; k < 32; k++) if (h[k] && h[32+k]) r[4] = 1;
    return r;
  endfunction

  task automatic try(hits_t h, int mult, bit wrap);
    int n = 0;
    for (int i = 0; i < 64; i++) n += h[i];
    check(popcount64(h) == hitnum_t'(n), $sformatf("popcount %h", h));
    check(trig_info(h, hitnum_t'(n), hitnum_t'(mult), wrap) == ref_info(h, n, mult, wrap),
          $sformatf("info %h mult %0d wrap %0d: got %b exp %b", h,
                    mult, wrap, trig_info(h, hitnum_t'(n), hitnum_t'(mult), wrap),
                    ref_info(h, n, mult, wrap)));
  endtask

  initial begin
    hits_t h;
    try('0, 2, 0);
    try('1, 64, 0);
    try(64'h1, 2, 0);
    try(64'h3, 2, 0);                       // inner 0,1 neighbours
    try(64'h3 << 32, 2, 0);                 // outer 0,1 neighbours
    try(64'h1_0000_0001, 2, 0);             // inner 0 + outer 0
    try(64'h8000_0001, 2, 0);               // inner 31 and 0: only with wrap
    try(64'h8000_0001, 2, 1);
    try(64'h5, 2, 0);                       // not neighbours
    try(64'h2_0000_0001, 1, 0);             // inner 0 + outer 1: not a pair
    check(trig_info(64'h3, 7'd2, 7'd2, 0) == 5'b00111, "directed 0x3");
    check(trig_info(64'h1_0000_0001, 7'd2, 7'd2, 0) == 5'b10011, "directed in-out");
    check(trig_info(64'h8000_0001, 7'd2, 7'd2, 1) == 5'b00111, "directed wrap");
    for (int i = 0; i < 400; i++) begin
      h = {$urandom, $urandom};
      if (i % 2) h &= {$urandom, $urandom} & {$urandom, $urandom};
      if (i % 4 == 3) h &= {$urandom, $urandom} & {$urandom, $urandom};
      try(h, $urandom_range(0, 64), i % 5 == 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
