// m25p80_model: behavioural model of an M25P80-style SPI serial flash, for
// simulation only (not synthesizable). SPI mode 0. Supports WREN (06h),
// RDSR (05h, status = {6'b0, WEL, WIP}), READ (03h, address auto-increment),
// PP (02h, up to 256 bytes wrapping within the page, bits only go 1 -> 0)
// and BE (C7h, whole array to FFh). Program and erase set WIP for T_PP and
// T_BE nanoseconds, far shorter than the real part, to keep simulations short.
module m25p80_model #(
  parameter int unsigned SIZE = 1 << 20,
  parameter int unsigned T_PP = 2000,
  parameter int unsigned T_BE = 20000
) (
  input  logic cs_n,
  input  logic sck,
  input  logic mosi,
  output logic miso
);
  logic [7:0] mem [SIZE];
  logic [7:0] page [256];
  logic [7:0] sh, cmd, cur;
  logic [23:0] addr;
  int bitc, bytec, obit, npage;
  logic wel, wip, out_en, is_read;
  event ev_pp, ev_be;

  initial begin
    for (int i = 0; i < SIZE; i++) mem[i] = 8'hFF;
    wel = 0; wip = 0; miso = 0; out_en = 0; is_read = 0;
    bitc = 0; bytec = 0; obit = 0; npage = 0; cmd = 0; addr = 0; sh = 0; cur = 0;
  end

  always @(negedge cs_n) begin
    bitc = 0; bytec = 0; obit = 0; out_en = 0; npage = 0;
  end

  always @(posedge cs_n) begin
    if (cmd == 8'h06 && bytec == 1) wel = 1;
    if (cmd == 8'h02 && bytec >= 4 && wel && !wip) -> ev_pp;
    if (cmd == 8'hC7 && bytec == 1 && wel && !wip) -> ev_be;
    out_en = 0;
  end

  always @(ev_pp) begin
    wip = 1;
    for (int i = 0; i < npage && i < 256; i++) begin
      automatic logic [23:0] a = {addr[23:8], 8'(addr[7:0] + i)};
      mem[a % SIZE] = mem[a % SIZE] & page[i];
    end
    #(T_PP * 1ns);
    wip = 0; wel = 0;
  end

  always @(ev_be) begin
    wip = 1;
    for (int i = 0; i < SIZE; i++) mem[i] = 8'hFF;
    #(T_BE * 1ns);
    wip = 0; wel = 0;
  end

  always @(posedge sck) if (!cs_n) begin
    sh = {sh[6:0], mosi};
    bitc++;
    if (bitc == 8) begin
      bitc = 0;
      if (bytec == 0) cmd = sh;
      else if (bytec <= 3 && (cmd == 8'h02 || cmd == 8'h03)) addr = {addr[15:0], sh};
      else if (cmd == 8'h02 && npage < 256) begin page[npage] = sh; npage++; end
      bytec++;
      if (cmd == 8'h05 && bytec == 1) begin out_en = 1; is_read = 0; obit = 0; end
      if (cmd == 8'h03 && bytec == 4) begin out_en = 1; is_read = 1; obit = 0; end
    end
  end

  always @(negedge sck) if (!cs_n && out_en) begin
    if (obit == 0) begin
      if (is_read) begin cur = mem[addr % SIZE]; addr++; end
      else cur = {6'b0, wel, wip};
    end
    miso = cur[7 - obit];
    obit = (obit + 1) % 8;
  end
endmodule
