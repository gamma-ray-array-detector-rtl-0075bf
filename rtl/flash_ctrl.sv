// flash_ctrl: read-write controller for the M25P80 serial configuration flash.
//
// Three operations, each a sequence of SPI commands (SPI mode 0, SCK = clk/2,
// chip select raised for two cycles between commands):
//   erase   (erase_req pulse): WREN, BE (bulk erase), then RDSR repeated until
//           the write-in-progress bit clears. Resets the program address to 0.
//   program (bytes on pb_*): WREN, PP with the current address, then data
//           bytes as they arrive; the page program ends at a 256-byte page
//           boundary or after the byte marked pb_last, and is followed by RDSR
//           polling. Further bytes start the next page program.
//   read    (rd_start pulse): READ from address 0, then one byte per rb_valid/
//           rb_ready handshake until rd_stop.
// The command codes are those of the M25P80 data sheet (WREN 06h, BE C7h,
// PP 02h, READ 03h, RDSR 05h). The existence of the controller follows the
// paper; everything about its sequencing is this design's choice.
module flash_ctrl (
  input  logic       clk,
  input  logic       rst_n,
  // orders
  input  logic       erase_req,
  input  logic       rd_start,
  input  logic       rd_stop,
  output logic       busy,
  // program byte stream
  input  logic       pb_valid,
  input  logic [7:0] pb_data,
  input  logic       pb_last,
  output logic       pb_ready,
  // read byte stream
  output logic       rb_valid,
  output logic [7:0] rb_data,
  input  logic       rb_ready,
  // SPI pins
  output logic       cs_n,
  output logic       sck,
  output logic       mosi,
  input  logic       miso
);

  localparam logic [7:0] CMD_WREN = 8'h06, CMD_BE = 8'hC7, CMD_PP = 8'h02,
                         CMD_READ = 8'h03, CMD_RDSR = 8'h05;

  typedef enum logic [2:0] {S_IDLE, S_HDR, S_BODY, S_GAP} state_e;
  typedef enum logic [1:0] {B_NONE, B_POLL, B_PDATA, B_RDATA} body_e;
  typedef enum logic [1:0] {OP_ERASE, OP_PROG, OP_READ} op_e;

  state_e      state;
  body_e       body;
  op_e         op;
  logic [1:0]  step;
  logic [7:0]  hdr [4];
  logic [2:0]  nhdr, hidx;
  logic [23:0] addr;
  logic [1:0]  gap;
  logic        closing;

  // ---- SPI byte engine ----
  logic       sp_go, sp_busy, sp_done, sp_ph;
  logic [7:0] sp_tx, sp_sh, sp_rx;
  logic [2:0] sp_bit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_busy <= 1'b0; sp_done <= 1'b0; sp_ph <= 1'b0; sp_sh <= '0;
      sp_rx <= '0; sp_bit <= '0; sck <= 1'b0; mosi <= 1'b0;
    end else begin
      sp_done <= 1'b0;
      if (sp_go) begin
        sp_busy <= 1'b1; sp_sh <= sp_tx; sp_bit <= '0; sp_ph <= 1'b0;
        mosi <= sp_tx[7]; sck <= 1'b0;
      end else if (sp_busy) begin
        if (!sp_ph) begin
          sck <= 1'b1; sp_ph <= 1'b1;
        end else begin
          sck   <= 1'b0;
          sp_rx <= {sp_rx[6:0], miso};
          sp_ph <= 1'b0;
          if (sp_bit == 3'd7) begin
            sp_busy <= 1'b0; sp_done <= 1'b1;
          end else begin
            sp_bit <= sp_bit + 1'b1;
            sp_sh  <= sp_sh << 1;
            mosi   <= sp_sh[6];
          end
        end
      end
    end
  end

  // Byte just received by the engine (valid in the cycle sp_done is high).
  logic [7:0] rx_byte;
  assign rx_byte = sp_rx;

  // ---- command sequencer ----
  logic engine_free;
  assign engine_free = !sp_busy && !sp_done;
  assign pb_ready    = (state == S_BODY) && (body == B_PDATA) && engine_free
                       && !closing;
  assign busy        = (state != S_IDLE);

  always_comb begin
    sp_go = 1'b0;
    sp_tx = 8'h00;
    if (state == S_HDR && engine_free) begin
      sp_go = 1'b1;
      sp_tx = hdr[hidx[1:0]];
    end else if (state == S_BODY && engine_free && !closing) begin
      unique case (body)
        B_POLL:  begin sp_go = 1'b1; sp_tx = 8'h00; end
        B_PDATA: begin sp_go = pb_valid; sp_tx = pb_data; end
        B_RDATA: begin sp_go = !rb_valid && !rd_stop; sp_tx = 8'h00; end
        default: ;
      endcase
    end
  end

  task automatic start_cmd(input logic [7:0] c, input logic [23:0] a,
                           input logic [2:0] n, input body_e b);
    hdr[0] <= c; hdr[1] <= a[23:16]; hdr[2] <= a[15:8]; hdr[3] <= a[7:0];
    nhdr <= n; hidx <= '0; body <= b; closing <= 1'b0;
    cs_n <= 1'b0; state <= S_HDR;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; body <= B_NONE; op <= OP_ERASE; step <= '0;
      for (int i = 0; i < 4; i++) hdr[i] <= '0;
      nhdr <= '0; hidx <= '0; addr <= '0; gap <= '0; closing <= 1'b0;
      cs_n <= 1'b1; rb_valid <= 1'b0; rb_data <= '0;
    end else begin
      if (rb_valid && rb_ready) rb_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          step <= '0;
          if (erase_req) begin
            op <= OP_ERASE; addr <= '0;
            start_cmd(CMD_WREN, '0, 3'd1, B_NONE);
          end else if (rd_start) begin
            op <= OP_READ;
            start_cmd(CMD_READ, '0, 3'd4, B_RDATA);
          end else if (pb_valid) begin
            op <= OP_PROG;
            start_cmd(CMD_WREN, '0, 3'd1, B_NONE);
          end
        end
        S_HDR: if (sp_done) begin
          if (hidx + 1'b1 == nhdr) begin
            if (body == B_NONE) begin cs_n <= 1'b1; gap <= 2'd2; state <= S_GAP; end
            else state <= S_BODY;
          end
          hidx <= hidx + 1'b1;
        end
        S_BODY: begin
          unique case (body)
            B_POLL: if (sp_done && !rx_byte[0]) begin
              cs_n <= 1'b1; gap <= 2'd2; state <= S_GAP;
            end
            B_PDATA: begin
              if (pb_valid && pb_ready) begin
                addr <= addr + 1'b1;
                if (pb_last || addr[7:0] == 8'hFF) closing <= 1'b1;
              end
              if (sp_done && closing) begin
                cs_n <= 1'b1; gap <= 2'd2; state <= S_GAP;
              end
            end
            B_RDATA: begin
              if (sp_done) begin rb_valid <= 1'b1; rb_data <= rx_byte; end
              if (rd_stop) closing <= 1'b1;
              if (closing && engine_free) begin
                cs_n <= 1'b1; gap <= 2'd2; state <= S_GAP; rb_valid <= 1'b0;
              end
            end
            default: ;
          endcase
        end
        S_GAP: begin
          if (gap != '0) gap <= gap - 1'b1;
          else begin
            step <= step + 1'b1;
            state <= S_IDLE;
            unique case (op)
              OP_ERASE: if (step == 2'd0) start_cmd(CMD_BE, '0, 3'd1, B_NONE);
                        else if (step == 2'd1) start_cmd(CMD_RDSR, '0, 3'd1, B_POLL);
              OP_PROG:  if (step == 2'd0) start_cmd(CMD_PP, addr, 3'd4, B_PDATA);
                        else if (step == 2'd1) start_cmd(CMD_RDSR, '0, 3'd1, B_POLL);
              default: ;
            endcase
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
