// grad_pkg: constants, types and the trigger-condition function shared by the
// GRAD trigger module.
//
// The detector has 64 sections, each read out by one MATE front-end chip whose
// 16 scintillator discriminators are ORed into one fast hit line. Bits 0..31 of
// the 64-bit hit word are the inner ring, bits 32..63 the outer ring; section k
// and section k+32 share FEE module k. The sizes (64 sections, 32 FEE modules,
// 7-bit hit number, 5-bit trigger information, 12-bit L1 word) follow the
// paper; the bit numbering, the neighbour relations and the parameter register
// map are this design's own choices.
package grad_pkg;

  localparam int unsigned N_SECT   = 64;   // detector sections / hit lines
  localparam int unsigned N_RING   = 32;   // sections per ring
  localparam int unsigned N_FEE    = 32;   // FEE modules (2 MATEs each)
  localparam int unsigned HITNUM_W = 7;    // hit number 0..64
  localparam int unsigned INFO_W   = 5;    // one bit per trigger condition
  localparam int unsigned L1_W     = HITNUM_W + INFO_W;  // 12-bit L1 word
  localparam int unsigned LINK_W   = 32;   // inter-FPGA data lines
  localparam int unsigned WIN_W    = 8;    // window time register width
  localparam int unsigned HOLD_W   = 8;    // hold time register width

  // Trigger information bit positions (condition index of the paper minus 1).
  localparam int unsigned C_ANY       = 0; // hit number >= 1
  localparam int unsigned C_MULT      = 1; // hit number >= N
  localparam int unsigned C_IN_IN     = 2; // two adjacent inner sections
  localparam int unsigned C_OUT_OUT   = 3; // two adjacent outer sections
  localparam int unsigned C_IN_OUT    = 4; // inner section and its outer neighbour

  typedef logic [N_SECT-1:0]   hits_t;
  typedef logic [HITNUM_W-1:0] hitnum_t;
  typedef logic [INFO_W-1:0]   info_t;

  // L1 trigger word sent to the global trigger system.
  typedef struct packed {
    hitnum_t hitnum;
    info_t   info;
  } l1_word_t;

  // Parameter register addresses carried on the inter-FPGA link
  // (word = {addr[31:24], 8'h00, value[15:0]}).
  typedef enum logic [7:0] {
    PAR_WINDOW = 8'h00,
    PAR_MULT_N = 8'h01,
    PAR_COND   = 8'h02,
    PAR_HOLD   = 8'h03,
    PAR_MODE   = 8'h04
  } par_addr_e;

  // Trigger-side software parameters.
  typedef struct packed {
    logic [WIN_W-1:0]    window_time;
    hitnum_t             mult_n;
    info_t               cond_mask;
    logic [HOLD_W-1:0]   hold_time;
    logic                use_gate;
  } trig_params_t;

  // Number of set bits of a hit word.
  function automatic hitnum_t popcount64(input hits_t h);
    hitnum_t n = '0;
    for (int i = 0; i < N_SECT; i++) n += hitnum_t'(h[i]);
    return n;
  endfunction

  // Trigger information of Table 1 from the hit word, its hit number and N.
  // ring_wrap=1 also treats sections 31 and 0 of a ring as neighbours.
  function automatic info_t trig_info(input hits_t h, input hitnum_t n,
                                      input hitnum_t mult_n, input bit ring_wrap);
    info_t info;
    logic [N_RING-1:0] inner, outer, in_nb, out_nb;
    inner  = h[N_RING-1:0];
    outer  = h[N_SECT-1:N_RING];
    in_nb  = inner & {ring_wrap & inner[0], inner[N_RING-1:1]};
    out_nb = outer & {ring_wrap & outer[0], outer[N_RING-1:1]};
    info[C_ANY]     = (n != '0);
    info[C_MULT]    = (n >= mult_n);
    info[C_IN_IN]   = |in_nb;
    info[C_OUT_OUT] = |out_nb;
    info[C_IN_OUT]  = |(inner & outer);
    return info;
  endfunction

endpackage
