// cts_pkg: constants, types and helper functions shared by the Central
// Trigger System (CTS) RTL.
//
// The CTS runs on the LHC bunch-crossing (BC) clock, one cycle per BC.
// Sizes follow the trigger system of the ALICE experiment for LHC Run 3:
// 48 trigger inputs, 64 trigger classes, 18 clusters, 18 detectors (one LTU
// each), 441 readout units (CRUs), 128 HeartBeat frames per Time Frame.
// An orbit lasts about 88.92 us, i.e. 3564 BCs of 24.95 ns.
//
// The 80-bit trigger message holds, in the order the system defines them,
// trigger type (32), BC counter (12), trigger level (4) and orbit counter
// (32). Placing the first-listed field at the least significant bits, and
// the meaning of individual trigger-type bits, are choices of this design.
//
// The TTC-B Hamming helpers implement a plain single-error-correcting,
// double-error-detecting code with the check-bit counts of the RD12 TTC
// frames (7 over 32 bits for long words, 5 over 8 bits for broadcasts); the
// bit mapping is this design's own and is not claimed to match the TTCrx.
package cts_pkg;

  localparam int N_INPUTS     = 48;
  localparam int N_CLASSES    = 64;
  localparam int N_CLUSTERS   = 18;
  localparam int N_DET        = 18;
  localparam int N_CRU        = 441;
  localparam int BC_PER_ORBIT = 3564;
  localparam int HBF_PER_TF   = 128;
  localparam int HB_DEPTH     = 8;   // HBack may arrive up to 8 HBf late
  localparam int N_MASKS      = 4;   // BC masks
  localparam int N_GEN        = 2;   // generator outputs (periodic, random)
  localparam int PON_USER_W   = 200; // 25 user bytes per BC on TTC-PON
  localparam int GBT_W        = 120;
  localparam int MSG_W        = 80;
  localparam int TTCB_MSG_W   = 76;  // message without the level field

  // Trigger-type bit positions (design choice).
  localparam int TT_ORBIT = 0;
  localparam int TT_HB    = 1;
  localparam int TT_HBR   = 2;
  localparam int TT_HC    = 3;
  localparam int TT_PHYS  = 4;
  localparam int TT_PP    = 5;
  localparam int TT_CAL   = 6;
  localparam int TT_SOT   = 7;
  localparam int TT_EOT   = 8;
  localparam int TT_TF    = 11;

  // Trigger level bits.
  localparam int LV_LM = 0;
  localparam int LV_L0 = 1;
  localparam int LV_L1 = 2;

  typedef struct packed {
    logic [31:0] orbit;
    logic [3:0]  level;
    logic [11:0] bc;
    logic [31:0] ttype;
  } trig_msg_t;

  // Configuration of one trigger class (written over the control bus).
  typedef struct packed {
    logic                  enable;
    logic [N_INPUTS-1:0]   in_mask;    // inputs that must be 1
    logic [N_GEN-1:0]      gen_mask;   // generator bits that must be 1
    logic                  bcm_en;     // apply a BC mask
    logic [1:0]            bcm_sel;    // which BC mask
    logic                  need_prev;  // require same class at previous level
    logic [4:0]            cluster;    // cluster index 0..17
    logic [15:0]           downscale;  // pass 1 of (downscale+1) candidates
  } class_cfg_t;

  typedef enum logic [1:0] {
    HBR_AUTONOMOUS = 2'd0,
    HBR_DOWNSCALE  = 2'd1,
    HBR_COLLECTIVE = 2'd2
  } hbr_mode_e;

  // Codeword position (1-based) of data bit i in a Hamming code whose check
  // bits sit at powers of two.
  function automatic int ham_pos(input int i);
    int p;
    p = i + 1;
    for (int b = 0; b < 7; b++)
      if ((1 << b) <= p) p++;
    return p;
  endfunction

  // 6 Hamming bits plus overall parity over 32 data bits.
  function automatic logic [6:0] ham32(input logic [31:0] d);
    logic [6:0] c;
    c = '0;
    for (int i = 0; i < 32; i++)
      for (int b = 0; b < 6; b++)
        if (((ham_pos(i) >> b) & 1) == 1) c[b] = c[b] ^ d[i];
    c[6] = ^{d, c[5:0]};
    return c;
  endfunction

  // 4 Hamming bits plus overall parity over 8 data bits.
  function automatic logic [4:0] ham8(input logic [7:0] d);
    logic [4:0] c;
    c = '0;
    for (int i = 0; i < 8; i++)
      for (int b = 0; b < 4; b++)
        if (((ham_pos(i) >> b) & 1) == 1) c[b] = c[b] ^ d[i];
    c[4] = ^{d, c[3:0]};
    return c;
  endfunction

endpackage
