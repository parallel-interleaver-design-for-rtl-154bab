// tdec_pkg: shared constants and types of the multi-standard (HSPA+/LTE)
// turbo-decoder interleaver subsystem.
// Sizes follow the implemented configuration: 16 Radix-4 decoders giving 64
// LLR lanes in LTE mode, 8 decoders / 32 lanes in HSPA+ mode, 6-bit extrinsic
// and 5-bit channel LLRs, DBCF settings S=3, D_FIFO=8, D_buf=12 (the P_LLR=32,
// M=32 setting). Address widths, packet layout and the mode encodings are this
// design's own choices.
package tdec_pkg;
  localparam int ADDR_W   = 13;          // block addresses up to 6144
  localparam int B_EXT    = 6;           // extrinsic LLR width
  localparam int B_CH     = 5;           // channel LLR width
  localparam int NL_LTE   = 64;          // LLR lanes in LTE mode
  localparam int NL_HSPA  = 32;          // LLR lanes in HSPA+ mode
  localparam int N_BANK   = 64;          // extrinsic memory modules
  localparam int BANK_W   = 6;           // bank index width
  localparam int OFF_W    = 8;           // word offset inside a bank
  localparam int BANK_DEPTH = 160;       // 5120/32 words per module
  localparam int DBCF_S   = 3;
  localparam int D_FIFO   = 8;
  localparam int D_BUF    = 12;
  localparam int K_MAX_HSPA = 5114;
  localparam int K_MAX_LTE  = 6144;
  localparam int MAX_HALF = 11;          // 5.5 iterations

  typedef logic [B_EXT-1:0] llr_t;        // two's complement LLR

  // A write request travelling from a lane to an extrinsic memory bank.
  typedef struct packed {
    logic [BANK_W-1:0] bank;
    logic [OFF_W-1:0]  off;
    llr_t              llr;
  } wr_pkt_t;

  // Bank-local part of a request (what a circular buffer stores).
  typedef struct packed {
    logic [OFF_W-1:0] off;
    llr_t             llr;
  } bank_word_t;

  // Write-address mode of a half iteration: the balanced schedule writes with
  // the deinterleaver in the first half and the interleaver in the second.
  typedef enum logic {INTL = 1'b0, DEINTL = 1'b1} iag_mode_e;

  // Column count case of the HSPA+ matrix: C = p-1, p or p+1.
  typedef enum logic [1:0] {C_PM1 = 2'd0, C_P = 2'd1, C_PP1 = 2'd2} ccase_e;
endpackage
