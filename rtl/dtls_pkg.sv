// Shared types and constants of the DTLS engine SoC: command codes of the
// accelerators, the GCM operation codes, and the field width of the ECC
// datapath. The numeric codes and address map are this design's choice; the
// paper does not publish a register map.
//
// Not every constant is used by every block, so a block checked on its
// own reports some package constants as unused.
package dtls_pkg;

  // Width of the prime-field datapath (Fig. 3 of the paper: 256 bits).
  localparam int unsigned ECC_W = 256;

  // AES-GCM operations
  typedef enum logic [2:0] {
    GCM_KEY  = 3'd0,  // load key, H = E_K(0^128), clear GHASH state
    GCM_IV   = 3'd1,  // load 96-bit IV, J0 = IV || 0^31 || 1, keep E_K(J0)
    GCM_AAD  = 3'd2,  // absorb one (padded) block of additional data
    GCM_ENC  = 3'd3,  // encrypt one block, absorb the ciphertext
    GCM_DEC  = 3'd4,  // decrypt one block, absorb the ciphertext
    GCM_TAG  = 3'd5,  // absorb the length block, output the tag
    GCM_ECB  = 3'd6   // plain AES-128 encryption of one block with the key
  } gcm_op_e;

  // ECC core operations
  typedef enum logic [2:0] {
    ECC_PRECOMP = 3'd0,  // fill a comb cache slot from base point (x, y)
    ECC_ECSM    = 3'd1,  // k * P using the comb points of a cache slot
    ECC_MODMUL  = 3'd2,  // x * y mod p
    ECC_MODDIV  = 3'd3,  // x / y mod p (x = 1 gives the inverse)
    ECC_MODADD  = 3'd4,  // x + y mod p
    ECC_MODSUB  = 3'd5   // x - y mod p
  } ecc_op_e;

  // Accelerator commands of the DTLS engine (command register bits [3:0])
  typedef enum logic [3:0] {
    CMD_SHA_INIT  = 4'd0,  // hash the first block of a message
    CMD_SHA_NEXT  = 4'd1,  // hash a following block
    CMD_SHA_LAST  = 4'd2,  // pad and hash the final partial block (bit 4: first)
    CMD_GCM       = 4'd3,  // one AES-GCM operation (gcm_op_e in bits [6:4])
    CMD_ECC       = 4'd4,  // one ECC operation (ecc_op_e in bits [6:4])
    CMD_DRBG      = 4'd5   // HMAC-DRBG: bits [5:4] 0 instantiate, 1 reseed, 2 generate
  } de_cmd_e;

  // ---------------- DTLS RAM map (32-bit word addresses) ----------------
  // 2 KB = 512 words: 1.25 KB micro stack, 0.45 KB DTLS configuration and
  // 0.3 KB accelerator configuration (paper, Fig. 4). 0.45 KB and 0.3 KB are
  // rounded to 115 and 77 words so that the three regions fill 2 KB.
  localparam int unsigned RAM_WORDS   = 512;
  localparam int unsigned STACK_BASE  = 0;
  localparam int unsigned STACK_WORDS = 320;
  localparam int unsigned DCFG_BASE   = 320;
  localparam int unsigned DCFG_WORDS  = 115;
  localparam int unsigned ACFG_BASE   = 435;
  localparam int unsigned ACFG_WORDS  = 77;

  // Operand layout in the accelerator configuration region (word offsets).
  // SHA:  block W0..W15 at 0..15, digest H0..H7 written to 16..23;
  //       for CMD_SHA_LAST word 24 = valid bytes (0..63), words 25/26 =
  //       upper/lower half of the total message length in bits.
  // GCM:  data block at 0..3, word 4 = {27'b0, nbytes}, result to 8..11.
  // ECC:  k 0..7, x 8..15, y 16..23, p 24..31, a 32..39 (least significant
  //       word first), word 40 = {20'b0, slot[2:0], nbits[8:0]},
  //       result x to 41..48, y to 49..56.
  // DRBG: seed at 0..7 (word 0 most significant), 32 output bytes to 16..23.
  localparam int unsigned OPBUF_WORDS = 41;

  // ---------------- DTLS engine register map (byte offsets) ----------------
  localparam logic [11:0] DE_REG_CMD     = 12'h800;  // W: start a command
  localparam logic [11:0] DE_REG_STATUS  = 12'h804;  // R: status, W1C: flags
  localparam logic [11:0] DE_REG_IRQ_EN  = 12'h808;  // RW: interrupt enables
  localparam logic [11:0] DE_REG_TIMER   = 12'h80c;  // RW: re-transmission timer
  localparam logic [11:0] DE_REG_TPRESC  = 12'h810;  // RW: timer prescaler

  // ---------------- simple memory bus ----------------
  // The master holds a request until `gnt`; read data follows with `rvalid`
  // one clock after the grant.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
    logic [3:0]  be;
  } bus_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } bus_rsp_t;

endpackage
