// cm_pkg: types and constants shared by the CIPHERMATCH in-flash search data path.
//
// Geometry follows the evaluated SSD: 8 channels x 8 dies x 2 planes, 4 KiB pages
// (32768 bitlines per plane), 2048 blocks of 196 wordlines per plane, and 32-bit
// ciphertext coefficients (BFV with n = 1024, q of 32 bits, t of 16 bits).
// A ciphertext is two polynomials of 1024 coefficients, i.e. 2048 coefficients.
//
// Timing: all latencies are counted in cycles of a 100 MHz (10 ns) controller clock,
// which is this design's own choice. The nanosecond values are the paper's
// (flash read 22.5 us in SLC mode, AND/OR 20 ns, latch transfer 20 ns, XOR 30 ns,
// page DMA 3.3 us).
package cm_pkg;

  // ---- HE parameters ----
  localparam int unsigned COEF_BITS   = 32;    // q: ciphertext coefficient width
  localparam int unsigned PT_BITS     = 16;    // t: bits packed per plaintext coefficient
  localparam int unsigned POLY_N      = 1024;  // n: ring dimension
  localparam int unsigned QUERY_COEFS = 2 * POLY_N; // (C0, C1) coefficients of one ciphertext

  // ---- Flash geometry ----
  localparam int unsigned NUM_CHANNELS     = 8;
  localparam int unsigned DIES_PER_CHANNEL = 8;
  localparam int unsigned PLANES_PER_DIE   = 2;
  localparam int unsigned NUM_PLANES = NUM_CHANNELS * DIES_PER_CHANNEL * PLANES_PER_DIE; // 128
  localparam int unsigned PAGE_BYTES = 4096;
  localparam int unsigned PAGE_BITS  = PAGE_BYTES * 8;   // bitlines per plane
  localparam int unsigned BLOCKS_PER_PLANE = 2048;
  localparam int unsigned WLS_PER_BLOCK    = 196;
  localparam int unsigned WL_ADDR_W  = $clog2(BLOCKS_PER_PLANE * WLS_PER_BLOCK); // 19
  localparam int unsigned PLANE_W    = 8;     // plane field of host commands (>= clog2(NUM_PLANES))
  localparam int unsigned CHUNK_W    = 8;     // 4 KB-chunk field of host commands

  // ---- Transposition granularity: 4 KB of 32-bit words ----
  localparam int unsigned CHUNK_WORDS = PAGE_BYTES / (COEF_BITS / 8); // 1024

  // ---- Operation latencies in 10 ns cycles ----
  localparam int unsigned LAT_READ  = 2250; // 22.5 us SLC read
  localparam int unsigned LAT_ANDOR = 2;    // 20 ns
  localparam int unsigned LAT_LT    = 2;    // 20 ns latch transfer
  localparam int unsigned LAT_XOR   = 3;    // 30 ns
  localparam int unsigned LAT_DMA   = 330;  // 3.3 us page transfer over the channel

  // ---- Latch-level commands executed by the page latch bank ----
  typedef enum logic [3:0] {
    LOP_NOP   = 4'd0,
    LOP_LOAD_S= 4'd1,  // latch_write: page from the controller into the S-latch (DMA)
    LOP_READ  = 4'd2,  // flash_read: sense the addressed wordline into the S-latch
    LOP_S2D   = 4'd3,  // transfer_S_to_D: D[sel] = S  (RST_D then SET_D)
    LOP_D2S   = 4'd4,  // transfer_D_to_S: S = D[sel]
    LOP_AND   = 4'd5,  // S = S & D[sel]   (EN/M7-M8 discharge, SET_S)
    LOP_OR    = 4'd6,  // D[sel] = D[sel] | S  (SET_D without reset)
    LOP_XOR   = 4'd7,  // D1 = D1 ^ D2     (existing XOR circuit)
    LOP_RST_D = 4'd8,  // D[sel] = 0       (RST_D)
    LOP_OUT   = 4'd9   // latch_read: latch[sel] to the controller (DMA); sel 3 = S-latch
  } latch_op_e;

  // ---- Host-visible commands ----
  typedef enum logic [2:0] {
    CM_NOP        = 3'd0,
    CM_WRITE      = 3'd1,  // one 4 KB chunk of coefficients -> vertical layout in flash
    CM_READ       = 3'd2,  // one 4 KB chunk back from vertical layout to words
    CM_LOAD_QUERY = 3'd3,  // one 4 KB chunk of the encrypted query (search payload)
    CM_LOAD_MATCH = 3'd4,  // one 4 KB chunk of the encrypted match polynomial
    CM_SEARCH     = 3'd5   // bop_add over all planes at a wordline group, then index generation
  } cm_op_e;

  typedef struct packed {
    cm_op_e                 op;
    logic [PLANE_W-1:0]     plane;    // CM_WRITE / CM_READ target plane
    logic [WL_ADDR_W-1:0]   wl_base;  // first of the COEF_BITS wordlines holding the coefficients
    logic [CHUNK_W-1:0]     chunk;    // which 4 KB column chunk of the page / query
  } cm_cmd_t;

endpackage
