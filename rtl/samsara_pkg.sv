// samsara_pkg: types and constants shared by the H-Quorum controller, the tile
// agents and the PL memories.
//
// The platform runs 2f+1 replicated compute tiles behind one trusted controller.
// Messages travel through shared PL memories (PLMs) of 32-bit words. Every PLM has
// three BRAMs: Req (r), Rep (p) and State (s). Requests and replies sit in slots
// of SLOT_STRIDE words, one slot per unique ID modulo the log depth:
//   word 0            unique ID (written last, so a reader never sees half a slot)
//   words 1..M        payload (request, or reply)
//   words M+1..2M     SHA-256 digest of the payload
//   word 2M+1         tile ID (reply slots only)
// The Controller's Rep BRAM holds the log of delivered rounds instead:
//   word 0 uid, words 1..M request, words M+1..2M reply.
// The State BRAM holds the state that is transferred to a reloaded tile:
//   word 0 next uid, word 1 slot of that uid, word 2 number of logged rounds,
//   words 3..10 running history digest.
// The configuration record follows the attribute list of the controller
// configuration (softcore, version, min-tiles, max-tiles, stateful, policy); its
// field widths and the severity and proactive-period fields are this design's own.
package samsara_pkg;

  localparam int unsigned WORD_W       = 32;
  localparam int unsigned MSG_WORDS    = 8;   // 256-bit requests and replies
  localparam int unsigned OFF_UID      = 0;
  localparam int unsigned OFF_DATA     = 1;
  localparam int unsigned OFF_DIG      = OFF_DATA + MSG_WORDS;
  localparam int unsigned OFF_TID      = OFF_DIG + MSG_WORDS;
  localparam int unsigned OFF_LOG_REP  = OFF_DATA + MSG_WORDS;
  localparam int unsigned MAX_TILES    = 3;   // reconfigurable partitions
  localparam int unsigned NUM_VERSIONS = 2;   // reconfigurable modules per partition
  localparam int unsigned NUM_RP       = 3;   // partition locations
  localparam int unsigned VER_W        = 1;
  localparam int unsigned LOC_W        = 2;
  localparam int unsigned TILE_CNT_W   = 3;
  localparam int unsigned SLOT_STRIDE  = 32;
  localparam int unsigned STATE_WORDS  = 16;
  localparam int unsigned S_NEXT_UID   = 0;
  localparam int unsigned S_SLOT       = 1;
  localparam int unsigned S_COUNT      = 2;
  localparam int unsigned S_DIGEST     = 3;

  typedef logic [WORD_W-1:0] word_t;

  // The three BRAMs of a PL memory.
  typedef enum logic [1:0] {BANK_REQ = 2'd0, BANK_REP = 2'd1, BANK_STATE = 2'd2} bank_e;

  // Controller status.
  typedef enum logic {ST_LOADING = 1'b0, ST_READY = 1'b1} status_e;

  // Outcome reported to the application with each response.
  typedef enum logic [1:0] {
    RSP_OK       = 2'd0,  // all active tiles matched
    RSP_DEGRADED = 2'd1,  // a majority matched; the others are being rejuvenated
    RSP_FAIL     = 2'd2   // no majority; the request must be replayed
  } rsp_status_e;

  typedef struct packed {
    logic diversify;  // 1: load the next diverse version, 0: refresh the same one
    logic relocate;   // 1: move the tile to a free partition, 0: replace in place
    logic scale;      // 1: resize the replica set to 2*severity_f+1
    logic proactive;  // 1: also rejuvenate periodically, 0: only on faults
  } policy_t;

  typedef struct packed {
    logic [3:0]            softcore;          // softcore type to load
    logic [VER_W-1:0]      version;           // version loaded at bootstrap
    logic [TILE_CNT_W-1:0] min_tiles;
    logic [TILE_CNT_W-1:0] max_tiles;
    logic                  stateful;
    policy_t               policy;
    logic [1:0]            severity_f;        // f used when scaling
    logic [31:0]           proactive_period;  // cycles between proactive rounds
  } cfg_t;

  // Command from the Controller to MP-Boot (Bootloader or Tileloader).
  typedef struct packed {
    logic                                  boot;      // run the Bootloader
    logic                                  full;      // full-mode: whole PL
    logic [MAX_TILES-1:0]                  mask;      // tiles to (re)load
    logic [MAX_TILES-1:0]                  active;    // tiles in the replica set
    logic [3:0]                            softcore;
    logic [MAX_TILES-1:0][VER_W-1:0]       version;
    logic [MAX_TILES-1:0][LOC_W-1:0]       location;
  } tl_cmd_t;

  localparam logic [255:0] SHA256_IV = {
    32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
    32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  // Single SHA-256 block holding a 256-bit message and its padding.
  function automatic logic [511:0] sha_pad256(input logic [255:0] msg);
    return {msg, 1'b1, 191'd0, 64'd256};
  endfunction

  // Second (padding-only) block of a 512-bit message.
  function automatic logic [511:0] sha_pad512_tail();
    return {1'b1, 447'd0, 64'd512};
  endfunction

  function automatic int unsigned popcount(input logic [MAX_TILES-1:0] m);
    int unsigned c = 0;
    for (int i = 0; i < MAX_TILES; i++) c += int'(m[i]);
    return c;
  endfunction

endpackage
