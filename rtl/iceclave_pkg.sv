// iceclave_pkg: types and constants shared by the in-storage TEE hardware.
//
// Holds the page-descriptor bit positions used for the three memory regions
// (normal, protected, secure), the layout of a cached mapping-table entry, the
// Trivium key/IV sizes of the stream cipher engine and the counter-block
// geometry of the memory encryption engine. Bit positions of NS, AP[2:1] and
// ES and the 48+32-bit IV split follow the paper's figures; the mapping-entry
// field layout beyond "8 bytes per entry, 4 ID bits" is this design's choice.
package iceclave_pkg;

  // ---------------- page descriptor (ARMv8 stage-1 block/page entry) ----
  localparam int unsigned PTE_NS_BIT  = 5;   // non-secure
  localparam int unsigned PTE_AP_LO   = 6;   // AP[1]
  localparam int unsigned PTE_AP_HI   = 7;   // AP[2]
  localparam int unsigned PTE_ES_BIT  = 55;  // reserved bit reused as ES

  typedef enum logic [1:0] {
    REGION_NORMAL    = 2'd0,
    REGION_PROTECTED = 2'd1,
    REGION_SECURE    = 2'd2,
    REGION_INVALID   = 2'd3   // encoding not in the region table
  } region_e;

  typedef enum logic {
    WORLD_NORMAL = 1'b0,
    WORLD_SECURE = 1'b1
  } world_e;

  // ---------------- FTL mapping table ------------------------------------
  localparam int unsigned ID_W    = 4;   // TEE ID bits per entry
  localparam int unsigned PPA_W   = 32;  // physical page address
  localparam int unsigned LPA_W   = 32;  // logical page address
  localparam int unsigned ENTRY_W = 64;  // 8 bytes per entry
  localparam int unsigned MAP_TAG_W = ENTRY_W - 1 - ID_W - PPA_W;  // 27

  // 64-bit cached mapping entry: valid, TEE ID, owner-set flag, tag of the
  // LPA held, PPA. Field order is this design's choice.
  typedef struct packed {
    logic             valid;
    logic [ID_W-1:0]  id;
    logic [MAP_TAG_W-1:0] tag; // upper LPA bits (direct-mapped cache tag)
    logic [PPA_W-1:0] ppa;
  } map_entry_t;

  typedef enum logic [1:0] {
    XLATE_HIT       = 2'd0,  // entry cached, ID matches: PPA returned
    XLATE_MISS      = 2'd1,  // not cached: ReadMappingEntry to the FTL
    XLATE_VIOLATION = 2'd2   // cached but owned by another TEE: ThrowOutTEE
  } xlate_e;

  // ---------------- stream cipher engine ---------------------------------
  localparam int unsigned KEY_W    = 80;  // Trivium key
  localparam int unsigned IV_W     = 80;  // Trivium IV = 48-bit base + 32-bit PPA
  localparam int unsigned IV0_W    = 48;
  localparam int unsigned KS_W     = 64;  // keystream bits per cycle

  // ---------------- memory encryption engine -----------------------------
  localparam int unsigned LINE_W     = 512;  // 64-byte cache line
  localparam int unsigned CTR_W      = 64;   // major counter
  localparam int unsigned MINOR_W    = 6;    // minor counter
  localparam int unsigned MAC_W      = 64;
  localparam int unsigned RO_ARITY   = 8;    // major counters per read-only block
  localparam int unsigned SPLIT_ARITY = 64;  // minor counters per split block
  localparam int unsigned NODE_W     = 576;  // counter payload (512) + MAC (64)

  typedef enum logic [1:0] {
    MEE_READ   = 2'd0,  // verify counters, decrypt a line
    MEE_WRITE  = 2'd1,  // bump counter, encrypt a line, update tree
    MEE_TO_RW  = 2'd2,  // read-only page becomes writable
    MEE_TO_RO  = 2'd3   // writable page becomes read-only
  } mee_op_e;

endpackage
