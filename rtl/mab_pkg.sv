// mab_pkg: widths, encodings and bundles shared by the way memoization units.
//
// Address split (32-bit byte address, 32 kB 2-way cache, 512 sets, 32-byte lines):
//   [31:14] tag (18 bits) | [13:5] set index (9 bits) | [4:0] line offset (5 bits)
// The MAB search key is {tag field of the base address, cflag, set index}. The
// cflag says how the real tag relates to the base address' tag field; its codes
// follow the table printed in the paper's MAB figure:
//   displacement[31:14] all 0 : carry 0 -> 00 (same tag), carry 1 -> 01 (tag + 1)
//   displacement[31:14] all 1 : carry 0 -> 10 (tag - 1), carry 1 -> 00 (same tag)
//   anything else             : 11 (out of range, never a hit)
// The cache control and response structs are this design's own interface to an
// unmodified set-associative cache.
package mab_pkg;

  localparam int unsigned ADDR_W = 32;  // address generation adder width
  localparam int unsigned TAG_W  = 18;  // tag field
  localparam int unsigned IDX_W  = 9;   // set index (512 sets)
  localparam int unsigned OFF_W  = 5;   // line offset (32-byte lines)
  localparam int unsigned LOW_W  = IDX_W + OFF_W;  // 14-bit key adder
  localparam int unsigned N_WAYS = 2;   // cache associativity
  localparam int unsigned WAY_W  = 1;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [TAG_W-1:0]  tag_t;
  typedef logic [IDX_W-1:0]  idx_t;
  typedef logic [WAY_W-1:0]  way_t;

  typedef enum logic [1:0] {
    CF_SAME  = 2'b00,  // real tag == base tag
    CF_PLUS  = 2'b01,  // real tag == base tag + 1
    CF_MINUS = 2'b10,  // real tag == base tag - 1
    CF_INVAL = 2'b11   // displacement too large: tag unknown without the full add
  } cflag_e;

  // MAB search key
  typedef struct packed {
    tag_t   tag;
    cflag_e cflag;
    idx_t   idx;
  } mab_key_t;

  // Source of the next instruction fetch address
  typedef enum logic [1:0] {
    FLOW_SEQ    = 2'd0,  // PC + stride
    FLOW_BRANCH = 2'd1,  // PC + branch offset
    FLOW_LINK   = 2'd2   // branch to the address held in the link register
  } flow_e;

  // Lookup stage -> cache access stage (registered)
  typedef struct packed {
    logic                valid;        // an access is in the cache stage
    addr_t               addr;         // memory address
    logic                tag_disable;  // skip the tag arrays
    logic [N_WAYS-1:0]   way_disable;  // per-way data array disable
  } cache_ctl_t;

  // Cache -> MAB, when the access in the cache stage finishes
  typedef struct packed {
    logic valid;   // access done this cycle
    way_t way;     // way that holds the line (hit way or refill way)
    logic refill;  // the line was just brought into 'way', evicting its old line
  } cache_resp_t;

endpackage
