// hc_pkg: types and constants shared by the B-Tree accelerator.
//
// Node layout (8 KB nodes, 48-byte header, 464-byte shortcut block, as in the
// paper). The byte positions of the header fields are this design's choice;
// the paper lists the fields but not their offsets. Multi-byte fields are
// little endian.
//   0      node type (0 interior, 1 leaf)      1      level (0 = leaf)
//   2..3   bytes used (end of log block)       4..7   lock word (ignored by readers)
//   8..15  node version                        16..23 old-version pointer (phys, 0 = none)
//   24..29 leftmost child LID (interior) / left sibling LID (leaf)
//   30..35 right sibling LID (leaf, 0 = none)  36..37 sorted/log boundary offset
//   38..39 bytes used in the shortcut block    40..47 reserved
// Shortcut entry: [klen:2][key][segment offset:2]. Sorted item: [klen:2][key]
// [vlen:2][value]; a segment that starts at a shortcut holds only [vlen][value].
// Log entry: [back pointer:2][order hint:1][version delta:5][klen][key][vlen][value];
// hint bit 7 marks an entry that replaces the item it points at (update or
// delete); vlen = 16'hFFFF marks a delete.
package hc_pkg;
  localparam int unsigned NODE_BYTES  = 8192;
  localparam int unsigned HDR_BYTES   = 48;
  localparam int unsigned SC_END      = 512;   // header + shortcut block
  localparam int unsigned FRAG_BYTES  = 16;    // key fragment / data beat width
  localparam int unsigned BEAT_W      = FRAG_BYTES * 8;
  localparam int unsigned MAX_KEY     = 460;
  localparam int unsigned KEY_FRAGS   = (MAX_KEY + FRAG_BYTES - 1) / FRAG_BYTES;
  localparam int unsigned LOG_HDR     = 8;
  localparam int unsigned CHUNK_BYTES = 256;   // cache occupancy granule
  localparam logic [15:0] DELETE_LEN  = 16'hFFFF;

  typedef logic [47:0] lid_t;
  typedef logic [63:0] paddr_t;
  typedef logic [63:0] ver_t;
  typedef logic [63:0] seq_t;

  typedef enum logic [1:0] {OP_GET = 2'd0, OP_SCAN = 2'd1} op_e;
  typedef enum logic [1:0] {BLK_SHORTCUT = 2'd0, BLK_SORTED = 2'd1, BLK_LOG = 2'd2} blk_e;

  // Request metadata that travels through the accelerator.
  typedef struct packed {
    seq_t        seq;
    ver_t        rd_ver;
    logic [5:0]  kslot;      // key buffer slot
    logic [8:0]  lb_len;
    logic [8:0]  ub_len;
    op_e         op;
    lid_t        lid;        // node being visited
    logic        use_phys;   // visit an old version by physical address
    paddr_t      phys;
    logic [7:0]  level;
    blk_e        blk;
    logic [12:0] offset;     // start of block / segment in node
    logic [12:0] len;        // bytes to fetch
    lid_t        carry;      // child LID valid at the start of the segment
    logic        seg0;       // segment starts without a shortcut value
    logic [15:0] tag;        // client tag echoed in the response
  } meta_t;

  // Block read request to the memory subsystem.
  typedef struct packed {
    seq_t        seq;
    lid_t        lid;
    logic        use_phys;
    paddr_t      phys;
    logic        first;      // header+shortcut access of a node visit
    logic        interior;   // node may be cached
    logic [12:0] offset;
    logic [12:0] len;
    logic [7:0]  tag;
  } mreq_t;

  typedef struct packed {
    logic [7:0]        tag;
    logic [BEAT_W-1:0] data;
    logic              last;
  } mresp_t;

  // One result item of a scan / get.
  typedef struct packed {
    logic [15:0] tag;
    logic [12:0] offset;     // item position inside the leaf
    lid_t        leaf;
    logic        from_log;
    logic        last;       // final item (or empty marker) of the request
    logic        empty;      // no item in range
  } result_t;
endpackage
