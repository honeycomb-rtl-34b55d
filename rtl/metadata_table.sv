// metadata_table: which interior nodes are cached in on-board DRAM.
//
// A four-way set-associative table indexed by the low LID bits. Each entry
// holds the LID, the physical address of the cached node version and a 32-bit
// occupancy map, one bit per 256-byte chunk of the 8 KB node. A lookup
// (combinational) reports a hit when the LID is present; `hit_slot` is the
// entry number, which also names the node's 8 KB frame in the DRAM cache.
// `alloc` installs a LID with an empty map, replacing a random way of its set
// (an LFSR) when no way is free; `fill` ORs chunks into an entry's map; `inval`
// drops a LID (page-table update). Geometry, fields and random replacement are
// the paper's; the paper keeps the full table in DRAM behind a 1K-entry
// on-chip metadata cache, while here the 1K entries are the whole table.
module metadata_table
  import hc_pkg::*;
#(
  parameter int unsigned ENTRIES = 1024,
  parameter int unsigned WAYS    = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  lid_t                          lk_lid,
  output logic                          hit,
  output logic [$clog2(ENTRIES)-1:0]    hit_slot,
  output paddr_t                        hit_phys,
  output logic [31:0]                   hit_occ,
  input  logic                          alloc,
  input  lid_t                          alloc_lid,
  input  paddr_t                        alloc_phys,
  output logic [$clog2(ENTRIES)-1:0]    alloc_slot,
  input  logic                          fill,
  input  logic [$clog2(ENTRIES)-1:0]    fill_slot,
  input  logic [31:0]                   fill_mask,
  input  logic                          inval,
  input  lid_t                          inval_lid
);
  localparam int unsigned SETS = ENTRIES / WAYS;
  localparam int unsigned SW   = $clog2(SETS);
  localparam int unsigned WW   = $clog2(WAYS);
  typedef struct packed {
    logic        valid;
    lid_t        lid;
    paddr_t      phys;
    logic [31:0] occ;
  } ent_t;
  ent_t tbl [ENTRIES];
  logic [15:0] lfsr;

  always_comb begin
    automatic int unsigned base = int'(lk_lid[SW-1:0]) * WAYS;
    hit = 1'b0; hit_slot = '0; hit_phys = '0; hit_occ = '0;
    for (int w = 0; w < WAYS; w++)
      if (tbl[base + w].valid && tbl[base + w].lid == lk_lid) begin
        hit      = 1'b1;
        hit_slot = ($clog2(ENTRIES))'(base + w);
        hit_phys = tbl[base + w].phys;
        hit_occ  = tbl[base + w].occ;
      end
  end

  // victim: a free way, else the way chosen by the LFSR
  always_comb begin
    automatic int unsigned base = int'(alloc_lid[SW-1:0]) * WAYS;
    automatic logic found = 1'b0;
    alloc_slot = ($clog2(ENTRIES))'(base + int'(lfsr[WW-1:0]));
    for (int w = 0; w < WAYS; w++)
      if (tbl[base + w].valid && tbl[base + w].lid == alloc_lid && !found) begin
        found = 1'b1; alloc_slot = ($clog2(ENTRIES))'(base + w);
      end
    for (int w = 0; w < WAYS; w++)
      if (!tbl[base + w].valid && !found) begin
        found = 1'b1; alloc_slot = ($clog2(ENTRIES))'(base + w);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= 16'hACE1;
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= '0;
    end else begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      if (fill) tbl[fill_slot].occ <= tbl[fill_slot].occ | fill_mask;
      if (alloc) tbl[alloc_slot] <= '{valid: 1'b1, lid: alloc_lid, phys: alloc_phys, occ: 32'd0};
      if (inval)
        for (int w = 0; w < WAYS; w++)
          if (tbl[int'(inval_lid[SW-1:0]) * WAYS + w].lid == inval_lid)
            tbl[int'(inval_lid[SW-1:0]) * WAYS + w].valid <= 1'b0;
    end
  end
endmodule
