// node_address_table (NAT): the node version each request is reading.
//
// When a request first reads a node (its header and shortcut block) the
// physical address of the buffer it read is recorded under the request's
// sequence number; its later reads of sorted segments of the same node are
// served from that address (or from the cache only if the cached copy has the
// same address). This keeps a request on one version of a node even if the
// host remaps the LID in between. One entry per in-flight request, indexed by
// the low sequence-number bits (the epoch manager keeps at most ENTRIES
// requests in flight). Combinational read, write on the clock edge. The
// mapping is the paper's; the indexing is this design's choice.
module node_address_table
  import hc_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic   clk,
  input  logic   wr_en,
  input  seq_t   wr_seq,
  input  paddr_t wr_phys,
  input  seq_t   rd_seq,
  output paddr_t rd_phys
);
  localparam int unsigned IW = $clog2(ENTRIES);
  paddr_t tbl [ENTRIES];
  always_ff @(posedge clk)
    if (wr_en) tbl[wr_seq[IW-1:0]] <= wr_phys;
  assign rd_phys = tbl[rd_seq[IW-1:0]];
endmodule
