// root_cache: on-chip copy of the B-Tree root node.
//
// Holds one 8 KB node (the root, which every request reads) as 16-byte words
// with a valid bit per 256-byte chunk. It is filled by the write-back path
// from PCIe responses for the root LID and emptied when the root LID changes
// or its page-table entry is rewritten (`inval`). A read returns one 16-byte
// word the cycle after `rd_en`; `covers` tells, combinationally, whether a byte
// range [off, off+len) is fully present for LID `q_lid`. Caching the root in
// on-chip memory is the paper's; the chunk valid bits reuse the DRAM cache's
// occupancy granule, this design's choice.
module root_cache
  import hc_pkg::*;
#(
  parameter int unsigned NODE_BYTES = 8192
) (
  input  logic              clk,
  input  logic              rst_n,
  input  lid_t              root_lid,
  input  logic              inval,
  input  logic              wr_en,
  input  logic [12:0]       wr_addr,     // byte address, 16-byte aligned
  input  logic [BEAT_W-1:0] wr_data,
  input  logic              wr_chunk_done,
  input  logic [4:0]        wr_chunk,
  input  lid_t              q_lid,
  input  logic [12:0]       q_off,
  input  logic [13:0]       q_len,
  output logic              covers,
  input  logic              rd_en,
  input  logic [12:0]       rd_addr,
  output logic [BEAT_W-1:0] rd_data
);
  localparam int unsigned WORDS  = NODE_BYTES / FRAG_BYTES;
  localparam int unsigned CHUNKS = NODE_BYTES / CHUNK_BYTES;
  logic [BEAT_W-1:0] mem [WORDS];
  logic [CHUNKS-1:0] vld;

  always_comb begin
    automatic int unsigned c0 = int'(q_off) / CHUNK_BYTES;
    automatic int unsigned c1 = (int'(q_off) + int'(q_len) - 1) / CHUNK_BYTES;
    covers = (q_lid == root_lid) && q_len != 0;
    for (int c = 0; c < CHUNKS; c++)
      if (c >= c0 && c <= c1 && !vld[c]) covers = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr[12:4]] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr[12:4]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else if (inval) vld <= '0;
    else if (wr_chunk_done) vld[wr_chunk] <= 1'b1;
  end
endmodule
