// page_table: the accelerator's copy of the LID -> physical address map.
//
// B-Tree nodes refer to each other by 6-byte logical identifiers (LIDs); this
// table gives the host physical address of the current buffer of each node.
// The host writes an entry over PCIe whenever it creates or remaps a node
// (merge of sorted and log blocks, split, new root); `upd` pulses for one cycle
// with the LID so the cache can drop its copy. Lookup is a synchronous read:
// the address appears the cycle after `rd_en`. The paper keeps the table in
// on-board DRAM; here it is an on-chip array indexed by the low LID bits
// (ENTRIES LIDs), this design's choice that spares a DRAM round trip.
module page_table
  import hc_pkg::*;
#(
  parameter int unsigned ENTRIES = 1 << 20
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   wr_en,
  input  lid_t   wr_lid,
  input  paddr_t wr_phys,
  output logic   upd,
  output lid_t   upd_lid,
  input  logic   rd_en,
  input  lid_t   rd_lid,
  output paddr_t rd_phys
);
  localparam int unsigned IW = $clog2(ENTRIES);
  paddr_t tbl [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en) tbl[wr_lid[IW-1:0]] <= wr_phys;
    if (rd_en) rd_phys <= tbl[rd_lid[IW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd     <= 1'b0;
      upd_lid <= '0;
    end else begin
      upd     <= wr_en;
      upd_lid <= wr_lid;
    end
  end
endmodule
