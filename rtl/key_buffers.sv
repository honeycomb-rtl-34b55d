// key_buffers: the centralized LB and UB key buffers of request management.
//
// Each in-flight request owns one slot holding its lower-bound (LB) and
// upper-bound (UB) key as 16-byte fragments. A slot is taken with `alloc`
// (lowest free slot, offered on alloc_slot while alloc_ok is high), filled
// through the write port one fragment per cycle and returned with `free` when
// the request completes. NRD independent read ports (one per search or scan
// unit group) return a fragment one cycle after the address. The paper names
// the buffers, their multiple read ports and freeing on completion; the slot
// count, port count and the fragment organisation are this design's choices.
module key_buffers
  import hc_pkg::*;
#(
  parameter int unsigned SLOTS = 64,
  parameter int unsigned NRD   = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // allocation
  output logic                       alloc_ok,
  output logic [$clog2(SLOTS)-1:0]   alloc_slot,
  input  logic                       alloc,
  input  logic                       free,
  input  logic [$clog2(SLOTS)-1:0]   free_slot,
  // fragment write
  input  logic                       wr_en,
  input  logic [$clog2(SLOTS)-1:0]   wr_slot,
  input  logic                       wr_ub,
  input  logic [4:0]                 wr_frag,
  input  logic [BEAT_W-1:0]          wr_data,
  // read ports
  input  logic [NRD-1:0][$clog2(SLOTS)-1:0] rd_slot,
  input  logic [NRD-1:0]             rd_ub,
  input  logic [NRD-1:0][4:0]        rd_frag,
  output logic [NRD-1:0][BEAT_W-1:0] rd_data
);
  localparam int unsigned DEPTH = 2 * SLOTS * KEY_FRAGS;
  logic [BEAT_W-1:0] mem [DEPTH];
  logic [SLOTS-1:0]  used;

  function automatic int unsigned addr(input int unsigned slot, input logic ub, input int unsigned frag);
    return (slot * 2 + int'(ub)) * KEY_FRAGS + frag;
  endfunction

  always_comb begin
    alloc_ok   = 1'b0;
    alloc_slot = '0;
    for (int i = SLOTS - 1; i >= 0; i--)
      if (!used[i]) begin
        alloc_ok   = 1'b1;
        alloc_slot = i[$clog2(SLOTS)-1:0];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) used <= '0;
    else begin
      if (free) used[free_slot] <= 1'b0;
      if (alloc && alloc_ok) used[alloc_slot] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && wr_frag < 5'(KEY_FRAGS)) mem[addr(wr_slot, wr_ub, wr_frag)] <= wr_data;
    for (int p = 0; p < NRD; p++)
      rd_data[p] <= mem[addr(rd_slot[p], rd_ub[p], (rd_frag[p] < 5'(KEY_FRAGS)) ? rd_frag[p] : 0)];
  end
endmodule
