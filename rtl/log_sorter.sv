// log_sorter: sorts a leaf's log block with order hints, without key compares.
//
// Log items are presented in storage order, one per cycle. Each carries its
// 1-byte order hint i: its position in the key order of the log at the time it
// was inserted. The item's log offset is inserted at position i of the
// indirection array and the entries at positions >= i shift one place right,
// so after the last item the array lists the log items in ascending key order
// (paper, Figs. 9 and 10). The array is a shift register, so an insert costs
// one cycle. Items newer than the read version must be filtered out; here every
// item is inserted (later hints count it) and carries a `keep` flag computed from
// node version + 5-byte delta <= read version, and the read port reports it.
// Keeping filtered items in place is this design's choice: dropping them at
// insert time would misplace later items whose hints counted them.
// Interface: `clear` empties the array; `in_valid` inserts; rd_idx reads
// position rd_idx combinationally; `count` is the number of items inserted.
module log_sorter
  import hc_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      in_valid,
  input  logic [12:0]               in_off,
  input  logic [6:0]                in_hint,
  input  logic                      in_replace,
  input  logic [39:0]               in_delta,
  input  ver_t                      node_ver,
  input  ver_t                      rd_ver,
  output logic [$clog2(DEPTH):0]    count,
  input  logic [$clog2(DEPTH)-1:0]  rd_idx,
  output logic [12:0]               rd_off,
  output logic                      rd_keep,
  output logic                      rd_replace
);
  typedef struct packed {
    logic [12:0] off;
    logic        keep;
    logic        replace;
  } ent_t;
  ent_t arr [DEPTH];
  logic in_keep;

  assign in_keep = (node_ver + ver_t'(in_delta)) <= rd_ver;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < DEPTH; i++) arr[i] <= '0;
    end else if (clear) begin
      count <= '0;
    end else if (in_valid && count < ($clog2(DEPTH)+1)'(DEPTH)) begin
      for (int i = 0; i < DEPTH; i++) begin
        if (i == int'(in_hint)) arr[i] <= '{off: in_off, keep: in_keep, replace: in_replace};
        else if (i > int'(in_hint)) arr[i] <= arr[(i > 0) ? i - 1 : 0];
      end
      count <= count + 1'b1;
    end
  end

  assign rd_off     = arr[rd_idx].off;
  assign rd_keep    = arr[rd_idx].keep;
  assign rd_replace = arr[rd_idx].replace;

  // An order hint can never point past the items already inserted.
  assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !clear) |-> ({1'b0, in_hint} <= 8'(count)));
endmodule
