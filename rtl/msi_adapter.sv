// msi_adapter: memory subsystem interface adapter.
//
// Takes request metadata from a memory access generator, turns it into a
// block read (LID or old-version physical address, byte offset and length)
// with a local tag, and keeps the metadata in a TAGS-entry table so several
// reads are outstanding at once. Responses may return out of order between
// tags (the beats of one response are contiguous); each response is passed on
// as a beat stream with its metadata attached (o_first on the first beat,
// o_last on the last), and its tag is freed after the last beat. Read data
// covers the 16-byte-aligned range around [offset, offset+len).
// Out-of-order transfer is the paper's; tag count and handshakes are this
// design's choices.
module msi_adapter
  import hc_pkg::*;
#(
  parameter int unsigned TAGS = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  meta_t             in_meta,
  output logic              mreq_valid,
  input  logic              mreq_ready,
  output mreq_t             mreq,
  input  logic              mresp_valid,
  output logic              mresp_ready,
  input  mresp_t            mresp,
  output logic              o_valid,
  input  logic              o_ready,
  output meta_t             o_meta,
  output logic              o_first,
  output logic [BEAT_W-1:0] o_data,
  output logic              o_last,
  output logic [7:0]        o_tag     // memory tag of this beat (beats of different tags interleave)
);
  localparam int unsigned TW = $clog2(TAGS);
  meta_t            tbl [TAGS];
  logic [TAGS-1:0]  busy;
  logic [TAGS-1:0]  started;
  logic             free_ok;
  logic [TW-1:0]    free_tag;

  always_comb begin
    free_ok = 1'b0; free_tag = '0;
    for (int i = TAGS - 1; i >= 0; i--)
      if (!busy[i]) begin free_ok = 1'b1; free_tag = TW'(i); end
  end

  assign in_ready   = free_ok && mreq_ready;
  assign mreq_valid = in_valid && free_ok;
  always_comb begin
    mreq          = '0;
    mreq.seq      = in_meta.seq;
    mreq.lid      = in_meta.lid;
    mreq.use_phys = in_meta.use_phys;
    mreq.phys     = in_meta.phys;
    mreq.first    = in_meta.blk == BLK_SHORTCUT;
    mreq.interior = in_meta.level != 8'd0;
    mreq.offset   = in_meta.offset;
    mreq.len      = in_meta.len;
    mreq.tag      = 8'(free_tag);
  end

  assign o_valid     = mresp_valid;
  assign mresp_ready = o_ready;
  assign o_meta      = tbl[mresp.tag[TW-1:0]];
  assign o_first     = !started[mresp.tag[TW-1:0]];
  assign o_data      = mresp.data;
  assign o_last      = mresp.last;
  assign o_tag       = mresp.tag;

  always_ff @(posedge clk) if (in_valid && in_ready) tbl[free_tag] <= in_meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0; started <= '0;
    end else begin
      if (mresp_valid && o_ready) begin
        started[mresp.tag[TW-1:0]] <= !mresp.last;
        if (mresp.last) busy[mresp.tag[TW-1:0]] <= 1'b0;
      end
      if (in_valid && in_ready) busy[free_tag] <= 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    mresp_valid |-> busy[mresp.tag[TW-1:0]]);
endmodule
