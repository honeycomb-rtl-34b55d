// ksu: key search unit of the interior-node search engine (paper Fig. 7).
//
// One KSU handles one node block of one request at a time. It copies the
// request's lower-bound key from the central key buffers into its own key
// buffer, collects the block data (16-byte beats) in its data buffer, and then
// walks the variable-size keys of the block in order. Each key is aligned out of
// the data buffer (a byte-offset read, the barrel shifter) and streamed through
// the key comparison pipeline one 16-byte fragment per cycle; the result
// generator keeps the last key <= the request key.
//   * Header + shortcut block (blk = shortcut): if the node version is newer
//     than the request's read version and an old-version pointer exists, the
//     result is a new visit of the old version by physical address. Otherwise
//     the result asks for the sorted segment that starts at the largest
//     shortcut key <= key (segment 0, which has no shortcut, when none is),
//     carrying the leftmost child LID from the header for segment 0.
//   * Sorted segment of an interior node (blk = sorted): the result is a visit
//     of the header + shortcut block of the child whose key is the largest <=
//     the request key. out_leaf is set when that child is a leaf (level 0).
// Timing: about one cycle per fragment of each examined key plus two per item,
// after the key copy and the data fill. Layout: see hc_pkg. The search rule and
// unit structure follow the paper; the byte layout, the data buffer size
// (BUF_BYTES; segments are assumed not to exceed it) and the handshakes are this
// design's choices.
module ksu
  import hc_pkg::*;
#(
  parameter int unsigned BUF_BYTES = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  meta_t             in_meta,
  input  logic              d_valid,
  input  logic [BEAT_W-1:0] d_data,
  input  logic              d_last,
  // key buffer read port
  output logic [5:0]        kb_slot,
  output logic [4:0]        kb_frag,
  input  logic [BEAT_W-1:0] kb_data,
  // result
  output logic              out_valid,
  input  logic              out_ready,
  output meta_t             out_meta,
  output logic              out_leaf
);
  localparam int unsigned AW = $clog2(BUF_BYTES);
  typedef enum logic [3:0] {S_IDLE, S_KEY, S_FILL, S_DECIDE, S_ITEM, S_CMP, S_ACT, S_OUT} state_e;
  state_e state;
  meta_t  m, r;
  logic [7:0]        dbuf [BUF_BYTES];
  logic [BEAT_W-1:0] kbuf [KEY_FRAGS];
  logic [5:0]        kf;
  logic              filled;
  logic [AW:0]       wptr;
  logic [12:0]       p, lim, klen;
  logic [4:0]        j;
  lid_t              cand;
  logic              leaf_next;

  function automatic logic [7:0] rb(input logic [12:0] a);
    return (a < 13'(BUF_BYTES)) ? dbuf[a[AW-1:0]] : 8'h00;
  endfunction
  function automatic logic [15:0] rd16(input logic [12:0] a);
    return {rb(a + 13'd1), rb(a)};
  endfunction
  function automatic logic [47:0] rd48(input logic [12:0] a);
    logic [47:0] v;
    for (int i = 0; i < 6; i++) v[i*8 +: 8] = rb(a + 13'(i));
    return v;
  endfunction
  function automatic logic [63:0] rd64(input logic [12:0] a);
    logic [63:0] v;
    for (int i = 0; i < 8; i++) v[i*8 +: 8] = rb(a + 13'(i));
    return v;
  endfunction

  // key alignment: fragment j of the block key starting at p+2
  logic [BEAT_W-1:0] afrag;
  always_comb
    for (int i = 0; i < FRAG_BYTES; i++) afrag[i*8 +: 8] = rb(p + 13'd2 + 13'(j) * 13'd16 + 13'(i));

  logic cmp_valid, cmp_done, cmp_lt, cmp_eq, cmp_gt;
  logic [9:0] a_rem, b_rem;
  assign cmp_valid = state == S_CMP;
  assign a_rem = 10'(klen) - 10'(j) * 10'd16;
  assign b_rem = 10'(m.lb_len) - 10'(j) * 10'd16;
  key_compare #(.FRAG_BYTES(FRAG_BYTES)) u_cmp (
    .clk, .rst_n, .valid(cmp_valid), .start(cmp_valid && j == 0),
    .a(afrag), .b(kbuf[j < 5'(KEY_FRAGS) ? j : 5'd0]), .a_rem, .b_rem,
    .done(cmp_done), .lt(cmp_lt), .eq(cmp_eq), .gt(cmp_gt));

  logic [AW:0] wbase;
  logic        fill_now;
  assign wbase    = (state == S_IDLE) ? '0 : wptr;
  assign fill_now = d_valid && ((state == S_IDLE) ? in_valid : !filled);
  assign in_ready  = state == S_IDLE;
  assign kb_slot   = m.kslot;
  assign kb_frag   = kf[4:0];
  assign out_valid = state == S_OUT;
  assign out_meta  = r;
  assign out_leaf  = leaf_next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; m <= '0; r <= '0; kf <= '0; filled <= 1'b0; wptr <= '0;
      p <= '0; lim <= '0; klen <= '0; j <= '0; cand <= '0; leaf_next <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          m <= in_meta; kf <= '0; filled <= 1'b0; wptr <= '0; state <= S_KEY;
        end
        S_KEY: begin  // read port latency 1: fragment kf-1 arrives while kf is asked
          if (kf != 0) kbuf[kf - 1] <= kb_data;
          kf <= kf + 1'b1;
          if (kf == 6'(KEY_FRAGS)) state <= S_FILL;
        end
        S_FILL: if (filled) state <= S_DECIDE;
        S_DECIDE: begin
          r <= m;
          leaf_next <= 1'b0;
          j <= '0;
          if (m.blk == BLK_SHORTCUT) begin
            if (rd64(13'd8) > m.rd_ver && rd64(13'd16) != 64'd0) begin
              r.use_phys <= 1'b1;      // visit the older version of this node
              r.phys     <= rd64(13'd16);
              state      <= S_OUT;
            end else begin
              p        <= 13'(HDR_BYTES);
              lim      <= 13'(HDR_BYTES) + 13'(rd16(13'd38));
              cand     <= rd48(13'd24);   // leftmost child for segment 0
              r.len    <= 13'(rd16(13'd36)) - 13'(SC_END);   // segment 0 up to first shortcut or end
              r.blk    <= BLK_SORTED;
              r.offset <= 13'(SC_END);
              r.seg0   <= 1'b1;
              r.carry  <= rd48(13'd24);
              if (rd16(13'd38) != 16'd0) r.len <= 13'(rd16(13'd48 + 13'd2 + 13'(rd16(13'd48)))) - 13'(SC_END);
              state    <= S_ITEM;
            end
          end else begin
            // the buffer starts at the 16-byte boundary below the segment
            lim <= 13'(m.offset[3:0]) + m.len;
            if (m.seg0) begin
              cand <= m.carry;
              p    <= 13'(m.offset[3:0]);
            end else begin
              cand <= rd48(13'(m.offset[3:0]) + 13'd2);
              p    <= 13'(m.offset[3:0]) + 13'd2 + 13'(rd16(13'(m.offset[3:0])));
            end
            state <= S_ITEM;
          end
        end
        S_ITEM: begin
          if (p + 13'd2 > lim) state <= S_ACT;
          else begin
            klen  <= 13'(rd16(p));
            j     <= '0;
            state <= S_CMP;
          end
        end
        S_CMP: j <= j + 1'b1;
        default: ;
      endcase
      // comparison verdict (cmp_done arrives one cycle after the deciding fragment)
      if (state == S_CMP && cmp_done) begin
        if (cmp_lt || cmp_eq) begin
          if (m.blk == BLK_SHORTCUT) begin
            // shortcut entry: [klen][key][seg offset]; next entry or sorted end bounds it
            r.offset <= 13'(rd16(p + 13'd2 + klen));
            r.seg0   <= 1'b0;
            if (p + 13'd4 + klen < lim)
              r.len <= 13'(rd16(p + 13'd4 + klen + 13'd2 + 13'(rd16(p + 13'd4 + klen)))) - 13'(rd16(p + 13'd2 + klen));
            else
              r.len <= 13'(rd16(13'd36)) - 13'(rd16(p + 13'd2 + klen));
            p <= p + 13'd4 + klen;
          end else begin
            cand <= rd48(p + 13'd4 + klen);
            p    <= p + 13'd4 + klen + 13'(rd16(p + 13'd2 + klen));
          end
          state <= S_ITEM;
        end else begin
          state <= S_ACT;
        end
      end
      if (state == S_ACT) begin
        if (m.blk != BLK_SHORTCUT) begin
          r.lid      <= cand;
          r.use_phys <= 1'b0;
          r.level    <= m.level - 1'b1;
          r.blk      <= BLK_SHORTCUT;
          r.offset   <= '0;
          r.len      <= 13'(SC_END);
          r.seg0     <= 1'b0;
          leaf_next  <= m.level == 8'd1;
        end
        state <= S_OUT;
      end
      if (state == S_OUT && out_ready) state <= S_IDLE;
      // data buffer fill runs alongside the key copy; the first word may come
      // with the metadata
      if (fill_now) begin
        for (int i = 0; i < FRAG_BYTES; i++)
          if (wbase + (AW+1)'(i) < (AW+1)'(BUF_BYTES)) dbuf[wbase[AW-1:0] + AW'(i)] <= d_data[i*8 +: 8];
        wptr   <= wbase + (AW+1)'(FRAG_BYTES);
        filled <= d_last;
      end
    end
  end
endmodule
