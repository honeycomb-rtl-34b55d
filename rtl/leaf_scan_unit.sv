// leaf_scan_unit: one request slot of the range scan array (paper Sec. 4.3).
//
// Runs scan(Kl, Ku) over a leaf and, through right-sibling pointers, the
// leaves after it, emitting the items in key order. A slot owns its SC, S and
// L buffers (header+shortcut block, one sorted segment, the log block) and the
// FSM that coordinates the three scan variants:
//   * shortcut scan: version check (an older version is fetched by its
//     physical address when the node is newer than the read version), then the
//     segment whose shortcut key is the largest <= Kl is chosen;
//   * log scan: each log entry is fed to the log sorter with its order hint
//     and version delta, which builds the indirection array in key order;
//   * sorted scan: the segment's items are walked in order and merged with the
//     sorted log through the log entries' back pointers (an insert pointing at
//     sorted item s comes just before s; an entry flagged "replace" stands for
//     s, and a delete removes it), without comparing sorted and log keys.
// Each merged item is compared with Kl and Ku by two key comparison pipelines.
// The item just before the first key > Kl (the largest key <= Kl, K_s) is the
// first result; results continue up to the last key <= Ku, crossing segment and
// leaf boundaries. A get (op 0) returns only an item equal to Kl. Each result
// is a descriptor (leaf LID, item offset in the node, from-log flag); `last`
// marks the final one and `empty` a request with no result.
// Memory: fetches go out on f_* (metadata naming block, offset and length) and
// the data returns on d_* as 16-byte words covering the 16-aligned range.
// The scan semantics, buffers, back-pointer merge and hint sort are the
// paper's; layouts (hc_pkg), buffer sizes, descriptor results and these rules
// are this design's choices: back pointers refer to sorted items only, a
// replace entry's key is its target's key, and a K_s lying in the segment
// before the chosen one (when the boundary item was deleted) is not found.
module leaf_scan_unit
  import hc_pkg::*;
#(
  parameter int unsigned S_BYTES = 1024,
  parameter int unsigned L_BYTES = 1024,
  parameter int unsigned LOG_DEPTH = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  meta_t             in_meta,
  // key buffer read port
  output logic [5:0]        kb_slot,
  output logic              kb_ub,
  output logic [4:0]        kb_frag,
  input  logic [BEAT_W-1:0] kb_data,
  // block fetch
  output logic              f_valid,
  input  logic              f_ready,
  output meta_t             f_meta,
  input  logic              d_valid,
  input  logic [BEAT_W-1:0] d_data,
  input  logic              d_last,
  // results
  output logic              out_valid,
  input  logic              out_ready,
  output result_t           out_res,
  output logic              done,       // pulses when the request has finished
  output meta_t             done_meta
);
  typedef enum logic [4:0] {
    S_IDLE, S_KEYS, S_HDR_REQ, S_HDR_WAIT, S_VER, S_LOG_REQ, S_SC_ITEM, S_SC_CMP,
    S_SEG_REQ, S_LOG_WAIT, S_LOG_ITEM, S_SEG_WAIT, S_PICK, S_CMP, S_EMIT, S_NEXT, S_FINISH, S_LAST
  } state_e;
  typedef enum logic [1:0] {B_SC, B_S, B_L} buf_e;

  state_e state;
  meta_t  m;
  logic [7:0]        scb [SC_END];
  logic [7:0]        sb  [S_BYTES];
  logic [7:0]        lb  [L_BYTES];
  logic [BEAT_W-1:0] lbk [KEY_FRAGS];
  logic [BEAT_W-1:0] ubk [KEY_FRAGS];
  logic [6:0]        kf;
  buf_e              fsel;          // buffer being filled
  logic [13:0]       wptr;
  logic              filling;

  // node geometry of the current leaf
  logic [12:0] sorted_end, used, sc_lim;
  lid_t        right_sib;
  logic        first_leaf;
  // shortcut scan
  logic [12:0] sp;                  // SC entry pointer
  logic [12:0] seg_start, seg_end, seg_sc;   // seg_sc: SC entry of the segment key (0: none)
  logic [12:0] s_base;              // node offset of sb[0]
  logic [12:0] l_base;
  // log scan
  logic [12:0] lp;
  logic [6:0]  li;
  // merge
  logic [12:0] cur;                 // next sorted item (node offset)
  logic        cur_isseg;           // cur is the value-only item at a segment start
  // current item
  buf_e        kbsel;
  logic [12:0] kpos, klen;          // key position in its buffer
  logic [12:0] ioff;                // item offset reported
  logic        ilog;
  logic [4:0]  j;
  // scan state
  logic        pend_v, pend_eq, emitted, finished, have_next, skip_eq;
  result_t     pend, res;

  function automatic logic [7:0] rbyte(input buf_e b, input logic [12:0] a);
    unique case (b)
      B_SC:    return (a < 13'(SC_END))  ? scb[a[8:0]] : 8'h00;
      B_S:     return (a < 13'(S_BYTES)) ? sb[a[$clog2(S_BYTES)-1:0]] : 8'h00;
      default: return (a < 13'(L_BYTES)) ? lb[a[$clog2(L_BYTES)-1:0]] : 8'h00;
    endcase
  endfunction
  function automatic logic [15:0] r16(input buf_e b, input logic [12:0] a);
    return {rbyte(b, a + 13'd1), rbyte(b, a)};
  endfunction
  function automatic logic [63:0] r64(input buf_e b, input logic [12:0] a);
    logic [63:0] v;
    for (int i = 0; i < 8; i++) v[i*8 +: 8] = rbyte(b, a + 13'(i));
    return v;
  endfunction

  // ------------------------------------------------------------ log sorter
  logic [$clog2(LOG_DEPTH):0]   ls_count;
  logic [12:0]                  ls_off;
  logic                         ls_keep, ls_replace, ls_in;
  log_sorter #(.DEPTH(LOG_DEPTH)) u_sort (
    .clk, .rst_n, .clear(state == S_HDR_REQ), .in_valid(ls_in),
    .in_off(lp + l_base), .in_hint(rbyte(B_L, lp + 13'd2)), .in_replace(rbyte(B_L, lp + 13'd2) >= 8'h80),
    .in_delta(r64(B_L, lp + 13'd3) & 64'hFF_FFFF_FFFF), .node_ver(r64(B_SC, 13'd8)), .rd_ver(m.rd_ver),
    .count(ls_count), .rd_idx(li[$clog2(LOG_DEPTH)-1:0]), .rd_off(ls_off), .rd_keep(ls_keep), .rd_replace(ls_replace));
  assign ls_in = state == S_LOG_ITEM && lp < used - l_base;
  // the hint byte's bit 7 is the replace flag; the hint itself is 7 bits
  logic [12:0] lo;       // log entry offset in lb
  logic [12:0] lbp;      // its back pointer
  logic        lhave;    // a log entry remains
  assign lo    = ls_off - l_base;
  assign lbp   = 13'(r16(B_L, lo));
  assign lhave = 7'(li) < 7'(ls_count);

  // ------------------------------------------------------------ compare
  logic [BEAT_W-1:0] afrag;
  always_comb
    for (int i = 0; i < FRAG_BYTES; i++) afrag[i*8 +: 8] = rbyte(kbsel, kpos + 13'(j) * 13'd16 + 13'(i));
  logic cmp_v, lo_done, lo_lt, lo_eq, lo_gt, hi_done, hi_lt, hi_eq, hi_gt;
  logic [9:0] a_rem, lb_rem, ub_rem;
  logic [8:0] ublen;
  assign ublen  = m.ub_len;
  assign cmp_v  = state == S_CMP || state == S_SC_CMP;
  assign a_rem  = 10'(klen) - 10'(j) * 10'd16;
  assign lb_rem = 10'(m.lb_len) - 10'(j) * 10'd16;
  assign ub_rem = 10'(ublen) - 10'(j) * 10'd16;
  key_compare #(.FRAG_BYTES(FRAG_BYTES)) u_lo (
    .clk, .rst_n, .valid(cmp_v), .start(cmp_v && j == 0), .a(afrag), .b(lbk[j < 5'(KEY_FRAGS) ? j : 5'd0]),
    .a_rem, .b_rem(lb_rem), .done(lo_done), .lt(lo_lt), .eq(lo_eq), .gt(lo_gt));
  key_compare #(.FRAG_BYTES(FRAG_BYTES)) u_hi (
    .clk, .rst_n, .valid(cmp_v), .start(cmp_v && j == 0), .a(afrag), .b(ubk[j < 5'(KEY_FRAGS) ? j : 5'd0]),
    .a_rem, .b_rem(ub_rem), .done(hi_done), .lt(hi_lt), .eq(hi_eq), .gt(hi_gt));
  // both pipelines must have decided
  logic lo_seen, hi_seen, lo_le, lo_eqr, hi_le;

  // ------------------------------------------------------------ outputs
  assign in_ready  = state == S_IDLE;
  assign kb_slot   = m.kslot;
  assign kb_ub     = kf >= 7'(KEY_FRAGS + 1) && m.op == OP_SCAN;
  assign kb_frag   = (kf >= 7'(KEY_FRAGS + 1)) ? 5'(kf - 7'(KEY_FRAGS + 1)) : 5'(kf);
  assign f_valid   = state == S_HDR_REQ || (state == S_LOG_REQ && used != sorted_end)
                  || (state == S_SEG_REQ && seg_start != seg_end);
  always_comb begin
    f_meta        = m;
    f_meta.level  = 8'd0;
    f_meta.blk    = BLK_SHORTCUT;
    f_meta.offset = '0;
    f_meta.len    = 13'(SC_END);
    if (state == S_LOG_REQ) begin
      f_meta.blk = BLK_LOG; f_meta.offset = sorted_end; f_meta.len = used - sorted_end;
    end else if (state == S_SEG_REQ) begin
      f_meta.blk = BLK_SORTED; f_meta.offset = seg_start; f_meta.len = seg_end - seg_start;
    end
  end
  assign out_valid = state == S_EMIT || state == S_LAST;
  assign out_res   = res;
  assign done_meta = m;

  // next shortcut entry's segment offset after SC entry e (sorted_end if none)
  function automatic logic [12:0] sc_next_off(input logic [12:0] e);
    logic [12:0] n;
    n = e + 13'd4 + 13'(r16(B_SC, e));
    if (n + 13'd2 > sc_lim) return sorted_end;
    return 13'(r16(B_SC, n + 13'd2 + 13'(r16(B_SC, n))));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; m <= '0; kf <= '0; fsel <= B_SC; wptr <= '0; filling <= 1'b0;
      sorted_end <= '0; used <= '0; sc_lim <= '0; right_sib <= '0; first_leaf <= 1'b0;
      sp <= '0; seg_start <= '0; seg_end <= '0; seg_sc <= '0; s_base <= '0; l_base <= '0;
      lp <= '0; li <= '0; cur <= '0; cur_isseg <= 1'b0; kbsel <= B_S; kpos <= '0; klen <= '0;
      ioff <= '0; ilog <= 1'b0; j <= '0; pend_v <= 1'b0; pend_eq <= 1'b0; skip_eq <= 1'b0;
      emitted <= 1'b0; finished <= 1'b0; have_next <= 1'b0; pend <= '0; res <= '0; done <= 1'b0;
      lo_seen <= 1'b0; hi_seen <= 1'b0; lo_le <= 1'b0; lo_eqr <= 1'b0; hi_le <= 1'b0;
    end else begin
      done <= 1'b0;
      // buffer fill
      if (filling && d_valid) begin
        for (int i = 0; i < FRAG_BYTES; i++) begin
          unique case (fsel)
            B_SC: if (wptr + 14'(i) < 14'(SC_END))  scb[wptr[8:0] + 9'(i)] <= d_data[i*8 +: 8];
            B_S:  if (wptr + 14'(i) < 14'(S_BYTES)) sb[wptr[$clog2(S_BYTES)-1:0] + ($clog2(S_BYTES))'(i)] <= d_data[i*8 +: 8];
            default: if (wptr + 14'(i) < 14'(L_BYTES)) lb[wptr[$clog2(L_BYTES)-1:0] + ($clog2(L_BYTES))'(i)] <= d_data[i*8 +: 8];
          endcase
        end
        wptr <= wptr + 14'd16;
        if (d_last) filling <= 1'b0;
      end
      // comparison verdicts (both pipelines run on the same fragments)
      if (cmp_v && lo_done) begin lo_seen <= 1'b1; lo_le <= lo_lt || lo_eq; lo_eqr <= lo_eq; end
      if (cmp_v && hi_done) begin hi_seen <= 1'b1; hi_le <= hi_lt || hi_eq; end
      if (cmp_v) j <= j + 1'b1;

      unique case (state)
        S_IDLE: if (in_valid) begin
          m <= in_meta; kf <= '0; first_leaf <= 1'b1; pend_v <= 1'b0; pend_eq <= 1'b0;
          emitted <= 1'b0; finished <= 1'b0; have_next <= 1'b0;
          state <= S_KEYS;
        end
        S_KEYS: begin   // LB fragments then UB fragments, read latency 1
          kf <= kf + 1'b1;
          if (kf >= 7'd1 && kf <= 7'(KEY_FRAGS)) lbk[kf - 7'd1] <= kb_data;
          if (kf >= 7'(KEY_FRAGS + 2)) ubk[kf - 7'(KEY_FRAGS + 2)] <= kb_data;
          if (kf == 7'(2 * KEY_FRAGS + 1)) state <= S_HDR_REQ;
        end
        S_HDR_REQ: if (f_ready) begin
          fsel <= B_SC; wptr <= '0; filling <= 1'b1; state <= S_HDR_WAIT;
        end
        S_HDR_WAIT: if (!filling) state <= S_VER;
        S_VER: begin
          if (r64(B_SC, 13'd8) > m.rd_ver && r64(B_SC, 13'd16) != 64'd0) begin
            m.use_phys <= 1'b1; m.phys <= r64(B_SC, 13'd16); state <= S_HDR_REQ;
          end else begin
            sorted_end <= 13'(r16(B_SC, 13'd36));
            used       <= 13'(r16(B_SC, 13'd2));
            sc_lim     <= 13'(HDR_BYTES) + 13'(r16(B_SC, 13'd38));
            right_sib  <= r64(B_SC, 13'd30) [47:0];
            l_base     <= 13'(r16(B_SC, 13'd36)) & ~13'd15;
            sp         <= 13'(HDR_BYTES);
            seg_sc     <= '0;
            seg_start  <= 13'(SC_END);
            seg_end    <= (r16(B_SC, 13'd38) != 16'd0)
                          ? 13'(r16(B_SC, 13'd50 + 13'(r16(B_SC, 13'd48)))) : 13'(r16(B_SC, 13'd36));
            state      <= S_LOG_REQ;
          end
        end
        S_LOG_REQ: if (f_ready || used == sorted_end) begin   // log fetch overlaps the shortcut scan
          if (used != sorted_end) begin
            fsel <= B_L; wptr <= '0; filling <= 1'b1;
          end
          state <= first_leaf ? S_SC_ITEM : S_LOG_WAIT;
        end
        // shortcut scan (first leaf only): largest shortcut key <= Kl
        S_SC_ITEM: begin
          if (sp + 13'd2 > sc_lim) state <= S_LOG_WAIT;
          else begin
            kbsel <= B_SC; kpos <= sp + 13'd2; klen <= 13'(r16(B_SC, sp)); j <= '0;
            lo_seen <= 1'b0; hi_seen <= 1'b0; state <= S_SC_CMP;
          end
        end
        S_SC_CMP: if (lo_seen) begin
          if (lo_le) begin
            seg_sc    <= sp;
            seg_start <= 13'(r16(B_SC, sp + 13'd2 + klen));
            seg_end   <= sc_next_off(sp);
            sp        <= sp + 13'd4 + klen;
            state     <= S_SC_ITEM;
          end else state <= S_LOG_WAIT;
        end
        S_LOG_WAIT: if (!filling) begin
          lp <= sorted_end - l_base; li <= '0; state <= S_LOG_ITEM;
          skip_eq <= first_leaf && seg_sc != '0;
        end
        S_LOG_ITEM: begin   // one log entry into the sorter per cycle
          if (lp < used - l_base)
            lp <= lp + 13'(LOG_HDR) + 13'd4 + 13'(r16(B_L, lp + 13'd8))
                  + ((r16(B_L, lp + 13'd10 + 13'(r16(B_L, lp + 13'd8))) == DELETE_LEN)
                     ? 13'd0 : 13'(r16(B_L, lp + 13'd10 + 13'(r16(B_L, lp + 13'd8)))));
          else state <= S_SEG_REQ;
        end
        S_SEG_REQ: begin
          s_base <= seg_start & ~13'd15; cur <= seg_start; cur_isseg <= seg_sc != '0;
          if (seg_start == seg_end) state <= S_PICK;
          else if (f_ready) begin
            fsel <= B_S; wptr <= '0; filling <= 1'b1; state <= S_SEG_WAIT;
          end
        end
        S_SEG_WAIT: if (!filling) state <= S_PICK;
        // choose the next item in merged key order
        S_PICK: begin
          if (lhave && (!ls_keep || lbp < cur || (skip_eq && !ls_replace && lbp == cur)))
            li <= li + 1'b1;                                   // not visible / before the range
          else if (lhave && lbp == cur && (cur < seg_end || cur == sorted_end)) begin
            li <= li + 1'b1;
            if (ls_replace)   // stands for the sorted item at cur
              cur <= cur + (cur_isseg ? 13'd2 + 13'(r16(B_S, cur - s_base))
                                      : 13'd4 + 13'(r16(B_S, cur - s_base)) + 13'(r16(B_S, cur - s_base + 13'd2 + 13'(r16(B_S, cur - s_base)))));
            if (ls_replace) cur_isseg <= 1'b0;
            if (ls_replace) skip_eq <= 1'b0;
            if (r16(B_L, lo + 13'd10 + 13'(r16(B_L, lo + 13'd8))) != DELETE_LEN) begin
              ilog <= 1'b1; ioff <= ls_off;
              kbsel <= B_L; kpos <= lo + 13'd10; klen <= 13'(r16(B_L, lo + 13'd8));
              j <= '0; lo_seen <= 1'b0; hi_seen <= 1'b0; state <= S_CMP;
            end
          end else if (cur < seg_end) begin
            ilog <= 1'b0; ioff <= cur; skip_eq <= 1'b0;
            if (cur_isseg) begin
              kbsel <= B_SC; kpos <= seg_sc + 13'd2; klen <= 13'(r16(B_SC, seg_sc));
              cur   <= cur + 13'd2 + 13'(r16(B_S, cur - s_base));
            end else begin
              kbsel <= B_S; kpos <= cur - s_base + 13'd2; klen <= 13'(r16(B_S, cur - s_base));
              cur   <= cur + 13'd4 + 13'(r16(B_S, cur - s_base)) + 13'(r16(B_S, cur - s_base + 13'd2 + 13'(r16(B_S, cur - s_base))));
            end
            cur_isseg <= 1'b0;
            j <= '0; lo_seen <= 1'b0; hi_seen <= 1'b0; state <= S_CMP;
          end else state <= S_NEXT;
        end
        S_CMP: if (lo_seen && hi_seen) begin
          state <= S_PICK;
          if (lo_le) begin                 // key <= Kl: the K_s candidate so far
            pend_v  <= 1'b1;
            pend_eq <= lo_eqr;
            pend    <= '{tag: m.tag, offset: ioff, leaf: m.lid, from_log: ilog, last: 1'b0, empty: 1'b0};
          end else if (hi_le && m.op == OP_SCAN) begin   // Kl < key <= Ku
            res <= '{tag: m.tag, offset: ioff, leaf: m.lid, from_log: ilog, last: 1'b0, empty: 1'b0};
            if (pend_v) begin
              res <= pend; pend_v <= 1'b0; have_next <= 1'b1;
            end
            state <= S_EMIT;
          end else begin                   // key > Ku: done
            finished <= 1'b1; state <= S_FINISH;
          end
        end
        S_EMIT: if (out_ready) begin
          emitted <= 1'b1;
          if (have_next) begin
            res <= '{tag: m.tag, offset: ioff, leaf: m.lid, from_log: ilog, last: 1'b0, empty: 1'b0};
            have_next <= 1'b0;
          end else state <= finished ? S_FINISH : S_PICK;
        end
        S_NEXT: begin   // end of segment: next segment, else next leaf
          if (seg_end < sorted_end) begin
            seg_start <= seg_end;
            seg_sc    <= sp;              // SC entry of the next segment
            seg_end   <= sc_next_off(sp);
            sp        <= sp + 13'd4 + 13'(r16(B_SC, sp));
            state     <= S_SEG_REQ;
          end else if (right_sib != '0) begin
            m.lid <= right_sib; m.use_phys <= 1'b0; first_leaf <= 1'b0;
            state <= S_HDR_REQ;
          end else begin
            finished <= 1'b1; state <= S_FINISH;
          end
        end
        S_FINISH: begin
          if (pend_v && (m.op == OP_SCAN || pend_eq)) begin
            res <= pend; pend_v <= 1'b0; have_next <= 1'b0; state <= S_EMIT;
          end else begin
            res <= '{tag: m.tag, offset: '0, leaf: '0, from_log: 1'b0, last: 1'b1, empty: !emitted};
            state <= S_LAST;
          end
        end
        S_LAST: if (out_ready) begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
