// mem_subsystem: node cache, page table and load balancing (paper Fig. 11).
//
// NP request ports (one per MSI adapter) ask for byte ranges of B-Tree nodes.
// A request names a node by LID (or, for an old version, by physical
// address), says whether it is the node's header+shortcut access (`first`) and
// whether the node is interior (cacheable). Requests are taken one at a time
// (round robin) through a short pipeline:
//   1. page table and NAT lookup. A first access records the node's physical
//      address in the NAT for the request's sequence number; later accesses of
//      the same visit use the NAT address, so a request never mixes versions.
//   2. metadata table lookup: a hit needs the LID, the same physical address and
//      every 256-byte chunk of the range present.
//   3. routing: root LID present in the root cache -> on-chip read; other hits
//      -> on-board DRAM, unless the load balancer diverts them to PCIe; misses
//      -> host memory over PCIe. A miss on an interior node's header+shortcut
//      allocates a cache frame; misses on allocated nodes (and on the root) are
//      fetched as whole 256-byte chunks and written back into the frame (and
//      root cache) while being returned.
// The response crossbar returns the 16-byte-aligned words covering the
// requested range to the requesting port, with the port's tag; responses from
// different sources may interleave between tags. Page-table writes from the
// host invalidate the LID's cache entry and, for the root, the root cache.
// Memory-side contract: a read of (16-aligned address, length) returns length/16
// words in order with `last` on the final one; a DRAM frame is 8 KB at
// slot * 8192. Block structure and policies follow the paper; the serial
// pipeline, the one-node-at-a-time root cache and the interface are this
// design's choices. The paper's write-back locking is not needed here because
// lookups, fills and invalidations are serialised in one clock domain.
module mem_subsystem
  import hc_pkg::*;
#(
  parameter int unsigned NP         = 4,
  parameter int unsigned PT_ENTRIES = 1 << 20,
  parameter int unsigned MT_ENTRIES = 1024,
  parameter int unsigned OPS        = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // engine ports
  input  logic   [NP-1:0]       req_valid,
  output logic   [NP-1:0]       req_ready,
  input  mreq_t  [NP-1:0]       req,
  output logic   [NP-1:0]       resp_valid,
  input  logic   [NP-1:0]       resp_ready,
  output mresp_t [NP-1:0]       resp,
  // host control
  input  logic                  pt_wr,
  input  lid_t                  pt_lid,
  input  paddr_t                pt_phys,
  input  lid_t                  root_lid,
  input  logic                  lb_enable,
  // on-board DRAM
  output logic                  dram_rd_valid,
  input  logic                  dram_rd_ready,
  output logic [63:0]           dram_rd_addr,
  output logic [13:0]           dram_rd_len,
  output logic [7:0]            dram_rd_tag,
  input  logic                  dram_rsp_valid,
  output logic                  dram_rsp_ready,
  input  mresp_t                dram_rsp,
  output logic                  dram_wr_valid,
  input  logic                  dram_wr_ready,
  output logic [63:0]           dram_wr_addr,
  output logic [BEAT_W-1:0]     dram_wr_data,
  // PCIe to host memory
  output logic                  pcie_rd_valid,
  input  logic                  pcie_rd_ready,
  output logic [63:0]           pcie_rd_addr,
  output logic [13:0]           pcie_rd_len,
  output logic [7:0]            pcie_rd_tag,
  input  logic                  pcie_rsp_valid,
  output logic                  pcie_rsp_ready,
  input  mresp_t                pcie_rsp,
  // event counters
  output logic [31:0]           cnt_hit,
  output logic [31:0]           cnt_miss,
  output logic [31:0]           cnt_root,
  output logic [31:0]           cnt_divert,
  output logic [31:0]           cnt_wb_chunks
);
  localparam int unsigned MW = $clog2(MT_ENTRIES);
  localparam int unsigned OW = $clog2(OPS);
  typedef enum logic [1:0] {SRC_DRAM, SRC_PCIE, SRC_ROOT} src_e;
  typedef struct packed {
    logic [$clog2(NP)-1:0] port;
    logic [7:0]            ptag;
    src_e                  src;
    logic                  wb;
    logic [MW-1:0]         slot;
    logic                  rfill;
    logic [13:0]           f0;      // fetched range start (byte in node)
    logic [13:0]           f1;      // fetched range end
    logic [13:0]           a0;      // delivered range start
    logic [13:0]           a1;      // delivered range end
    logic [13:0]           cur;     // address of the next word
  } op_t;

  typedef enum logic [2:0] {S_IDLE, S_LOOK, S_ISSUE, S_ROOT} state_e;
  state_e              state;
  mreq_t               r;
  logic [$clog2(NP)-1:0] rport, rr;
  op_t                 ops [OPS];
  logic [OPS-1:0]      op_busy;
  logic                op_ok;
  logic [OW-1:0]       op_id;
  op_t                 nop;
  paddr_t              rphys, root_phys;

  // ---------------------------------------------------------------- tables
  paddr_t pt_rd_phys;
  logic   pt_upd;
  lid_t   pt_upd_lid;
  page_table #(.ENTRIES(PT_ENTRIES)) u_pt (
    .clk, .rst_n, .wr_en(pt_wr), .wr_lid(pt_lid), .wr_phys(pt_phys),
    .upd(pt_upd), .upd_lid(pt_upd_lid),
    .rd_en(state == S_IDLE), .rd_lid(req[rr].lid), .rd_phys(pt_rd_phys));

  paddr_t nat_phys;
  logic   nat_wr;
  node_address_table #(.ENTRIES(64)) u_nat (
    .clk, .wr_en(nat_wr), .wr_seq(r.seq), .wr_phys(rphys), .rd_seq(r.seq), .rd_phys(nat_phys));

  logic          mt_hit, mt_alloc, mt_fill;
  logic [MW-1:0] mt_slot, mt_alloc_slot, mt_fill_slot;
  paddr_t        mt_phys;
  logic [31:0]   mt_occ, mt_fill_mask;
  metadata_table #(.ENTRIES(MT_ENTRIES), .WAYS(4)) u_mt (
    .clk, .rst_n, .lk_lid(r.lid), .hit(mt_hit), .hit_slot(mt_slot), .hit_phys(mt_phys), .hit_occ(mt_occ),
    .alloc(mt_alloc), .alloc_lid(r.lid), .alloc_phys(rphys), .alloc_slot(mt_alloc_slot),
    .fill(mt_fill), .fill_slot(mt_fill_slot), .fill_mask(mt_fill_mask),
    .inval(pt_upd), .inval_lid(pt_upd_lid));

  logic              lb_to_pcie;
  logic              lb_dram_issue, lb_pcie_issue, lb_dram_done, lb_pcie_done;
  logic [13:0]       lb_dram_done_bytes, lb_pcie_done_bytes;
  logic [31:0]       lb_dram_bytes, lb_pcie_bytes;
  logic [15:0]       lb_dram_ops, lb_pcie_ops;
  load_balancer u_lb (
    .clk, .rst_n, .enable(lb_enable), .dram_issue(lb_dram_issue), .pcie_issue(lb_pcie_issue),
    .issue_bytes(nop.f1 - nop.f0), .dram_done(lb_dram_done), .dram_done_bytes(lb_dram_done_bytes),
    .pcie_done(lb_pcie_done), .pcie_done_bytes(lb_pcie_done_bytes), .hit_to_pcie(lb_to_pcie),
    .dram_bytes(lb_dram_bytes), .pcie_bytes(lb_pcie_bytes), .dram_ops(lb_dram_ops), .pcie_ops(lb_pcie_ops));

  logic              rc_covers, rc_wr, rc_chunk_done, rc_rd;
  logic [12:0]       rc_wr_addr, rc_rd_addr;
  logic [4:0]        rc_chunk;
  logic [BEAT_W-1:0] rc_wr_data, rc_rd_data;
  root_cache #(.NODE_BYTES(NODE_BYTES)) u_rc (
    .clk, .rst_n, .root_lid, .inval(pt_upd && pt_upd_lid == root_lid),
    .wr_en(rc_wr), .wr_addr(rc_wr_addr), .wr_data(rc_wr_data), .wr_chunk_done(rc_chunk_done), .wr_chunk(rc_chunk),
    .q_lid(r.lid), .q_off(r.offset), .q_len({1'b0, r.len}), .covers(rc_covers),
    .rd_en(rc_rd), .rd_addr(rc_rd_addr), .rd_data(rc_rd_data));

  // ---------------------------------------------------------------- lookup
  always_comb begin
    op_ok = 1'b0; op_id = '0;
    for (int i = OPS - 1; i >= 0; i--)
      if (!op_busy[i]) begin op_ok = 1'b1; op_id = OW'(i); end
  end

  logic [31:0] need_mask;
  logic        hit_full, root_hit;
  logic [13:0] a0, a1, c0b, c1b;
  always_comb begin
    a0  = {1'b0, r.offset} & ~14'd15;
    a1  = ({1'b0, r.offset} + {1'b0, r.len} + 14'd15) & ~14'd15;
    c0b = {1'b0, r.offset} & ~14'd255;
    c1b = ({1'b0, r.offset} + {1'b0, r.len} + 14'd255) & ~14'd255;
    need_mask = '0;
    for (int c = 0; c < 32; c++)
      if (14'(c * 256) >= c0b && 14'(c * 256) < c1b) need_mask[c] = 1'b1;
    if (r.use_phys)   rphys = r.phys;
    else if (r.first) rphys = (mt_hit ? mt_phys : pt_rd_phys);
    else              rphys = nat_phys;
    hit_full = mt_hit && mt_phys == rphys && (mt_occ & need_mask) == need_mask;
    root_hit = rc_covers && rphys == root_phys;
    nop      = '0;
    nop.port = rport;
    nop.ptag = r.tag;
    nop.a0   = a0;
    nop.a1   = a1;
    nop.f0   = a0;
    nop.f1   = a1;
    nop.slot = mt_slot;
    if (root_hit)                  nop.src = SRC_ROOT;
    else if (hit_full)             nop.src = lb_to_pcie ? SRC_PCIE : SRC_DRAM;
    else begin
      nop.src = SRC_PCIE;
      if (r.interior && (r.first || (mt_hit && mt_phys == rphys))) begin
        nop.wb   = 1'b1;
        nop.slot = (mt_hit && mt_phys == rphys) ? mt_slot : mt_alloc_slot;
      end
      nop.rfill = r.lid == root_lid && !r.use_phys && rphys == pt_rd_phys;
      if (nop.wb || nop.rfill) begin
        nop.f0 = c0b;
        nop.f1 = c1b;
      end
    end
    nop.cur = nop.f0;
  end

  assign nat_wr   = state == S_LOOK && r.first;
  assign mt_alloc = state == S_LOOK && !root_hit && !hit_full && nop.wb && !(mt_hit && mt_phys == rphys);

  always_comb begin
    req_ready = '0;
    if (state == S_IDLE && op_ok) req_ready[rr] = 1'b1;
  end

  // ---------------------------------------------------------------- issue
  op_t cop;   // op being issued
  logic [OW-1:0] cop_id;
  assign dram_rd_valid = state == S_ISSUE && cop.src == SRC_DRAM;
  assign dram_rd_addr  = 64'(cop.slot) * 64'(NODE_BYTES) + 64'(cop.f0);
  assign dram_rd_len   = cop.f1 - cop.f0;
  assign dram_rd_tag   = 8'(cop_id);
  assign pcie_rd_valid = state == S_ISSUE && cop.src == SRC_PCIE;
  assign pcie_rd_addr  = rphys + 64'(cop.f0);
  assign pcie_rd_len   = cop.f1 - cop.f0;
  assign pcie_rd_tag   = 8'(cop_id);
  assign lb_dram_issue = dram_rd_valid && dram_rd_ready;
  assign lb_pcie_issue = pcie_rd_valid && pcie_rd_ready;

  // ---------------------------------------------------------------- crossbar
  // sources in priority order: root cache stream, DRAM, PCIe
  logic              root_beat;   // rc_rd_data valid this cycle
  logic              x_valid, x_last;
  logic [1:0]        x_src;
  logic [OW-1:0]     x_tag;
  logic [BEAT_W-1:0] x_data;
  op_t               xo;
  logic              x_deliver, x_go, x_wr_ok;
  always_comb begin
    x_valid = 1'b0; x_src = 2'd0; x_tag = '0; x_data = '0; x_last = 1'b0;
    if (root_beat) begin
      x_valid = 1'b1; x_src = 2'(SRC_ROOT); x_tag = cop_id; x_data = rc_rd_data;
      x_last = ops[cop_id].cur + 14'd16 == ops[cop_id].f1;
    end else if (dram_rsp_valid) begin
      x_valid = 1'b1; x_src = 2'(SRC_DRAM); x_tag = dram_rsp.tag[OW-1:0]; x_data = dram_rsp.data; x_last = dram_rsp.last;
    end else if (pcie_rsp_valid) begin
      x_valid = 1'b1; x_src = 2'(SRC_PCIE); x_tag = pcie_rsp.tag[OW-1:0]; x_data = pcie_rsp.data; x_last = pcie_rsp.last;
    end
    xo        = ops[x_tag];
    x_deliver = xo.cur >= xo.a0 && xo.cur < xo.a1;
    x_wr_ok   = !(xo.wb && x_src == 2'(SRC_PCIE)) || dram_wr_ready;
    x_go      = x_valid && x_wr_ok && (!x_deliver || resp_ready[xo.port]);
    resp_valid = '0;
    resp       = '0;
    for (int p = 0; p < NP; p++) begin
      resp[p].tag  = xo.ptag;
      resp[p].data = x_data;
      resp[p].last = xo.cur + 14'd16 == xo.a1;
    end
    if (x_valid && x_wr_ok && x_deliver) resp_valid[xo.port] = 1'b1;
  end
  assign dram_rsp_ready = !root_beat && x_go;
  assign pcie_rsp_ready = !root_beat && !dram_rsp_valid && x_go;
  assign dram_wr_valid  = x_valid && x_src == 2'(SRC_PCIE) && xo.wb && (!x_deliver || resp_ready[xo.port]);
  assign dram_wr_addr   = 64'(xo.slot) * 64'(NODE_BYTES) + 64'(xo.cur);
  assign dram_wr_data   = x_data;
  assign rc_wr          = x_go && x_src == 2'(SRC_PCIE) && xo.rfill;
  assign rc_wr_addr     = xo.cur[12:0];
  assign rc_wr_data     = x_data;
  assign rc_chunk_done  = rc_wr && xo.cur[7:0] == 8'hF0;
  assign rc_chunk       = xo.cur[12:8];
  assign mt_fill        = x_go && x_src == 2'(SRC_PCIE) && xo.wb && xo.cur[7:0] == 8'hF0;
  assign mt_fill_slot   = xo.slot;
  assign mt_fill_mask   = 32'd1 << xo.cur[12:8];
  assign lb_dram_done       = x_go && x_src == 2'(SRC_DRAM) && x_last;
  assign lb_dram_done_bytes = xo.f1 - xo.f0;
  assign lb_pcie_done       = x_go && x_src == 2'(SRC_PCIE) && x_last;
  assign lb_pcie_done_bytes = xo.f1 - xo.f0;

  // root stream reader: one word every other cycle; a word the crossbar
  // could not pass on is read again
  assign rc_rd      = state == S_ROOT && !root_beat;
  assign rc_rd_addr = ops[cop_id].cur[12:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; r <= '0; rport <= '0; rr <= '0; op_busy <= '0; cop <= '0;
      root_beat <= 1'b0; cop_id <= '0; root_phys <= '0;
      cnt_hit <= '0; cnt_miss <= '0; cnt_root <= '0; cnt_divert <= '0; cnt_wb_chunks <= '0;
    end else begin
      root_beat <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (req_valid[rr] && op_ok) begin
            r     <= req[rr];
            rport <= rr;
            state <= S_LOOK;
          end
          rr <= (rr == ($clog2(NP))'(NP - 1)) ? '0 : rr + 1'b1;
        end
        S_LOOK: begin
          cop   <= nop;
          cop_id <= op_id;
          ops[op_id] <= nop;
          op_busy[op_id] <= 1'b1;
          if (root_hit) cnt_root <= cnt_root + 1;
          else if (hit_full) begin
            cnt_hit <= cnt_hit + 1;
            if (lb_to_pcie) cnt_divert <= cnt_divert + 1;
          end else cnt_miss <= cnt_miss + 1;
          if (nop.rfill && !rc_covers) root_phys <= rphys;
          state <= (nop.src == SRC_ROOT) ? S_ROOT : S_ISSUE;
        end
        S_ISSUE: if ((dram_rd_valid && dram_rd_ready) || (pcie_rd_valid && pcie_rd_ready)) state <= S_IDLE;
        S_ROOT: begin
          root_beat <= !root_beat;
          if (root_beat && x_go && x_last) begin
            root_beat <= 1'b0;
            state     <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
      if (x_go) begin
        ops[x_tag].cur <= xo.cur + 14'd16;
        if (x_last) op_busy[x_tag] <= 1'b0;
        if (mt_fill) cnt_wb_chunks <= cnt_wb_chunks + 1;
      end
    end
  end
endmodule
