// tb_honeycomb_top: end-to-end test of the accelerator at its default size
// (14 KSUs, 2+2 MSI adapters, 5 leaf slots, 1M-entry page table, 1K-entry
// metadata table).
//
// A three-level B-Tree is laid out in a model of host memory (tb_tree_pkg):
// root (LID 1, level 2) -> two interior nodes (LIDs 10, 11) -> four leaves
// (LIDs 2..5, a right-sibling chain). The leaves carry log blocks with inserts,
// an update, a delete and an insert whose version is newer than the read
// version; leaf 4 is newer than the read version and points to an older copy.
// The host writes the page table, root and read version through the control
// ports; PCIe and on-board DRAM are behavioural models with fixed latency and one
// 16-byte beat per cycle. Get and scan requests are issued in bursts; every
// response stream (result descriptors ending with a last marker) is compared
// with the reference list. Each mechanism the design relies on is counted, and
// one that never happens is a failure. Mid-run the host remaps a leaf to a new
// physical copy, which must invalidate the cached metadata.
module tb_honeycomb_top;
  import hc_pkg::*;
  import tb_tree_pkg::*;

  localparam longint OLD4  = 64'h0090_0000;
  localparam longint NEW3  = 64'h00A0_0000;
  localparam int     RDVER = 40;
  localparam int     PCIE_LAT = 60, DRAM_LAT = 20;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic req_valid, req_ready, res_valid, res_ready;
  logic [127:0] req_data;
  result_t res;
  logic rdver_wr, root_wr, pt_wr, lb_enable;
  ver_t rdver_in; lid_t root_lid_in, pt_lid; logic [7:0] root_level_in; paddr_t pt_phys;
  seq_t s_new, s_old;
  logic dram_rd_valid, dram_rd_ready, dram_rsp_valid, dram_rsp_ready, dram_wr_valid, dram_wr_ready;
  logic [63:0] dram_rd_addr, dram_wr_addr; logic [13:0] dram_rd_len; logic [7:0] dram_rd_tag;
  mresp_t dram_rsp; logic [127:0] dram_wr_data;
  logic pcie_rd_valid, pcie_rd_ready, pcie_rsp_valid, pcie_rsp_ready;
  logic [63:0] pcie_rd_addr; logic [13:0] pcie_rd_len; logic [7:0] pcie_rd_tag; mresp_t pcie_rsp;
  logic [31:0] cnt_hit, cnt_miss, cnt_root, cnt_divert, cnt_wb_chunks, cnt_visits, cnt_pushback;

  honeycomb_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic longint phys_of(longint lid);
    return 64'h0010_0000 + lid * 64'h4000;
  endfunction

  // ------------------------------------------------------------ memory models
  typedef struct { longint t; longint a; int n; logic [7:0] tag; } mrd_t;
  mrd_t pq[$], dq[$];
  byte unsigned dmem [longint];
  int   p_beat = 0, d_beat = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [127:0] beat_h(longint a);
    logic [127:0] b;
    for (int i = 0; i < 16; i++) b[i*8 +: 8] = rd(a + i);
    return b;
  endfunction
  function automatic logic [127:0] beat_d(longint a);
    logic [127:0] b;
    for (int i = 0; i < 16; i++) b[i*8 +: 8] = dmem.exists(a + i) ? dmem[a + i] : 8'h00;
    return b;
  endfunction
  function automatic int nbeats(longint a, int n);
    return int'((((a + n + 15) & ~64'hF) - (a & ~64'hF)) / 16);
  endfunction

  always @(negedge clk) begin
    pcie_rd_ready = pq.size() < 32;
    dram_rd_ready = dq.size() < 32;
  end
  assign dram_wr_ready = 1'b1;
  // model outputs are updated on the falling edge, from the state left by the
  // rising edge
  always @(negedge clk) begin
    pcie_rsp_valid = pq.size() > 0 && pq[0].t <= cyc;
    pcie_rsp = '0;
    if (pcie_rsp_valid) begin
      pcie_rsp.tag  = pq[0].tag;
      pcie_rsp.data = beat_h((pq[0].a & ~64'hF) + 16 * p_beat);
      pcie_rsp.last = p_beat == nbeats(pq[0].a, pq[0].n) - 1;
    end
    dram_rsp_valid = dq.size() > 0 && dq[0].t <= cyc;
    dram_rsp = '0;
    if (dram_rsp_valid) begin
      dram_rsp.tag  = dq[0].tag;
      dram_rsp.data = beat_d((dq[0].a & ~64'hF) + 16 * d_beat);
      dram_rsp.last = d_beat == nbeats(dq[0].a, dq[0].n) - 1;
    end
  end
  int n_pcie_rd = 0, n_dram_rd = 0, n_dram_wr = 0;
  bit dbg;
  initial dbg = $test$plusargs("debug");
  always @(posedge clk) if (rst_n && dbg) begin
    if (pcie_rd_valid && pcie_rd_ready) $display("%0d pcie rd %h len %0d tag %0d", cyc, pcie_rd_addr, pcie_rd_len, pcie_rd_tag);
    if (dram_rd_valid && dram_rd_ready) $display("%0d dram rd %h len %0d tag %0d", cyc, dram_rd_addr, dram_rd_len, dram_rd_tag);
    if (res_valid && res_ready) $display("%0d result tag %0d leaf %0d off %0d log %0d last %0d empty %0d", cyc, res.tag, res.leaf, res.offset, res.from_log, res.last, res.empty);
    foreach (dut.mreq_valid[i]) if (dut.mreq_valid[i] && dut.mreq_ready[i])
      $display("%0d mreq p%0d lid %0d first %0d phys %0d/%h off %0d len %0d", cyc, i, dut.mreq[i].lid, dut.mreq[i].first, dut.mreq[i].use_phys, dut.mreq[i].phys, dut.mreq[i].offset, dut.mreq[i].len);
    if (dut.leaf_valid && dut.leaf_ready) $display("%0d leaf req lid %0d", cyc, dut.leaf_meta.lid);
  end
  always @(posedge clk) if (rst_n) begin
    if (pcie_rd_valid && pcie_rd_ready) begin
      pq.push_back('{t: cyc + PCIE_LAT, a: pcie_rd_addr, n: int'(pcie_rd_len), tag: pcie_rd_tag});
      n_pcie_rd++;
    end
    if (dram_rd_valid && dram_rd_ready) begin
      dq.push_back('{t: cyc + DRAM_LAT, a: dram_rd_addr, n: int'(dram_rd_len), tag: dram_rd_tag});
      n_dram_rd++;
    end
    if (dram_wr_valid && dram_wr_ready) begin
      for (int i = 0; i < 16; i++) dmem[(dram_wr_addr & ~64'hF) + i] = dram_wr_data[i*8 +: 8];
      n_dram_wr++;
    end
    if (pcie_rsp_valid && pcie_rsp_ready) begin
      if (pcie_rsp.last) begin void'(pq.pop_front()); p_beat = 0; end else p_beat++;
    end
    if (dram_rsp_valid && dram_rsp_ready) begin
      if (dram_rsp.last) begin void'(dq.pop_front()); d_beat = 0; end else d_beat++;
    end
  end

  // ------------------------------------------------------------ request side
  typedef struct { bit is_get; int kl; int ku; } rq_t;
  rq_t    sent [int];            // by tag
  item_t  got  [int][$];
  bit     finished [int];
  logic [127:0] txq[$];
  int     next_tag = 1;
  int     n_old = 0, n_log = 0, n_cross = 0, n_filtered = 0, n_after_remap = 0;
  bit     remapped = 0;

  task automatic issue(bit is_get, int kl, int ku);
    logic [127:0] h = '0;
    h[1:0] = is_get ? 2'd0 : 2'd1; h[17:2] = 16'(next_tag); h[26:18] = 9'd16; h[35:27] = 9'd16;
    txq.push_back(h);
    txq.push_back(keybeat(kl));
    if (!is_get) txq.push_back(keybeat(ku));
    sent[next_tag] = '{is_get: is_get, kl: kl, ku: ku};
    next_tag++;
  endtask

  always @(negedge clk) begin
    req_valid = txq.size() > 0 && rst_n;
    req_data  = txq.size() > 0 ? txq[0] : '0;
  end
  always @(posedge clk) if (req_valid && req_ready) void'(txq.pop_front());

  // random back-pressure on the response output
  always @(posedge clk) res_ready <= ($urandom % 4) != 0;

  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    int t;
    t = int'(res.tag);
    if (!sent.exists(t) || finished.exists(t)) check(0, $sformatf("unexpected response tag %0d", t));
    else if (res.last) begin
      int idx[$];
      bit ok;
      finished[t] = 1;
      ref_scan(sent[t].kl, sent[t].ku, sent[t].is_get, idx);
      ok = idx.size() == got[t].size() && (res.empty == (idx.size() == 0));
      if (ok) foreach (idx[i]) begin
        item_t e;
        e = all_items[idx[i]];
        if (e.lid != got[t][i].lid || e.off != got[t][i].off || e.from_log != got[t][i].from_log) ok = 0;
      end
      check(ok, $sformatf("tag %0d %s(%0d,%0d): %0d results, expected %0d", t,
                          sent[t].is_get ? "get" : "scan", sent[t].kl, sent[t].ku, got[t].size(), idx.size()));
      if (!ok) foreach (got[t][i]) $display("   got lid %0d off %0d log %0d", got[t][i].lid, got[t][i].off, got[t][i].from_log);
      if (!ok) foreach (idx[i]) $display("   exp lid %0d off %0d log %0d key %0d", all_items[idx[i]].lid, all_items[idx[i]].off, all_items[idx[i]].from_log, all_items[idx[i]].key);
      if (ok) begin
        bit old, lg, xing;
        old = 0; lg = 0; xing = 0;
        foreach (idx[i]) begin
          if (all_items[idx[i]].lid == 4) old = 1;
          if (all_items[idx[i]].from_log) lg = 1;
          if (all_items[idx[i]].lid != all_items[idx[0]].lid) xing = 1;
        end
        n_old += old; n_log += lg; n_cross += xing;
        if (sent[t].is_get && idx.size() == 0 && sent[t].kl == 1035) n_filtered++;
        if (remapped) n_after_remap++;
      end
    end else begin
      got[t].push_back('{key: 0, lid: longint'(res.leaf), off: int'(res.offset), from_log: res.from_log});
    end
  end

  // ------------------------------------------------------------ tree
  function automatic logent_t le(int key, bit replace, bit del, longint delta, int target);
    logent_t e;
    e.key = key; e.replace = replace; e.del = del; e.delta = delta; e.target = target;
    return e;
  endfunction

  task automatic build_tree();
    int k[$]; logent_t lg[$]; longint ch[$];
    // leaf 2: ver 10; insert 1005, update 1020, delete 1050, insert 1035 too new
    k = {}; for (int i = 0; i < 8; i++) k.push_back(1000 + 10 * i);
    lg.delete();
    lg.push_back(le(1005, 0, 0, 1, 0));
    lg.push_back(le(1020, 1, 0, 2, 2));
    lg.push_back(le(1050, 1, 1, 3, 5));
    lg.push_back(le(1035, 0, 0, 100, 0));
    build_leaf(phys_of(2), 2, 10, 0, 0, 3, k, lg, 3, RDVER, 1);
    // leaf 3: two inserts at the same back pointer, one past the last item,
    // one just before a segment start
    k = {}; for (int i = 0; i < 8; i++) k.push_back(2000 + 10 * i);
    lg.delete();
    lg.push_back(le(2003, 0, 0, 1, 0));
    lg.push_back(le(2001, 0, 0, 2, 0));
    lg.push_back(le(2075, 0, 0, 3, 0));
    lg.push_back(le(2055, 0, 0, 4, 0));
    build_leaf(phys_of(3), 3, 10, 0, 2, 4, k, lg, 3, RDVER, 1);
    build_leaf(NEW3,       3, 10, 0, 2, 4, k, lg, 3, RDVER, 0);   // same content, new place
    // leaf 4: version 50 (newer than the reader) -> older copy at OLD4
    k = {}; for (int i = 0; i < 8; i++) k.push_back(3000 + 10 * i);
    lg.delete();
    build_leaf(OLD4, 4, 30, 0, 3, 5, k, lg, 3, RDVER, 1);
    k.push_back(3035); k.sort();
    build_leaf(phys_of(4), 4, 50, OLD4, 3, 5, k, lg, 3, RDVER, 0);
    // leaf 5
    k = {}; for (int i = 0; i < 8; i++) k.push_back(4000 + 10 * i);
    lg.delete();
    lg.push_back(le(4072, 0, 0, 5, 0));
    build_leaf(phys_of(5), 5, 10, 0, 4, 0, k, lg, 3, RDVER, 1);
    // interior nodes and root
    build_interior(phys_of(10), 1, 5, 0, {2000}, {2, 3}, 3);
    build_interior(phys_of(11), 1, 5, 0, {4000}, {4, 5}, 3);
    build_interior(phys_of(1),  2, 5, 0, {3000}, {10, 11}, 3);
  endtask

  task automatic pt_write(longint lid, longint phys);
    @(negedge clk); pt_wr = 1; pt_lid = lid; pt_phys = phys;
    @(negedge clk); pt_wr = 0;
  endtask

  function automatic int rnd_key();
    return 990 + int'($urandom % 3110);
  endfunction

  task automatic wait_done(int n_expect);
    while (finished.size() < n_expect) @(posedge clk);
  endtask

  initial begin
    int n;
    rdver_wr = 0; root_wr = 0; pt_wr = 0; lb_enable = 1; rdver_in = '0;
    root_lid_in = '0; root_level_in = '0; pt_lid = '0; pt_phys = '0;
    build_tree();
    $display("reference: %0d visible items", all_items.size());
    repeat (5) @(posedge clk);
    rst_n = 1;
    pt_write(1, phys_of(1)); pt_write(2, phys_of(2)); pt_write(3, phys_of(3));
    pt_write(4, phys_of(4)); pt_write(5, phys_of(5)); pt_write(10, phys_of(10)); pt_write(11, phys_of(11));
    @(negedge clk); rdver_wr = 1; rdver_in = RDVER; root_wr = 1; root_lid_in = 1; root_level_in = 8'd2;
    @(negedge clk); rdver_wr = 0; root_wr = 0;
    // directed requests, one at a time
    issue(1, 1010, 1010); wait_done(1);
    issue(1, 1005, 1005); wait_done(2);       // log insert
    issue(1, 1035, 1035); wait_done(3);       // invisible insert -> empty
    issue(1, 1050, 1050); wait_done(4);       // deleted
    issue(1, 3030, 3030); wait_done(5);       // old version of leaf 4
    issue(0, 1000, 1100); wait_done(6);       // whole leaf 2
    issue(0, 2045, 2080); wait_done(7);       // across segments with log inserts
    issue(0, 1995, 3015); wait_done(8);       // three leaves
    issue(0, 4065, 9000); wait_done(9);       // to the end of the chain
    issue(1, 2999, 2999); wait_done(10);      // missing key
    n = 10;
    // bursts of random requests
    for (int b = 0; b < 12; b++) begin
      for (int r = 0; r < 16; r++) begin
        automatic int kl = rnd_key();
        if ($urandom % 2) issue(1, (($urandom % 3) == 0) ? kl : (kl / 5) * 5, 0);
        else issue(0, kl, kl + int'($urandom % 300));
        n++;
      end
      if (b == 6) begin
        wait_done(n);
        pt_write(3, NEW3);    // host moves leaf 3
        remapped = 1;
      end
    end
    wait_done(n);
    repeat (50) @(posedge clk);
    // mechanism coverage
    check(cnt_miss > 0,      "no cache miss (PCIe fetch with DRAM write-back)");
    check(cnt_hit > 0,       "no DRAM cache hit");
    check(cnt_root > 0,      "no root cache hit");
    check(cnt_divert > 0,    "no load-balancer diversion of a hit to PCIe");
    check(cnt_wb_chunks > 0 && n_dram_wr > 0, "no write-back of fetched chunks to DRAM");
    check(cnt_visits > 0,    "no interior node visits");
    check(cnt_pushback > 0,  "no leaf-slot pushback");
    check(n_old > 0,         "no older-version node followed");
    check(n_log > 0,         "no log item merged");
    check(n_filtered > 0,    "no log item filtered by version");
    check(n_cross > 0,       "no scan crossing to a right sibling");
    check(n_after_remap > 0, "no request after a page-table remap");
    check(s_old == s_new && s_old > 0, $sformatf("S_old %0d did not reach S_new %0d", s_old, s_new));
    $display("requests %0d  pcie reads %0d  dram reads %0d  dram writes %0d", n, n_pcie_rd, n_dram_rd, n_dram_wr);
    $display("hit %0d miss %0d root %0d divert %0d wb %0d visits %0d pushback %0d old %0d log %0d cross %0d",
             cnt_hit, cnt_miss, cnt_root, cnt_divert, cnt_wb_chunks, cnt_visits, cnt_pushback, n_old, n_log, n_cross);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog: %0d of %0d requests finished", finished.size(), next_tag - 1);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
