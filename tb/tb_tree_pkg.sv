// tb_tree_pkg: test-bench helpers that lay out B-Tree nodes in a model of host
// memory, using the node format of hc_pkg, and keep a reference list of the
// items a reader at a given read version sees, in key order.
// Keys are 16-byte strings holding a big-endian integer (so memcmp order is
// numeric order); values are 16 bytes.
package tb_tree_pkg;
  byte unsigned hmem [longint];     // host memory (PCIe side)

  typedef struct {
    int     key;
    bit     replace;
    bit     del;
    longint delta;
    int     target;    // sorted index a replace entry stands for
  } logent_t;

  typedef struct {
    int     key;
    longint lid;
    int     off;
    bit     from_log;
  } item_t;

  item_t all_items[$];             // visible items of the whole leaf chain, in order

  function automatic void wr(longint a, longint v, int n);
    for (int i = 0; i < n; i++) hmem[a + i] = byte'(v >> (8 * i));
  endfunction
  function automatic void wrkey(longint a, int k);
    for (int i = 0; i < 16; i++) hmem[a + i] = (i < 12) ? 8'h00 : byte'(k >> (8 * (15 - i)));
  endfunction
  function automatic logic [127:0] keybeat(int k);
    logic [127:0] b = '0;
    for (int i = 12; i < 16; i++) b[i*8 +: 8] = byte'(k >> (8 * (15 - i)));
    return b;
  endfunction
  function automatic void wrval(longint a, int k);
    for (int i = 0; i < 16; i++) hmem[a + i] = byte'(k + i);
  endfunction
  function automatic byte unsigned rd(longint a);
    return hmem.exists(a) ? hmem[a] : 8'h00;
  endfunction

  // Leaf node at `phys`; sci: one shortcut every sci sorted items.
  function automatic void build_leaf(longint phys, longint lid, longint ver, longint oldp,
                                     longint left, longint right, int keys[$], logent_t lg[$],
                                     int sci, longint rdver, bit record);
    int p = 512, sc = 48, nsc = 0, send;
    int offs[$];
    item_t vis[$];
    bit    gone[$];
    for (int i = 0; i < keys.size(); i++) begin
      offs.push_back(p);
      gone.push_back(0);
      if (i > 0 && i % sci == 0) begin
        wr(phys + sc, 16, 2); wrkey(phys + sc + 2, keys[i]); wr(phys + sc + 18, p, 2);
        sc += 20; nsc++;
        wr(phys + p, 16, 2); wrval(phys + p + 2, keys[i]); p += 18;
      end else begin
        wr(phys + p, 16, 2); wrkey(phys + p + 2, keys[i]); wr(phys + p + 18, 16, 2);
        wrval(phys + p + 20, keys[i]); p += 36;
      end
    end
    send = p;
    for (int e = 0; e < lg.size(); e++) begin
      int bp, hint = 0;
      automatic bit visible = (ver + lg[e].delta) <= rdver;
      if (lg[e].replace) bp = offs[lg[e].target];
      else begin
        bp = send;
        for (int i = keys.size() - 1; i >= 0; i--) if (keys[i] > lg[e].key) bp = offs[i];
      end
      for (int f = 0; f < e; f++) if (lg[f].key < lg[e].key) hint++;
      wr(phys + p, bp, 2);
      hmem[phys + p + 2] = byte'(hint | (lg[e].replace ? 8'h80 : 8'h00));
      wr(phys + p + 3, lg[e].delta, 5);
      wr(phys + p + 8, 16, 2); wrkey(phys + p + 10, lg[e].key);
      if (lg[e].del) wr(phys + p + 26, 16'hFFFF, 2);
      else begin wr(phys + p + 26, 16, 2); wrval(phys + p + 28, lg[e].key); end
      if (visible) begin
        if (lg[e].replace) gone[lg[e].target] = 1;
        if (!lg[e].del) vis.push_back('{key: lg[e].key, lid: lid, off: p, from_log: 1});
      end
      p += 28 + (lg[e].del ? 0 : 16);
    end
    for (int i = 0; i < keys.size(); i++)
      if (!gone[i]) vis.push_back('{key: keys[i], lid: lid, off: offs[i], from_log: 0});
    vis.sort(x) with (x.key);
    // header
    for (int i = 0; i < 48; i++) hmem[phys + i] = 8'h00;
    hmem[phys] = 8'd1;
    wr(phys + 2, p, 2); wr(phys + 8, ver, 8); wr(phys + 16, oldp, 8);
    wr(phys + 24, left, 6); wr(phys + 30, right, 6); wr(phys + 36, send, 2); wr(phys + 38, nsc * 20, 2);
    if (record) foreach (vis[i]) all_items.push_back(vis[i]);
  endfunction

  // Interior node: child[0] is the leftmost child, keys[i] separates child[i+1].
  function automatic void build_interior(longint phys, int level, longint ver, longint oldp,
                                         int keys[$], longint child[$], int sci);
    int p = 512, sc = 48, nsc = 0;
    for (int i = 0; i < keys.size(); i++) begin
      if (i > 0 && i % sci == 0) begin
        wr(phys + sc, 16, 2); wrkey(phys + sc + 2, keys[i]); wr(phys + sc + 18, p, 2);
        sc += 20; nsc++;
        wr(phys + p, 6, 2); wr(phys + p + 2, child[i+1], 6); p += 8;
      end else begin
        wr(phys + p, 16, 2); wrkey(phys + p + 2, keys[i]); wr(phys + p + 18, 6, 2);
        wr(phys + p + 20, child[i+1], 6); p += 26;
      end
    end
    for (int i = 0; i < 48; i++) hmem[phys + i] = 8'h00;
    hmem[phys] = 8'd0; hmem[phys + 1] = byte'(level);
    wr(phys + 2, p, 2); wr(phys + 8, ver, 8); wr(phys + 16, oldp, 8);
    wr(phys + 24, child[0], 6); wr(phys + 36, p, 2); wr(phys + 38, nsc * 20, 2);
  endfunction

  // Reference result of scan(kl, ku) (get: exact match only) as item indices.
  function automatic void ref_scan(int kl, int ku, bit is_get, ref int idx[$]);
    int s = -1;
    idx.delete();
    if (is_get) begin
      foreach (all_items[i]) if (all_items[i].key == kl) idx.push_back(i);
      return;
    end
    foreach (all_items[i]) if (all_items[i].key <= kl) s = i;
    if (s < 0) s = 0;
    for (int i = s; i < all_items.size(); i++)
      if (all_items[i].key <= ku) idx.push_back(i);
  endfunction
endpackage
