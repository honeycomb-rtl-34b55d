// interior_engine: the interior-node search engine (paper Fig. 6, middle).
//
// A ring: the memory access generator turns request metadata into block reads
// on N_MSI MSI adapters; each returning block goes, with its metadata, to an
// idle key search unit (KSU) of the key search array; a KSU result either goes
// back to the memory access generator (next block of the same node, an older
// version, or the child node) or, when the child is a leaf, leaves the engine
// towards the leaf-node scan engine. Results waiting to re-enter the ring sit in
// a FIFO that has priority over new requests; new requests are admitted only
// while fewer than N_KSU are in the engine, so the FIFO can never overflow and
// the ring cannot deadlock. Requests proceed independently and out of order.
// The ring and its parts are the paper's; the FIFO, admission limit and
// round-robin choices are this design's.
module interior_engine
  import hc_pkg::*;
#(
  parameter int unsigned N_KSU = 14,
  parameter int unsigned N_MSI = 2,
  parameter int unsigned TAGS  = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  meta_t                        in_meta,
  output logic                         leaf_valid,
  input  logic                         leaf_ready,
  output meta_t                        leaf_meta,
  // memory subsystem ports
  output logic   [N_MSI-1:0]           mreq_valid,
  input  logic   [N_MSI-1:0]           mreq_ready,
  output mreq_t  [N_MSI-1:0]           mreq,
  input  logic   [N_MSI-1:0]           mresp_valid,
  output logic   [N_MSI-1:0]           mresp_ready,
  input  mresp_t [N_MSI-1:0]           mresp,
  // key buffer read ports
  output logic   [N_KSU-1:0][5:0]      kb_slot,
  output logic   [N_KSU-1:0][4:0]      kb_frag,
  input  logic   [N_KSU-1:0][BEAT_W-1:0] kb_data,
  output logic   [31:0]                cnt_visits
);
  localparam int unsigned FB = 32;
  localparam int unsigned KW = (N_KSU > 1) ? $clog2(N_KSU) : 1;
  localparam int unsigned AW = (N_MSI > 1) ? $clog2(N_MSI) : 1;

  // ------------------------------------------------ feedback FIFO
  meta_t             fb [FB];
  logic [$clog2(FB):0] fb_cnt;
  logic [$clog2(FB)-1:0] fb_rd, fb_wr;
  logic              fb_push, fb_pop;
  meta_t             fb_in;
  logic [$clog2(N_KSU+1):0] inflight;

  // ------------------------------------------------ memory access generator
  logic [N_MSI-1:0]  a_in_ready;
  logic [N_MSI-1:0]  a_in_valid;
  meta_t             mag_meta;
  logic              mag_valid, mag_take;
  logic [AW-1:0]     mag_pick;
  logic [AW-1:0]     rr_a;
  always_comb begin
    mag_valid = fb_cnt != 0 || (in_valid && inflight < ($clog2(N_KSU+1)+1)'(N_KSU));
    mag_meta  = (fb_cnt != 0) ? fb[fb_rd] : in_meta;
    mag_pick  = rr_a;
    mag_take  = 1'b0;
    for (int k = 0; k < N_MSI; k++) begin
      automatic int unsigned a = (int'(rr_a) + k) % N_MSI;
      if (!mag_take && a_in_ready[a]) begin mag_take = mag_valid; mag_pick = AW'(a); end
    end
    a_in_valid = '0;
    if (mag_take) a_in_valid[mag_pick] = 1'b1;
  end
  assign fb_pop   = mag_take && fb_cnt != 0;
  assign in_ready = mag_take && fb_cnt == 0;

  // ------------------------------------------------ MSI adapters
  logic  [N_MSI-1:0]             o_valid, o_ready, o_first, o_last;
  meta_t [N_MSI-1:0]             o_meta;
  logic  [N_MSI-1:0][BEAT_W-1:0] o_data;
  logic  [N_MSI-1:0][7:0]        o_tag;
  for (genvar a = 0; a < N_MSI; a++) begin : g_msi
    msi_adapter #(.TAGS(TAGS)) u_msi (
      .clk, .rst_n, .in_valid(a_in_valid[a]), .in_ready(a_in_ready[a]), .in_meta(mag_meta),
      .mreq_valid(mreq_valid[a]), .mreq_ready(mreq_ready[a]), .mreq(mreq[a]),
      .mresp_valid(mresp_valid[a]), .mresp_ready(mresp_ready[a]), .mresp(mresp[a]),
      .o_valid(o_valid[a]), .o_ready(o_ready[a]), .o_meta(o_meta[a]), .o_first(o_first[a]),
      .o_data(o_data[a]), .o_last(o_last[a]), .o_tag(o_tag[a]));
  end

  // ------------------------------------------------ key search array
  logic  [N_KSU-1:0]             k_in_ready, k_in_valid, k_d_valid, k_out_valid, k_out_ready, k_out_leaf;
  meta_t [N_KSU-1:0]             k_in_meta, k_out_meta;
  logic  [N_KSU-1:0][BEAT_W-1:0] k_d_data;
  logic  [N_KSU-1:0]             k_d_last;
  logic  [N_KSU-1:0][AW-1:0]     owner;
  logic  [N_KSU-1:0][7:0]        owner_tag;   // beats of one node carry one memory tag
  logic  [N_KSU-1:0]             rx;       // KSU k is receiving from owner[k]
  logic  [N_KSU-1:0]             claim;
  logic  [N_MSI-1:0][KW-1:0]     claim_k;

  always_comb begin
    automatic logic [N_KSU-1:0] taken = '0;
    claim = '0; claim_k = '0; o_ready = '0;
    k_in_valid = '0; k_d_valid = '0; k_d_data = '0; k_d_last = '0; k_in_meta = '0;
    for (int a = 0; a < N_MSI; a++) begin
      if (o_valid[a] && o_first[a]) begin
        for (int k = 0; k < N_KSU; k++)
          if (!o_ready[a] && k_in_ready[k] && !rx[k] && !taken[k]) begin
            taken[k] = 1'b1; o_ready[a] = 1'b1; claim[k] = 1'b1; claim_k[a] = KW'(k);
            k_in_valid[k] = 1'b1; k_in_meta[k] = o_meta[a];
            k_d_valid[k] = 1'b1; k_d_data[k] = o_data[a]; k_d_last[k] = o_last[a];
          end
      end else if (o_valid[a]) begin
        for (int k = 0; k < N_KSU; k++)
          if (rx[k] && owner[k] == AW'(a) && owner_tag[k] == o_tag[a]) begin
            o_ready[a] = 1'b1;
            k_d_valid[k] = 1'b1; k_d_data[k] = o_data[a]; k_d_last[k] = o_last[a];
          end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx <= '0; owner <= '0; owner_tag <= '0;
    end else begin
      for (int k = 0; k < N_KSU; k++) begin
        if (claim[k]) begin
          rx[k] <= !k_d_last[k];
          for (int a = 0; a < N_MSI; a++)
            if (o_valid[a] && o_first[a] && o_ready[a] && claim_k[a] == KW'(k)) begin
              owner[k] <= AW'(a); owner_tag[k] <= o_tag[a];
            end
        end else if (rx[k] && k_d_valid[k] && k_d_last[k]) rx[k] <= 1'b0;
      end
    end
  end

  for (genvar k = 0; k < N_KSU; k++) begin : g_ksu
    ksu u_ksu (
      .clk, .rst_n, .in_valid(k_in_valid[k]), .in_ready(k_in_ready[k]), .in_meta(k_in_meta[k]),
      .d_valid(k_d_valid[k]), .d_data(k_d_data[k]), .d_last(k_d_last[k]),
      .kb_slot(kb_slot[k]), .kb_frag(kb_frag[k]), .kb_data(kb_data[k]),
      .out_valid(k_out_valid[k]), .out_ready(k_out_ready[k]), .out_meta(k_out_meta[k]), .out_leaf(k_out_leaf[k]));
  end

  // ------------------------------------------------ result arbitration
  logic [KW-1:0] rr_k;
  always_comb begin
    automatic logic got = 1'b0;
    k_out_ready = '0; leaf_valid = 1'b0; leaf_meta = '0; fb_push = 1'b0; fb_in = '0;
    for (int i = 0; i < N_KSU; i++) begin
      automatic int unsigned k = (int'(rr_k) + i) % N_KSU;
      if (!got && k_out_valid[k]) begin
        if (k_out_leaf[k]) begin
          leaf_valid = 1'b1; leaf_meta = k_out_meta[k];
          if (leaf_ready) begin k_out_ready[k] = 1'b1; got = 1'b1; end
        end else if (fb_cnt < ($clog2(FB)+1)'(FB)) begin
          fb_push = 1'b1; fb_in = k_out_meta[k]; k_out_ready[k] = 1'b1; got = 1'b1;
        end
        if (!got) got = 1'b1;   // keep one candidate per cycle
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fb_cnt <= '0; fb_rd <= '0; fb_wr <= '0; rr_a <= '0; rr_k <= '0; inflight <= '0; cnt_visits <= '0;
    end else begin
      if (fb_push) begin fb[fb_wr] <= fb_in; fb_wr <= fb_wr + 1'b1; end
      if (fb_pop) fb_rd <= fb_rd + 1'b1;
      fb_cnt <= fb_cnt + ($clog2(FB)+1)'(fb_push) - ($clog2(FB)+1)'(fb_pop);
      if (mag_take) begin
        rr_a <= (mag_pick == AW'(N_MSI - 1)) ? '0 : mag_pick + 1'b1;
        cnt_visits <= cnt_visits + 1;
      end
      rr_k <= (rr_k == KW'(N_KSU - 1)) ? '0 : rr_k + 1'b1;
      inflight <= inflight + ($clog2(N_KSU+1)+1)'(in_ready && in_valid)
                           - ($clog2(N_KSU+1)+1)'(leaf_valid && leaf_ready);
    end
  end
endmodule
