// leaf_engine: the leaf-node scan engine (paper Fig. 6, right).
//
// The memory access generator keeps a list of free request slots of the range
// scan array; a request arriving from the interior-node search engine takes a
// free slot, and is pushed back (in_ready low) when none is free. Each slot is
// a leaf_scan_unit with its SC, S, L buffers and FSM. Block reads of all slots
// are sent round robin to N_MSI MSI adapters; the slot number travels in the
// metadata (low bits of the `carry` field, unused at leaves) so that returning
// data is steered back to its slot. Results of all slots are merged, one per
// cycle, onto the response output; a finishing slot reports its request's
// completion (sequence number and key-buffer slot) and becomes free again.
// Slot pool, MSI adapters and ring come from the paper; N_SLOT and the
// arbitration are this design's choices.
module leaf_engine
  import hc_pkg::*;
#(
  parameter int unsigned N_SLOT = 5,
  parameter int unsigned N_MSI  = 2,
  parameter int unsigned TAGS   = 8
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  output logic                            in_ready,
  input  meta_t                           in_meta,
  output logic   [N_MSI-1:0]              mreq_valid,
  input  logic   [N_MSI-1:0]              mreq_ready,
  output mreq_t  [N_MSI-1:0]              mreq,
  input  logic   [N_MSI-1:0]              mresp_valid,
  output logic   [N_MSI-1:0]              mresp_ready,
  input  mresp_t [N_MSI-1:0]              mresp,
  output logic   [N_SLOT-1:0][5:0]        kb_slot,
  output logic   [N_SLOT-1:0]             kb_ub,
  output logic   [N_SLOT-1:0][4:0]        kb_frag,
  input  logic   [N_SLOT-1:0][BEAT_W-1:0] kb_data,
  output logic                            res_valid,
  input  logic                            res_ready,
  output result_t                         res,
  output logic                            done,
  output meta_t                           done_meta,
  output logic   [31:0]                   cnt_pushback
);
  localparam int unsigned SW = (N_SLOT > 1) ? $clog2(N_SLOT) : 1;
  localparam int unsigned AW = (N_MSI > 1) ? $clog2(N_MSI) : 1;

  logic  [N_SLOT-1:0] s_in_ready, s_in_valid, s_f_valid, s_f_ready, s_d_valid;
  logic  [N_SLOT-1:0] s_out_valid, s_out_ready, s_done;
  meta_t [N_SLOT-1:0] s_f_meta, s_done_meta;
  result_t [N_SLOT-1:0] s_out;

  // free-slot list: lowest free slot takes the request
  always_comb begin
    s_in_valid = '0;
    in_ready   = 1'b0;
    for (int s = 0; s < N_SLOT; s++)
      if (!in_ready && s_in_ready[s]) begin in_ready = 1'b1; s_in_valid[s] = in_valid; end
  end

  // fetch arbitration onto MSI adapters
  logic  [N_MSI-1:0] a_in_valid, a_in_ready;
  meta_t             f_meta;
  logic  [SW-1:0]    rr_s;
  logic  [AW-1:0]    rr_a;
  always_comb begin
    automatic logic got = 1'b0;
    automatic int unsigned ps = 0;
    automatic int unsigned pa = 0;
    s_f_ready = '0; a_in_valid = '0; f_meta = '0;
    for (int i = 0; i < N_SLOT; i++) begin
      automatic int unsigned s = (int'(rr_s) + i) % N_SLOT;
      if (!got && s_f_valid[s]) begin got = 1'b1; ps = s; end
    end
    if (got) begin
      automatic logic ag = 1'b0;
      for (int k = 0; k < N_MSI; k++) begin
        automatic int unsigned a = (int'(rr_a) + k) % N_MSI;
        if (!ag && a_in_ready[a]) begin ag = 1'b1; pa = a; end
      end
      if (ag) begin
        a_in_valid[pa] = 1'b1;
        s_f_ready[ps]  = 1'b1;
      end
      f_meta = s_f_meta[ps];
      f_meta.carry = lid_t'(ps);
    end
  end

  logic  [N_MSI-1:0]             o_valid, o_ready, o_first, o_last;
  meta_t [N_MSI-1:0]             o_meta;
  logic  [N_MSI-1:0][BEAT_W-1:0] o_data;
  for (genvar a = 0; a < N_MSI; a++) begin : g_msi
    msi_adapter #(.TAGS(TAGS)) u_msi (
      .clk, .rst_n, .in_valid(a_in_valid[a]), .in_ready(a_in_ready[a]), .in_meta(f_meta),
      .mreq_valid(mreq_valid[a]), .mreq_ready(mreq_ready[a]), .mreq(mreq[a]),
      .mresp_valid(mresp_valid[a]), .mresp_ready(mresp_ready[a]), .mresp(mresp[a]),
      .o_valid(o_valid[a]), .o_ready(o_ready[a]), .o_meta(o_meta[a]), .o_first(o_first[a]),
      .o_data(o_data[a]), .o_last(o_last[a]), .o_tag());
  end

  // data steering: one adapter per slot per cycle (lowest adapter first)
  logic [N_SLOT-1:0][BEAT_W-1:0] s_d_data;
  logic [N_SLOT-1:0]             s_d_last;
  always_comb begin
    s_d_valid = '0; s_d_data = '0; s_d_last = '0; o_ready = '0;
    for (int a = 0; a < N_MSI; a++)
      if (o_valid[a] && int'(o_meta[a].carry) < N_SLOT && !s_d_valid[SW'(o_meta[a].carry)]) begin
        s_d_valid[SW'(o_meta[a].carry)] = 1'b1;
        s_d_data[SW'(o_meta[a].carry)]  = o_data[a];
        s_d_last[SW'(o_meta[a].carry)]  = o_last[a];
        o_ready[a] = 1'b1;
      end
  end

  for (genvar s = 0; s < N_SLOT; s++) begin : g_slot
    leaf_scan_unit u_rsu (
      .clk, .rst_n, .in_valid(s_in_valid[s]), .in_ready(s_in_ready[s]), .in_meta(in_meta),
      .kb_slot(kb_slot[s]), .kb_ub(kb_ub[s]), .kb_frag(kb_frag[s]), .kb_data(kb_data[s]),
      .f_valid(s_f_valid[s]), .f_ready(s_f_ready[s]), .f_meta(s_f_meta[s]),
      .d_valid(s_d_valid[s]), .d_data(s_d_data[s]), .d_last(s_d_last[s]),
      .out_valid(s_out_valid[s]), .out_ready(s_out_ready[s]), .out_res(s_out[s]),
      .done(s_done[s]), .done_meta(s_done_meta[s]));
  end

  // result buffer output: round robin over slots
  logic [SW-1:0] rr_o;
  always_comb begin
    automatic logic got = 1'b0;
    s_out_ready = '0; res_valid = 1'b0; res = '0;
    for (int i = 0; i < N_SLOT; i++) begin
      automatic int unsigned s = (int'(rr_o) + i) % N_SLOT;
      if (!got && s_out_valid[s]) begin
        got = 1'b1; res_valid = 1'b1; res = s_out[s]; s_out_ready[s] = res_ready;
      end
    end
    done = 1'b0; done_meta = '0;
    for (int s = 0; s < N_SLOT; s++)
      if (s_done[s]) begin done = 1'b1; done_meta = s_done_meta[s]; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_s <= '0; rr_a <= '0; rr_o <= '0; cnt_pushback <= '0;
    end else begin
      rr_s <= (rr_s == SW'(N_SLOT - 1)) ? '0 : rr_s + 1'b1;
      rr_a <= (rr_a == AW'(N_MSI - 1)) ? '0 : rr_a + 1'b1;
      if (!(res_valid && !res_ready)) rr_o <= (rr_o == SW'(N_SLOT - 1)) ? '0 : rr_o + 1'b1;
      if (in_valid && !in_ready) cnt_pushback <= cnt_pushback + 1;
    end
  end

  // at most one slot finishes per cycle (a slot finishes on an accepted result)
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(s_done));
endmodule
