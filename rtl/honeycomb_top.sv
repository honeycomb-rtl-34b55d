// honeycomb_top: B-Tree get/scan accelerator with its memory subsystem.
//
// Requests from the network side (get or scan with their keys) enter request
// management: the pre-processor stores the keys in the LB/UB key buffers, takes a
// sequence number from the epoch manager and the current global read version,
// and starts a root visit. The interior-node search engine walks the interior
// levels (header+shortcut block, then one sorted segment per node); the leaf
// request then takes a slot of the leaf-node scan engine, which scans the leaf
// (and its right siblings) and streams result descriptors to the response
// output. On completion the key-buffer slot is freed and the epoch manager is
// told, which moves S_old. Both engines read B-Tree nodes through the memory
// subsystem (page table, metadata table, NAT, root cache, load balancer), whose
// DRAM and PCIe sides are ports of this module, as are the host's control writes
// (global read version, root LID and height, page-table entries).
// Unit counts default to the paper's evaluated configuration: 14 KSUs and 4 MSI
// adapters (split 2 + 2 here). Request/response formats: see request_preprocess
// and hc_pkg::result_t.
module honeycomb_top
  import hc_pkg::*;
#(
  parameter int unsigned N_KSU      = 14,
  parameter int unsigned N_MSI_INT  = 2,
  parameter int unsigned N_MSI_LEAF = 2,
  parameter int unsigned N_SLOT     = 5,
  parameter int unsigned PT_ENTRIES = 1 << 20,
  parameter int unsigned MT_ENTRIES = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  // request input (network side)
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [BEAT_W-1:0] req_data,
  // response output
  output logic              res_valid,
  input  logic              res_ready,
  output result_t           res,
  // host control over PCIe
  input  logic              rdver_wr,
  input  ver_t              rdver_in,
  input  logic              root_wr,
  input  lid_t              root_lid_in,
  input  logic [7:0]        root_level_in,
  input  logic              pt_wr,
  input  lid_t              pt_lid,
  input  paddr_t            pt_phys,
  input  logic              lb_enable,
  output seq_t              s_new,
  output seq_t              s_old,
  // on-board DRAM
  output logic              dram_rd_valid,
  input  logic              dram_rd_ready,
  output logic [63:0]       dram_rd_addr,
  output logic [13:0]       dram_rd_len,
  output logic [7:0]        dram_rd_tag,
  input  logic              dram_rsp_valid,
  output logic              dram_rsp_ready,
  input  mresp_t            dram_rsp,
  output logic              dram_wr_valid,
  input  logic              dram_wr_ready,
  output logic [63:0]       dram_wr_addr,
  output logic [BEAT_W-1:0] dram_wr_data,
  // PCIe reads of host memory
  output logic              pcie_rd_valid,
  input  logic              pcie_rd_ready,
  output logic [63:0]       pcie_rd_addr,
  output logic [13:0]       pcie_rd_len,
  output logic [7:0]        pcie_rd_tag,
  input  logic              pcie_rsp_valid,
  output logic              pcie_rsp_ready,
  input  mresp_t            pcie_rsp,
  // event counters
  output logic [31:0]       cnt_hit,
  output logic [31:0]       cnt_miss,
  output logic [31:0]       cnt_root,
  output logic [31:0]       cnt_divert,
  output logic [31:0]       cnt_wb_chunks,
  output logic [31:0]       cnt_visits,
  output logic [31:0]       cnt_pushback
);
  localparam int unsigned NRD = N_KSU + N_SLOT;
  localparam int unsigned NP  = N_MSI_INT + N_MSI_LEAF;

  // ------------------------------------------------ request management
  logic        kb_alloc_ok, kb_alloc, kb_wr_en, kb_wr_ub, seq_take, seq_full;
  logic [5:0]  kb_alloc_slot, kb_wr_slot;
  logic [4:0]  kb_wr_frag;
  logic [BEAT_W-1:0] kb_wr_data;
  logic [NRD-1:0][5:0]        kb_rd_slot;
  logic [NRD-1:0]             kb_rd_ub;
  logic [NRD-1:0][4:0]        kb_rd_frag;
  logic [NRD-1:0][BEAT_W-1:0] kb_rd_data;
  logic        pre_valid, pre_ready;
  meta_t       pre_meta;
  ver_t        global_rd_ver;
  logic        fin;
  meta_t       fin_meta;

  request_preprocess u_pre (
    .clk, .rst_n, .in_valid(req_valid), .in_ready(req_ready), .in_data(req_data),
    .rdver_wr, .rdver_in, .root_wr, .root_lid_in, .root_level_in, .global_rd_ver,
    .kb_alloc_ok, .kb_alloc_slot, .kb_alloc, .kb_wr_en, .kb_wr_slot, .kb_wr_ub, .kb_wr_frag, .kb_wr_data,
    .seq_new(s_new), .seq_full, .seq_take,
    .out_valid(pre_valid), .out_ready(pre_ready), .out_meta(pre_meta));

  key_buffers #(.SLOTS(64), .NRD(NRD)) u_kb (
    .clk, .rst_n, .alloc_ok(kb_alloc_ok), .alloc_slot(kb_alloc_slot), .alloc(kb_alloc),
    .free(fin), .free_slot(fin_meta.kslot),
    .wr_en(kb_wr_en), .wr_slot(kb_wr_slot), .wr_ub(kb_wr_ub), .wr_frag(kb_wr_frag), .wr_data(kb_wr_data),
    .rd_slot(kb_rd_slot), .rd_ub(kb_rd_ub), .rd_frag(kb_rd_frag), .rd_data(kb_rd_data));

  epoch_manager #(.SEQ_W(64), .WINDOW(64)) u_epoch (
    .clk, .rst_n, .take(seq_take), .seq_new(s_new), .full(seq_full),
    .done(fin), .done_seq(fin_meta.seq), .seq_old(s_old));

  // ------------------------------------------------ engines
  logic   [NP-1:0] mreq_valid, mreq_ready, mresp_valid, mresp_ready;
  mreq_t  [NP-1:0] mreq;
  mresp_t [NP-1:0] mresp;
  logic            leaf_valid, leaf_ready;
  meta_t           leaf_meta;

  logic [N_KSU-1:0][5:0]        i_kb_slot;
  logic [N_KSU-1:0][4:0]        i_kb_frag;
  logic [N_KSU-1:0][BEAT_W-1:0] i_kb_data;
  interior_engine #(.N_KSU(N_KSU), .N_MSI(N_MSI_INT)) u_int (
    .clk, .rst_n, .in_valid(pre_valid), .in_ready(pre_ready), .in_meta(pre_meta),
    .leaf_valid, .leaf_ready, .leaf_meta,
    .mreq_valid(mreq_valid[N_MSI_INT-1:0]), .mreq_ready(mreq_ready[N_MSI_INT-1:0]), .mreq(mreq[N_MSI_INT-1:0]),
    .mresp_valid(mresp_valid[N_MSI_INT-1:0]), .mresp_ready(mresp_ready[N_MSI_INT-1:0]), .mresp(mresp[N_MSI_INT-1:0]),
    .kb_slot(i_kb_slot), .kb_frag(i_kb_frag), .kb_data(i_kb_data), .cnt_visits);

  logic [N_SLOT-1:0][5:0]        l_kb_slot;
  logic [N_SLOT-1:0]             l_kb_ub;
  logic [N_SLOT-1:0][4:0]        l_kb_frag;
  logic [N_SLOT-1:0][BEAT_W-1:0] l_kb_data;
  leaf_engine #(.N_SLOT(N_SLOT), .N_MSI(N_MSI_LEAF)) u_leaf (
    .clk, .rst_n, .in_valid(leaf_valid), .in_ready(leaf_ready), .in_meta(leaf_meta),
    .mreq_valid(mreq_valid[NP-1:N_MSI_INT]), .mreq_ready(mreq_ready[NP-1:N_MSI_INT]), .mreq(mreq[NP-1:N_MSI_INT]),
    .mresp_valid(mresp_valid[NP-1:N_MSI_INT]), .mresp_ready(mresp_ready[NP-1:N_MSI_INT]), .mresp(mresp[NP-1:N_MSI_INT]),
    .kb_slot(l_kb_slot), .kb_ub(l_kb_ub), .kb_frag(l_kb_frag), .kb_data(l_kb_data),
    .res_valid, .res_ready, .res, .done(fin), .done_meta(fin_meta), .cnt_pushback);

  always_comb begin
    for (int k = 0; k < N_KSU; k++) begin
      kb_rd_slot[k] = i_kb_slot[k]; kb_rd_ub[k] = 1'b0; kb_rd_frag[k] = i_kb_frag[k];
      i_kb_data[k]  = kb_rd_data[k];
    end
    for (int s = 0; s < N_SLOT; s++) begin
      kb_rd_slot[N_KSU+s] = l_kb_slot[s]; kb_rd_ub[N_KSU+s] = l_kb_ub[s]; kb_rd_frag[N_KSU+s] = l_kb_frag[s];
      l_kb_data[s]        = kb_rd_data[N_KSU+s];
    end
  end

  // ------------------------------------------------ memory subsystem
  lid_t root_lid_q;   // LID whose node the root cache holds
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)       root_lid_q <= '0;
    else if (root_wr) root_lid_q <= root_lid_in;

  mem_subsystem #(.NP(NP), .PT_ENTRIES(PT_ENTRIES), .MT_ENTRIES(MT_ENTRIES)) u_mem (
    .clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .resp_valid(mresp_valid), .resp_ready(mresp_ready), .resp(mresp),
    .pt_wr, .pt_lid, .pt_phys, .root_lid(root_lid_q), .lb_enable,
    .dram_rd_valid, .dram_rd_ready, .dram_rd_addr, .dram_rd_len, .dram_rd_tag,
    .dram_rsp_valid, .dram_rsp_ready, .dram_rsp, .dram_wr_valid, .dram_wr_ready, .dram_wr_addr, .dram_wr_data,
    .pcie_rd_valid, .pcie_rd_ready, .pcie_rd_addr, .pcie_rd_len, .pcie_rd_tag,
    .pcie_rsp_valid, .pcie_rsp_ready, .pcie_rsp,
    .cnt_hit, .cnt_miss, .cnt_root, .cnt_divert, .cnt_wb_chunks);
endmodule
