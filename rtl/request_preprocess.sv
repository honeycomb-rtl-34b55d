// request_preprocess: turns a get/scan request into request metadata.
//
// A request arrives as a stream of 16-byte beats: one header beat, then the
// lower-bound (LB) key fragments, then, for a scan, the upper-bound (UB) key
// fragments. Header beat: [1:0] op (0 get, 1 scan), [17:2] client tag,
// [26:18] LB key length, [35:27] UB key length. A get(K) is run as scan(K,K)
// (as in the paper): its UB length is the LB length and readers of its UB
// key read the LB buffer instead.
// The block takes a key-buffer slot and a sequence number from the epoch
// manager, reads the accelerator's copy of the global read version (written
// by the host over PCIe through rdver_wr) and the root LID and tree height
// (written by the host when the tree grows), and emits metadata for a visit
// of the root's header and shortcut block (first 512 bytes). A request is
// accepted only when a slot and a sequence number are free. The beat format and
// handshake are this design's choices; the content of the metadata is the paper's.
module request_preprocess
  import hc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // request stream
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [BEAT_W-1:0] in_data,
  // host-written registers
  input  logic              rdver_wr,
  input  ver_t              rdver_in,
  input  logic              root_wr,
  input  lid_t              root_lid_in,
  input  logic [7:0]        root_level_in,
  output ver_t              global_rd_ver,
  // key buffers
  input  logic              kb_alloc_ok,
  input  logic [5:0]        kb_alloc_slot,
  output logic              kb_alloc,
  output logic              kb_wr_en,
  output logic [5:0]        kb_wr_slot,
  output logic              kb_wr_ub,
  output logic [4:0]        kb_wr_frag,
  output logic [BEAT_W-1:0] kb_wr_data,
  // epoch manager
  input  seq_t              seq_new,
  input  logic              seq_full,
  output logic              seq_take,
  // metadata out
  output logic              out_valid,
  input  logic              out_ready,
  output meta_t             out_meta
);
  typedef enum logic [1:0] {S_HDR, S_LB, S_UB, S_OUT} state_e;
  state_e      state;
  lid_t        root_lid;
  logic [7:0]  root_level;
  meta_t       m;
  logic [4:0]  frag;

  function automatic logic [4:0] nfrags(input logic [8:0] len);
    return 5'((len + 9'd15) >> 4);
  endfunction

  assign in_ready   = (state == S_HDR) ? (kb_alloc_ok && !seq_full) : (state == S_LB || state == S_UB);
  assign kb_alloc   = state == S_HDR && in_valid && in_ready;
  assign seq_take   = kb_alloc;
  assign kb_wr_en   = in_valid && (state == S_LB || state == S_UB);
  assign kb_wr_slot = m.kslot;
  assign kb_wr_ub   = state == S_UB;
  assign kb_wr_frag = frag;
  assign kb_wr_data = in_data;
  assign out_valid  = state == S_OUT;
  assign out_meta   = m;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_HDR;
      global_rd_ver <= '0;
      root_lid      <= '0;
      root_level    <= '0;
      m             <= '0;
      frag          <= '0;
    end else begin
      if (rdver_wr) global_rd_ver <= rdver_in;
      if (root_wr) begin
        root_lid   <= root_lid_in;
        root_level <= root_level_in;
      end
      unique case (state)
        S_HDR: if (in_valid && in_ready) begin
          m          <= '0;
          m.seq      <= seq_new;
          m.rd_ver   <= global_rd_ver;
          m.kslot    <= kb_alloc_slot;
          m.op       <= op_e'(in_data[1:0]);
          m.tag      <= in_data[17:2];
          m.lb_len   <= in_data[26:18];
          m.ub_len   <= (in_data[1:0] == 2'(OP_GET)) ? in_data[26:18] : in_data[35:27];
          m.lid      <= root_lid;
          m.level    <= root_level;
          m.blk      <= BLK_SHORTCUT;
          m.offset   <= '0;
          m.len      <= 13'(SC_END);
          frag       <= '0;
          state      <= S_LB;
        end
        S_LB: if (in_valid) begin
          frag <= frag + 1'b1;
          if (frag + 1'b1 == nfrags(m.lb_len)) begin
            frag  <= '0;
            state <= (m.op == OP_SCAN) ? S_UB : S_OUT;
          end
        end
        S_UB: if (in_valid) begin
          frag <= frag + 1'b1;
          if (frag + 1'b1 == nfrags(m.ub_len)) begin
            frag  <= '0;
            state <= S_OUT;
          end
        end
        S_OUT: if (out_ready) state <= S_HDR;
        default: state <= S_HDR;
      endcase
    end
  end
endmodule
