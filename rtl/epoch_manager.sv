// epoch_manager: request sequence numbers for epoch-based reclamation.
//
// Every accepted request takes the next 64-bit sequence number S_new (the
// counter increments). Completions are reported by sequence number in any
// order; a WINDOW-bit scoreboard indexed by the low bits records them and
// S_old, the oldest in-flight number, advances over completed entries one per
// cycle. S_old equals S_new when nothing is in flight. Both values are exposed
// for the host's memory manager. The counter and S_old come from the paper;
// the scoreboard, its size and the back-pressure (`full` when WINDOW requests
// are in flight) are this design's choices.
module epoch_manager #(
  parameter int unsigned SEQ_W  = 64,
  parameter int unsigned WINDOW = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             take,        // assign seq_new to a new request
  output logic [SEQ_W-1:0] seq_new,     // S_new: number the next request gets
  output logic             full,
  input  logic             done,
  input  logic [SEQ_W-1:0] done_seq,
  output logic [SEQ_W-1:0] seq_old      // S_old
);
  localparam int unsigned IW = $clog2(WINDOW);
  logic [WINDOW-1:0] completed;
  logic [SEQ_W-1:0]  inflight;

  assign inflight = seq_new - seq_old;
  assign full     = inflight >= SEQ_W'(WINDOW);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq_new   <= '0;
      seq_old   <= '0;
      completed <= '0;
    end else begin
      automatic logic [WINDOW-1:0] c = completed;
      if (take && !full) seq_new <= seq_new + 1'b1;
      if (done) c[done_seq[IW-1:0]] = 1'b1;
      if (seq_old != seq_new && c[seq_old[IW-1:0]]) begin
        c[seq_old[IW-1:0]] = 1'b0;
        seq_old <= seq_old + 1'b1;
      end
      completed <= c;
    end
  end

  // A completion must belong to an in-flight request.
  assert property (@(posedge clk) disable iff (!rst_n)
    done |-> (done_seq - seq_old) < inflight);
endmodule
