// key_compare: key comparison pipeline of the key search unit.
//
// Compares a block key with a request key the way C memcmp() followed by a
// length tie-break does: the first differing byte decides, and if one key is a
// prefix of the other the shorter key is smaller. Keys arrive one 16-byte
// fragment per cycle (the fragment width is the paper's); `start` marks the first
// fragment. `a_rem`/`b_rem` are the bytes of each key still to come, counting
// this fragment. The verdict is registered: `done` rises one cycle after the
// fragment in which it was decided and `lt/eq/gt` describe a relative to b.
// The single register stage and the early-out are this design's choices.
module key_compare #(
  parameter int unsigned FRAG_BYTES = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      valid,
  input  logic                      start,
  input  logic [FRAG_BYTES*8-1:0]   a,
  input  logic [FRAG_BYTES*8-1:0]   b,
  input  logic [9:0]                a_rem,
  input  logic [9:0]                b_rem,
  output logic                      done,
  output logic                      lt,
  output logic                      eq,
  output logic                      gt
);
  logic       decided, dec_lt, dec_gt;
  logic       busy;   // a comparison is open and undecided

  always_comb begin
    automatic int unsigned na, nb, n;
    automatic logic found;
    na = (a_rem > 10'(FRAG_BYTES)) ? FRAG_BYTES : int'(a_rem);
    nb = (b_rem > 10'(FRAG_BYTES)) ? FRAG_BYTES : int'(b_rem);
    n  = (na < nb) ? na : nb;
    found   = 1'b0;
    decided = 1'b0;
    dec_lt  = 1'b0;
    dec_gt  = 1'b0;
    for (int unsigned i = 0; i < FRAG_BYTES; i++) begin
      if (!found && i < n && a[i*8 +: 8] != b[i*8 +: 8]) begin
        found   = 1'b1;
        decided = 1'b1;
        dec_lt  = a[i*8 +: 8] < b[i*8 +: 8];
        dec_gt  = a[i*8 +: 8] > b[i*8 +: 8];
      end
    end
    if (!found && (a_rem <= 10'(FRAG_BYTES) || b_rem <= 10'(FRAG_BYTES))) begin
      decided = 1'b1;                 // one key ends here with a common prefix
      dec_lt  = a_rem < b_rem;
      dec_gt  = a_rem > b_rem;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; lt <= 1'b0; eq <= 1'b0; gt <= 1'b0;
    end else begin
      done <= 1'b0;
      if (valid && (start || busy)) begin
        if (decided) begin
          busy <= 1'b0;
          done <= 1'b1;
          lt   <= dec_lt;
          gt   <= dec_gt;
          eq   <= !dec_lt && !dec_gt;
        end else begin
          busy <= 1'b1;
        end
      end
    end
  end
endmodule
