// tb_epoch_manager: takes sequence numbers at random, completes in-flight ones
// in random order and checks S_new, the full flag at the window limit, and that
// S_old settles on the oldest unfinished number (S_new when none is open).
module tb_epoch_manager;
  localparam int WINDOW = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic take, full, done;
  logic [63:0] seq_new, seq_old, done_seq;
  epoch_manager #(.SEQ_W(64), .WINDOW(WINDOW)) dut (.*);
  int checks = 0, failures = 0;
  longint open[$];
  longint next = 0;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
    if (failures >= 20) begin   // stop early once the block is clearly broken
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  endtask

  initial begin
    take = 0; done = 0; done_seq = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      take = 0; done = 0;
      chk(seq_new == next, "seq_new");
      chk(full == (seq_new - seq_old >= WINDOW), "full flag");
      if ($urandom % 3 == 0 && open.size() > 0) begin
        automatic int i = $urandom % open.size();
        done = 1; done_seq = open[i]; open.delete(i);
      end
      if ($urandom % 2 && !full) begin take = 1; open.push_back(next); next++; end
      if (n % 500 == 499) begin
        longint oldest;
        @(negedge clk); take = 0; done = 0;
        repeat (WINDOW + 2) @(negedge clk);
        oldest = next;
        foreach (open[i]) if (open[i] < oldest) oldest = open[i];
        chk(seq_old == oldest, $sformatf("S_old %0d expected %0d", seq_old, oldest));
      end
    end
    @(negedge clk); take = 0; done = 0;
    while (open.size() > 0) begin
      @(negedge clk); done = 1; done_seq = open.pop_front();
    end
    @(negedge clk); done = 0;
    repeat (WINDOW + 2) @(negedge clk);
    chk(seq_old == seq_new, "S_old reaches S_new when all finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
