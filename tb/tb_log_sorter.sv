// tb_log_sorter: builds random log blocks (random keys in log order, order
// hint = number of earlier entries with a smaller key, random version deltas),
// inserts one entry per cycle and checks that the read-out is in key order
// with the keep flag set exactly for entries visible at the read version.
module tb_log_sorter;
  import hc_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, in_valid, in_replace, rd_keep, rd_replace;
  logic [12:0] in_off, rd_off; logic [6:0] in_hint; logic [39:0] in_delta;
  ver_t node_ver, rd_ver; logic [6:0] count; logic [5:0] rd_idx;
  log_sorter #(.DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  initial begin
    clear = 0; in_valid = 0; in_off = 0; in_hint = 0; in_replace = 0; in_delta = 0; rd_idx = 0;
    node_ver = 100; rd_ver = 120;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic int n = 1 + $urandom % DEPTH;
      automatic int keys[$], offs[$], dl[$], order[$];
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int e = 0; e < n; e++) begin
        automatic int k = $urandom % 100000, h = 0;
        foreach (keys[f]) if (keys[f] < k) h++;
        keys.push_back(k); offs.push_back(e * 40); dl.push_back($urandom % 40);
        in_valid = 1; in_off = 13'(e * 40); in_hint = 7'(h); in_delta = 40'(dl[e]); in_replace = e[0];
        @(negedge clk);
      end
      in_valid = 0;
      for (int e = 0; e < n; e++) order.push_back(e);
      order.sort(x) with (keys[x] * 64 + (63 - x));   // equal keys: later entry first
      chk(int'(count) == n, "count");
      for (int i = 0; i < n; i++) begin
        rd_idx = 6'(i); #1;
        chk(int'(rd_off) == offs[order[i]], $sformatf("position %0d", i));
        chk(rd_keep == (100 + dl[order[i]] <= 120), "keep flag");
        chk(rd_replace == order[i] % 2, "replace flag");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
