// tb_load_balancer: random issue/complete traffic on both interfaces; the
// outstanding byte and operation counts and the divert decision
// (DRAM load/34 > PCIe load/13, PCIe not saturated) are checked every cycle
// against a model, and both decisions must occur.
module tb_load_balancer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable, dram_issue, pcie_issue, dram_done, pcie_done, hit_to_pcie;
  logic [13:0] issue_bytes, dram_done_bytes, pcie_done_bytes;
  logic [31:0] dram_bytes, pcie_bytes; logic [15:0] dram_ops, pcie_ops;
  load_balancer #(.DRAM_BW(34), .PCIE_BW(13), .PCIE_MAX_OPS(64)) dut (.*);
  int checks = 0, failures = 0, n_div = 0, n_keep = 0;
  int dq[$], pq[$];
  longint db = 0, pb = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    enable = 1; dram_issue = 0; pcie_issue = 0; dram_done = 0; pcie_done = 0;
    issue_bytes = 0; dram_done_bytes = 0; pcie_done_bytes = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      bit exp;
      @(negedge clk);
      chk(dram_bytes == db && pcie_bytes == pb && dram_ops == dq.size() && pcie_ops == pq.size(), "counters");
      exp = enable && db * 13 > pb * 34 && pq.size() < 64;
      chk(hit_to_pcie == exp, "divert decision");
      if (exp) n_div++; else n_keep++;
      enable = ($urandom % 10) != 0;
      issue_bytes = 14'(16 * (1 + $urandom % 32));
      dram_issue = 0; pcie_issue = 0; dram_done = 0; pcie_done = 0;
      case ($urandom % 2)
        0: begin dram_issue = $urandom % 2; if (dram_issue) begin dq.push_back(issue_bytes); db += issue_bytes; end end
        1: begin pcie_issue = $urandom % 3 == 0; if (pcie_issue) begin pq.push_back(issue_bytes); pb += issue_bytes; end end
      endcase
      if (dq.size() > 0 && $urandom % 3 == 0 && !dram_issue) begin dram_done = 1; dram_done_bytes = 14'(dq[0]); db -= dq.pop_front(); end
      if (pq.size() > 0 && $urandom % 5 == 0 && !pcie_issue) begin pcie_done = 1; pcie_done_bytes = 14'(pq[0]); pb -= pq.pop_front(); end
    end
    chk(n_div > 0 && n_keep > 0, "both decisions seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
