// load_balancer: steers cache hits between on-board DRAM and PCIe.
//
// Counts the operations and bytes in flight on each interface (`*_issue` adds,
// `*_done` subtracts). A cache hit normally goes to DRAM; it is sent to host
// memory over PCIe instead when DRAM is the more loaded interface relative to
// its bandwidth, i.e. when dram_bytes * PCIE_BW > pcie_bytes * DRAM_BW and
// PCIe has fewer than PCIE_MAX_OPS operations in flight. `enable` low gives the
// paper's "NoLB" configuration. Monitoring in-flight operations and bytes on
// both interfaces is the paper's; the weighting rule and the default bandwidths
// (PCIe 13 GB/s measured in the paper; DRAM 34 GB/s for two DDR4-2133
// channels) are this design's choices.
module load_balancer #(
  parameter int unsigned DRAM_BW      = 34,
  parameter int unsigned PCIE_BW      = 13,
  parameter int unsigned PCIE_MAX_OPS = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        dram_issue,
  input  logic        pcie_issue,
  input  logic [13:0] issue_bytes,
  input  logic        dram_done,
  input  logic [13:0] dram_done_bytes,
  input  logic        pcie_done,
  input  logic [13:0] pcie_done_bytes,
  output logic        hit_to_pcie,
  output logic [31:0] dram_bytes,
  output logic [31:0] pcie_bytes,
  output logic [15:0] dram_ops,
  output logic [15:0] pcie_ops
);
  logic [39:0] dram_w, pcie_w;
  assign dram_w = 40'(dram_bytes) * 40'(PCIE_BW);
  assign pcie_w = 40'(pcie_bytes) * 40'(DRAM_BW);
  assign hit_to_pcie = enable && dram_w > pcie_w && pcie_ops < 16'(PCIE_MAX_OPS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dram_bytes <= '0; pcie_bytes <= '0; dram_ops <= '0; pcie_ops <= '0;
    end else begin
      dram_bytes <= dram_bytes + (dram_issue ? 32'(issue_bytes) : 32'd0) - (dram_done ? 32'(dram_done_bytes) : 32'd0);
      pcie_bytes <= pcie_bytes + (pcie_issue ? 32'(issue_bytes) : 32'd0) - (pcie_done ? 32'(pcie_done_bytes) : 32'd0);
      dram_ops   <= dram_ops + 16'(dram_issue) - 16'(dram_done);
      pcie_ops   <= pcie_ops + 16'(pcie_issue) - 16'(pcie_done);
    end
  end
endmodule
