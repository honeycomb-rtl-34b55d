// tb_node_address_table: records a physical address per request sequence
// number and reads it back, for random numbers within the 64-entry window.
module tb_node_address_table;
  import hc_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en; seq_t wr_seq, rd_seq; paddr_t wr_phys, rd_phys;
  node_address_table #(.ENTRIES(64)) dut (.*);
  int checks = 0, failures = 0;
  paddr_t model [64];
  bit     set [64];
  initial begin
    wr_en = 0; wr_seq = 0; rd_seq = 0; wr_phys = 0;
    for (int n = 0; n < 4000; n++) begin
      automatic longint base = 64'(n / 50) * 64;
      @(negedge clk);
      wr_en = $urandom % 2; wr_seq = base + $urandom % 64; wr_phys = {$urandom, $urandom};
      if (wr_en) begin model[wr_seq % 64] = wr_phys; set[wr_seq % 64] = 1; end
      @(negedge clk); wr_en = 0;
      rd_seq = base + $urandom % 64; #1;
      if (set[rd_seq % 64]) begin
        checks++;
        if (rd_phys != model[rd_seq % 64]) begin failures++; $display("FAIL seq %0d", rd_seq); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
