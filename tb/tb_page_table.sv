// tb_page_table: writes random LID -> physical-address mappings into the
// full-size table, reads them back (one-cycle read latency) and checks the
// update pulse that follows each write.
module tb_page_table;
  import hc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, upd, rd_en; lid_t wr_lid, upd_lid, rd_lid; paddr_t wr_phys, rd_phys;
  page_table #(.ENTRIES(1 << 20)) dut (.*);
  int checks = 0, failures = 0;
  paddr_t model [int];
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    wr_en = 0; rd_en = 0; wr_lid = 0; rd_lid = 0; wr_phys = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      automatic int l = $urandom % (1 << 20);
      @(negedge clk);
      wr_en = 1; wr_lid = lid_t'(l); wr_phys = {$urandom, $urandom}; model[l] = wr_phys;
      @(negedge clk); wr_en = 0;
      chk(upd && upd_lid == lid_t'(l), "update pulse");
      if (n % 2 == 0) begin
        int k, q;
        q = model.num();
        k = $urandom % q;
        void'(model.first(l));
        repeat (k) void'(model.next(l));
        rd_en = 1; rd_lid = lid_t'(l);
        @(negedge clk); rd_en = 0;
        chk(rd_phys == model[l], "read");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000000; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
