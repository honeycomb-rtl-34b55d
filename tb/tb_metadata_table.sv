// tb_metadata_table: random allocate / fill / invalidate / lookup traffic over
// LIDs that crowd a few sets, against a model that tracks which LIDs are
// present, their physical address and their 256-byte chunk occupancy. A LID
// the model holds may have been evicted by a later allocation in its set, so
// only the fields of a hit are checked, plus: a just-allocated LID must hit,
// an invalidated LID must miss, and a set never holds more than 4 LIDs.
module tb_metadata_table;
  import hc_pkg::*;
  localparam int ENTRIES = 1024, WAYS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  lid_t lk_lid, alloc_lid, inval_lid; logic hit, alloc, fill, inval;
  logic [9:0] hit_slot, alloc_slot, fill_slot; paddr_t hit_phys, alloc_phys; logic [31:0] hit_occ, fill_mask;
  metadata_table #(.ENTRIES(ENTRIES), .WAYS(WAYS)) dut (.*);
  int checks = 0, failures = 0;
  paddr_t mphys [longint]; logic [31:0] mocc [longint];
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  function automatic lid_t pick(); return lid_t'(($urandom % 3) * 256 + ($urandom % 12) * 1); endfunction
  initial begin
    lk_lid = 0; alloc = 0; fill = 0; inval = 0; alloc_lid = 0; alloc_phys = 0; fill_slot = 0; fill_mask = 0; inval_lid = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 5000; n++) begin
      automatic lid_t l = pick();
      @(negedge clk);
      lk_lid = l; #1;
      if (hit) begin
        chk(mphys.exists(l) && hit_phys == mphys[l] && hit_occ == mocc[l], $sformatf("hit fields lid %0d", l));
        if ($urandom % 2) begin
          fill = 1; fill_slot = hit_slot; fill_mask = 32'd1 << ($urandom % 32); mocc[l] |= fill_mask;
        end else if ($urandom % 4 == 0) begin
          inval = 1; inval_lid = l; mphys.delete(l); mocc.delete(l);
        end
      end else begin
        alloc = 1; alloc_lid = l; alloc_phys = {$urandom, $urandom}; mphys[l] = alloc_phys; mocc[l] = 0;
      end
      @(negedge clk);
      fill = 0; inval = 0;
      #1;
      if (alloc) chk(hit && hit_phys == alloc_phys && hit_occ == 0, "allocated LID hits");
      else if (inval_lid == l && !mphys.exists(l)) chk(!hit, "invalidated LID misses");
      alloc = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
