// tb_root_cache: fills random 256-byte chunks of the root node, checks the
// covers flag for random byte ranges and LIDs, reads words back (one-cycle
// latency) and checks that an invalidation empties the cache.
module tb_root_cache;
  import hc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  lid_t root_lid, q_lid; logic inval, wr_en, wr_chunk_done, covers, rd_en;
  logic [12:0] wr_addr, q_off, rd_addr; logic [127:0] wr_data, rd_data; logic [4:0] wr_chunk; logic [13:0] q_len;
  root_cache #(.NODE_BYTES(8192)) dut (.*);
  int checks = 0, failures = 0, n_cov = 0;
  logic [127:0] model [512]; bit vld [32];
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    root_lid = 7; q_lid = 7; inval = 0; wr_en = 0; wr_chunk_done = 0; wr_addr = 0; wr_data = 0; wr_chunk = 0;
    q_off = 0; q_len = 0; rd_en = 0; rd_addr = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      for (int c = 0; c < 32; c++) vld[c] = 0;
      for (int n = 0; n < 20; n++) begin
        automatic int c = $urandom % 32;
        for (int w = 0; w < 16; w++) begin
          @(negedge clk);
          wr_en = 1; wr_addr = 13'(c * 256 + w * 16); wr_data = {$urandom, $urandom, $urandom, $urandom};
          model[c * 16 + w] = wr_data;
          wr_chunk_done = w == 15; wr_chunk = 5'(c);
        end
        @(negedge clk); wr_en = 0; wr_chunk_done = 0; vld[c] = 1;
      end
      for (int n = 0; n < 300; n++) begin
        automatic int off = $urandom % 8192, len = 1 + $urandom % 1024;
        bit exp;
        if (off + len > 8192) len = 8192 - off;
        q_lid = ($urandom % 8 == 0) ? 8 : 7; q_off = 13'(off); q_len = 14'(len); #1;
        exp = q_lid == 7;
        for (int c = off / 256; c <= (off + len - 1) / 256; c++) if (!vld[c]) exp = 0;
        chk(covers == exp, $sformatf("covers off %0d len %0d", off, len));
        n_cov += exp;
        @(negedge clk);
      end
      for (int n = 0; n < 200; n++) begin
        automatic int w = $urandom % 512;
        @(negedge clk); rd_en = 1; rd_addr = 13'(w * 16);
        @(negedge clk); rd_en = 0;
        if (vld[w / 16]) chk(rd_data == model[w], "read back");
      end
      @(negedge clk); inval = 1; @(negedge clk); inval = 0;
      q_lid = 7; q_off = 0; q_len = 16; #1;
      chk(!covers, "invalidate");
    end
    chk(n_cov > 0, "some range covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
