// tb_key_buffers: allocates slots until the buffer is full, writes random LB
// and UB fragments, reads them back through every read port (latency one
// cycle), frees random slots and checks that the lowest free slot is offered.
module tb_key_buffers;
  import hc_pkg::*;
  localparam int SLOTS = 64, NRD = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc_ok, alloc, free, wr_en, wr_ub;
  logic [5:0] alloc_slot, free_slot, wr_slot;
  logic [4:0] wr_frag;
  logic [127:0] wr_data;
  logic [NRD-1:0][5:0] rd_slot; logic [NRD-1:0] rd_ub; logic [NRD-1:0][4:0] rd_frag;
  logic [NRD-1:0][127:0] rd_data;
  key_buffers #(.SLOTS(SLOTS), .NRD(NRD)) dut (.*);
  int checks = 0, failures = 0;
  logic [127:0] model [SLOTS][2][KEY_FRAGS];
  bit used [SLOTS];

  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  initial begin
    alloc = 0; free = 0; wr_en = 0; wr_ub = 0; wr_slot = 0; wr_frag = 0; wr_data = 0; free_slot = 0;
    rd_slot = '0; rd_ub = '0; rd_frag = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      // allocate all free slots
      forever begin
        automatic int exp = -1;
        @(negedge clk);
        for (int i = SLOTS - 1; i >= 0; i--) if (!used[i]) exp = i;
        chk(alloc_ok == (exp >= 0), "alloc_ok");
        if (exp < 0) break;
        chk(int'(alloc_slot) == exp, $sformatf("alloc_slot %0d exp %0d", alloc_slot, exp));
        alloc = 1; used[exp] = 1;
        @(negedge clk); alloc = 0;
      end
      // write some fragments
      for (int n = 0; n < 400; n++) begin
        @(negedge clk);
        wr_en = 1; wr_slot = $urandom % SLOTS; wr_ub = $urandom; wr_frag = $urandom % KEY_FRAGS;
        wr_data = {$urandom, $urandom, $urandom, $urandom};
        model[wr_slot][wr_ub][wr_frag] = wr_data;
      end
      @(negedge clk); wr_en = 0;
      // read back on all ports
      for (int n = 0; n < 400; n++) begin
        int s [NRD]; int u [NRD]; int f [NRD];
        @(negedge clk);
        for (int p = 0; p < NRD; p++) begin
          s[p] = $urandom % SLOTS; u[p] = $urandom % 2; f[p] = $urandom % KEY_FRAGS;
          rd_slot[p] = 6'(s[p]); rd_ub[p] = u[p][0]; rd_frag[p] = 5'(f[p]);
        end
        @(negedge clk);
        for (int p = 0; p < NRD; p++)
          if (model[s[p]][u[p]][f[p]] !== 'x)
            chk(rd_data[p] == model[s[p]][u[p]][f[p]], $sformatf("read port %0d", p));
      end
      // free a random subset
      for (int n = 0; n < 20; n++) begin
        automatic int s = $urandom % SLOTS;
        @(negedge clk); free = used[s]; free_slot = 6'(s); used[s] = 0;
        @(negedge clk); free = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
