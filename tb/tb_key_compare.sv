// tb_key_compare: random key pairs (0..70 bytes, often sharing a prefix) are fed
// one 16-byte fragment per cycle; the verdict, which arrives one cycle after
// the deciding fragment, is compared with a byte-wise memcmp model in which the
// shorter of two equal-prefix keys is the smaller.
module tb_key_compare;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid, start, done, lt, eq, gt;
  logic [127:0] a, b;
  logic [9:0] a_rem, b_rem;
  key_compare #(.FRAG_BYTES(16)) dut (.*);
  int checks = 0, failures = 0;
  byte unsigned ka[80], kb[80];

  initial begin
    valid = 0; start = 0; a = '0; b = '0; a_rem = '0; b_rem = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int la, lb, exp, j;
      la = $urandom % 71; lb = ($urandom % 3 == 0) ? la : $urandom % 71;
      for (int i = 0; i < 80; i++) begin ka[i] = $urandom; kb[i] = ka[i]; end
      if ($urandom % 4 != 0) kb[$urandom % 71] = $urandom;
      exp = 0;
      for (int i = 0; i < 71 && exp == 0; i++)
        if (i < la && i < lb && ka[i] != kb[i]) exp = (ka[i] < kb[i]) ? -1 : 1;
      if (exp == 0) exp = (la < lb) ? -1 : (la > lb) ? 1 : 0;
      j = 0;
      forever begin
        @(negedge clk);
        valid = 1; start = j == 0;
        a_rem = 10'((la - 16 * j) > 0 ? la - 16 * j : 0);
        b_rem = 10'((lb - 16 * j) > 0 ? lb - 16 * j : 0);
        for (int i = 0; i < 16; i++) begin a[i*8 +: 8] = ka[16*j + i]; b[i*8 +: 8] = kb[16*j + i]; end
        @(posedge clk); #1;
        j++;
        if (done || j > 6) break;
      end
      valid = 0;
      checks++;
      if (!done || lt != (exp < 0) || eq != (exp == 0) || gt != (exp > 0)) begin
        failures++;
        if (failures < 10) $display("FAIL la=%0d lb=%0d exp=%0d got done=%b lt=%b eq=%b gt=%b", la, lb, exp, done, lt, eq, gt);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
