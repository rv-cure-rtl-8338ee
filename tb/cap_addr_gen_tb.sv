// cap_addr_gen_tb: compares CapAddr with Base + T * 8 * N + W * 8, written
// with multiplications instead of shifts, for random operands.
module cap_addr_gen_tb;
  import rvcure_pkg::*;
  int checks = 0, failures = 0;
  logic [63:0] base, addr, exp;
  logic [15:0] tag;
  logic [3:0]  l2;
  logic [9:0]  way;

  cap_addr_gen dut (.base_i(base), .tag_i(tag), .log2n_i(l2), .way_i(way), .addr_o(addr));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned n;
    for (int t = 0; t < 5000; t++) begin
      base = {$urandom(), $urandom()} & ~64'h7;
      tag  = 16'($urandom());
      l2   = 4'($urandom_range(0, 10));
      n    = 64'd1;
      for (int k = 0; k < l2; k++) n = n * 2;
      way  = 10'($urandom_range(0, int'(n) - 1));
      #1;
      exp = base + 64'(tag) * 8 * n + 64'(way) * 8;
      checks++;
      if (addr != exp) begin
        failures++;
        if (failures < 10) $display("base=%h tag=%h n=%0d way=%0d got %h exp %h", base, tag, n, way, addr, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
