// cap_check_tb: bounds, empty-way and clear-match decisions against a model
// in 64-bit arithmetic: an access [a, a+n) passes when base <= a and
// a+n <= base+size. Objects are kept below 2^32 so no wrap-around occurs;
// accesses are placed just inside and just outside both bounds. Metadata
// with size 0 but a non-zero base is not an empty way and passes nothing.
module cap_check_tb;
  import rvcure_pkg::*;
  int checks = 0, failures = 0;
  cap_meta_t meta, nm;
  logic [63:0] addr;
  logic [31:0] bytes;
  logic ok, empty, match;

  cap_check dut (.meta_i(meta), .addr_i(addr), .bytes_i(bytes), .access_ok_o(ok),
                 .empty_o(empty), .match_o(match), .new_meta_o(nm));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned b, s, a, n;
    bit eok;
    for (int t = 0; t < 6000; t++) begin
      b = $urandom_range(32'h1000, 32'h7FFF_0000);
      s = (t % 7 == 0) ? 0 : $urandom_range(1, 4096);
      n = 1 << $urandom_range(0, 3);
      case (t % 5)
        0: a = b;
        1: a = b + s - n;            // last bytes
        2: a = b + s - n + 1;        // one byte past
        3: a = b - 1;                // one byte below
        default: a = b + $urandom_range(0, 8192);
      endcase
      meta.base = 32'(b); meta.size = 32'(s);
      addr = {16'($urandom()), 16'h0, 32'(a)};
      bytes = 32'(n);
      #1;
      eok = (s != 0) && (a >= b) && (a + n <= b + s);
      checks++;
      if (ok != eok || empty || match != (a == b) ||
          nm.base != 32'(a) || nm.size != 32'(n)) begin
        failures++;
        if (failures < 10) $display("b=%h s=%0d a=%h n=%0d ok=%0b exp=%0b", b, s, a, n, ok, eok);
      end
    end
    meta = '0; #1;
    checks++;
    if (!empty || ok || match) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
