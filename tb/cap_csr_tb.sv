// cap_csr_tb: writes and reads the three CSRs, checks reset values, the
// 8-byte alignment of the CMT base, the power-of-two way count and its log2,
// and that other CSR numbers are ignored.
module cap_csr_tb;
  import rvcure_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wen, rhit, en;
  logic [11:0] wa, ra;
  logic [63:0] wd, rd, base;
  logic [10:0] nw;
  logic [3:0] l2;

  cap_csr dut (.clk, .rst_n, .wen_i(wen), .waddr_i(wa), .wdata_i(wd), .raddr_i(ra),
               .rdata_o(rd), .rhit_o(rhit), .enable_dpt_o(en), .base_cmt_o(base),
               .nways_o(nw), .log2n_o(l2));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic wr(input logic [11:0] a, input logic [63:0] d);
    @(negedge clk); wen = 1; wa = a; wd = d;
    @(negedge clk); wen = 0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, p;
    wen = 0; wa = 0; wd = 0; ra = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    chk(!en && base == 0 && nw == 1 && l2 == 0, "reset values");
    wr(12'h8C0, 64'h1);
    ra = 12'h8C0; #1; chk(en && rd == 1 && rhit, "enableDPT set");
    wr(12'h8C1, 64'h0000_0040_1234_5677);
    ra = 12'h8C1; #1; chk(base == 64'h0000_0040_1234_5670 && rd == base, "base aligned");
    for (int k = 0; k <= 10; k++) begin
      wr(12'h8C2, 64'd1 << k);
      ra = 12'h8C2; #1;
      chk(nw == (11'd1 << k) && l2 == k && rd == (64'd1 << k), $sformatf("ways 2^%0d", k));
    end
    wr(12'h8C2, 64'd12);
    #1; chk(nw == 8 && l2 == 3, "12 rounds to 8");
    wr(12'h8C2, 64'd5000);
    #1; chk(nw == 1024 && l2 == 10, "clamped to 1024");
    for (int k = 0; k < 20; k++) begin
      e = $urandom_range(1, 1023);
      wr(12'h8C2, 64'(e));
      p = 1;
      while (p * 2 <= e) p = p * 2;
      #1; chk(nw == 11'(p), $sformatf("ways %0d -> %0d", e, nw));
    end
    wr(12'h123, 64'h0);
    ra = 12'h123; #1; chk(!rhit && rd == 0 && en, "other CSR ignored");
    wr(12'h8C0, 64'h0);
    #1; chk(!en, "enableDPT cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
