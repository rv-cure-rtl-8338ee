// ptr_tag_unit_tb: checks tagd and xtag results and the 1-cycle latency.
// The expected tag comes from a byte-wise CRC-16/CCITT written here
// independently of the design (self-checked against the standard check
// value 0x29B1 of "123456789"), applied to the 6 address bytes, most
// significant byte first, with 0 replaced by 1.
module ptr_tag_unit_tb;
  import rvcure_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic valid, is_tagd, vo;
  logic [63:0] rs1, res;
  logic [6:0]  rd, rdo;
  always #5 clk = ~clk;

  ptr_tag_unit dut (.clk, .rst_n, .valid_i(valid), .is_tagd_i(is_tagd), .rs1_i(rs1),
                    .rd_i(rd), .valid_o(vo), .rd_data_o(res), .rd_o(rdo));

  function automatic logic [15:0] crc_bytes(input logic [7:0] b [], input int n);
    logic [15:0] c = 16'hFFFF;
    for (int i = 0; i < n; i++) begin
      c = c ^ {b[i], 8'h00};
      for (int k = 0; k < 8; k++) c = c[15] ? ((c << 1) ^ 16'h1021) : (c << 1);
    end
    return c;
  endfunction

  function automatic logic [15:0] exp_tag(input logic [63:0] p);
    logic [7:0] b [] = new[6];
    logic [15:0] c;
    for (int i = 0; i < 6; i++) b[i] = p[47 - 8*i -: 8];
    c = crc_bytes(b, 6);
    return (c == 0) ? 16'd1 : c;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] s [] = new[9];
    logic [63:0] exp;
    string str = "123456789";
    for (int i = 0; i < 9; i++) s[i] = str[i];
    checks++;
    if (crc_bytes(s, 9) != 16'h29B1) begin failures++; $display("reference CRC wrong"); end

    valid = 0; is_tagd = 0; rs1 = 0; rd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      valid = 1;
      is_tagd = t[0];
      rs1 = {$urandom(), $urandom()};
      if (t == 10) rs1 = 64'h0;
      rd = 7'($urandom());
      exp = is_tagd ? {exp_tag(rs1), rs1[47:0]} : {16'h0, rs1[47:0]};
      @(posedge clk); #1;   // one clock later the result is out
      checks++;
      if (!vo || res !== exp || rdo !== rd) begin
        failures++;
        if (failures < 10) $display("t=%0d tagd=%0b rs1=%h res=%h exp=%h", t, is_tagd, rs1, res, exp);
      end
    end
    @(negedge clk); valid = 0;
    @(posedge clk); #1;
    checks++;
    if (vo) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
