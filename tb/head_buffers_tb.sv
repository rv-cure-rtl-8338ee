// head_buffers_tb: checks the adaptive-mode update rules of the SHB and CHB
// against a model: a cstr ending in way N writes SHB = (N+1)%M; a cclr
// writes CHB = (N-1)%M when its address is in the upper half (bit 37 set)
// and (N+1)%M otherwise; reads select SHB for a cstr and CHB for a cclr.
module head_buffers_tb;
  import rvcure_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] rt, ut;
  logic rc, uv, uc;
  logic [9:0] rw, uw;
  logic [63:0] ua;
  logic [10:0] nw;
  int shb [256], chb [256];

  head_buffers dut (.clk, .rst_n, .rd_tag_i(rt), .rd_is_cstr_i(rc), .rd_way_o(rw),
                    .upd_valid_i(uv), .upd_is_cstr_i(uc), .upd_tag_i(ut), .upd_addr_i(ua),
                    .upd_way_i(uw), .nways_i(nw));

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m;
    rt = 0; rc = 0; uv = 0; uc = 0; ut = 0; uw = 0; ua = 0; nw = 4;
    foreach (shb[i]) begin shb[i] = 0; chb[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      m = 1 << (t / 1000 + 1);         // M = 2, 4, 8, 16
      nw = 11'(m);
      rt = 16'($urandom()); rt[7:4] = 0;
      rc = 1'($urandom());
      #1;
      checks++;
      if (rw != (rc ? shb[rt[7:0]] : chb[rt[7:0]])) begin
        failures++;
        if (failures < 10) $display("t=%0d read tag=%h cstr=%0b got %0d", t, rt, rc, rw);
      end
      uv = 1'($urandom()); uc = 1'($urandom());
      ut = 16'($urandom()); ut[7:4] = 0;
      uw = 10'($urandom_range(0, m - 1));
      ua = {$urandom(), $urandom()};
      @(posedge clk);
      if (uv) begin
        if (uc) shb[ut[7:0]] = (uw + 1) % m;
        else if (ua[37]) chb[ut[7:0]] = (uw + m - 1) % m;
        else chb[ut[7:0]] = (uw + 1) % m;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
