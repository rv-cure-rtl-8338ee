// ccache_tb: random fills, cstr allocations and cclr invalidations against
// a model keyed by the full 16-bit tag (direct-mapped on tag[7:0]); checks
// hit/miss and returned metadata on both lookup ports every cycle.
module ccache_tb;
  import rvcure_pkg::*;
  int checks = 0, failures = 0, hits = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0][15:0] lk_tag;
  logic [1:0]       lk_hit;
  cap_meta_t [1:0]  lk_meta;
  logic fv, cv, cis;
  logic [15:0] ft, ct;
  cap_meta_t fm, cm;

  bit         mv [256];
  logic [7:0] mt [256];
  cap_meta_t  md [256];

  ccache dut (.clk, .rst_n, .lk_tag_i(lk_tag), .lk_hit_o(lk_hit), .lk_meta_o(lk_meta),
              .fill_valid_i(fv), .fill_tag_i(ft), .fill_meta_i(fm),
              .cmt_valid_i(cv), .cmt_is_cstr_i(cis), .cmt_tag_i(ct), .cmt_meta_i(cm));

  // tags drawn from a small pool so that sets collide and lookups hit
  function automatic logic [15:0] rtag();
    return {6'($urandom()), 2'($urandom()), 4'($urandom()), 4'($urandom())} & 16'h0F0F;
  endfunction

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fv = 0; cv = 0; cis = 0; ft = 0; ct = 0; fm = '0; cm = '0; lk_tag = '0;
    foreach (mv[i]) mv[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      for (int l = 0; l < 2; l++) lk_tag[l] = rtag();
      #1;
      for (int l = 0; l < 2; l++) begin
        automatic bit eh = mv[lk_tag[l][7:0]] && mt[lk_tag[l][7:0]] == lk_tag[l][15:8];
        checks++;
        if (lk_hit[l] != eh || (eh && lk_meta[l] != md[lk_tag[l][7:0]])) begin
          failures++;
          if (failures < 10) $display("t=%0d tag=%h hit=%0b exp=%0b", t, lk_tag[l], lk_hit[l], eh);
        end
        if (eh) hits++;
      end
      fv = ($urandom_range(0, 2) == 0); ft = rtag(); fm = {$urandom(), $urandom()};
      cv = ($urandom_range(0, 2) == 0); ct = rtag(); cm = {$urandom(), $urandom()};
      cis = 1'($urandom());
      if (t % 500 == 7) begin ct = ft; cis = 1; cv = 1; fv = 1; end
      @(posedge clk);
      if (fv && !(cv && cis && ct[7:0] == ft[7:0])) begin
        mv[ft[7:0]] = 1; mt[ft[7:0]] = ft[15:8]; md[ft[7:0]] = fm;
      end
      if (cv) begin
        if (cis) begin mv[ct[7:0]] = 1; mt[ct[7:0]] = ct[15:8]; md[ct[7:0]] = cm; end
        else if (mt[ct[7:0]] == ct[15:8]) mv[ct[7:0]] = 0;
      end
    end
    checks++;
    if (hits < 100) begin failures++; $display("too few hits: %0d", hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
