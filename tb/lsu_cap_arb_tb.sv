// lsu_cap_arb_tb: checks that regular requests always win the D-cache port,
// that the SSQ goes before the SLQ, that nothing is granted without
// mem_ready, and that responses are steered by is_cap/src_ssq.
module lsu_cap_arb_tb;
  import rvcure_pkg::*;
  int checks = 0, failures = 0;
  logic rv, rs, rg, sv, sg, lv, lg, mv, mr, rpv, rrv, srv, lrv, conf;
  logic [63:0] ra, rd;
  cap_req_t sreq, lreq;
  mem_req_t mreq;
  mem_resp_t rsp;

  lsu_cap_arb dut (.reg_valid_i(rv), .reg_is_store_i(rs), .reg_addr_i(ra), .reg_data_i(rd),
                   .reg_grant_o(rg), .ssq_valid_i(sv), .ssq_req_i(sreq), .ssq_grant_o(sg),
                   .slq_valid_i(lv), .slq_req_i(lreq), .slq_grant_o(lg),
                   .mem_valid_o(mv), .mem_req_o(mreq), .mem_ready_i(mr),
                   .mem_resp_valid_i(rpv), .mem_resp_i(rsp), .reg_resp_valid_o(rrv),
                   .ssq_resp_valid_o(srv), .slq_resp_valid_o(lrv), .cap_conflict_o(conf));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok;
    for (int t = 0; t < 4000; t++) begin
      rv = 1'($urandom()); rs = 1'($urandom()); ra = {$urandom(), $urandom()}; rd = {$urandom(), $urandom()};
      sv = 1'($urandom()); sreq = {$urandom(), $urandom(), $urandom(), $urandom(), $urandom()};
      lv = 1'($urandom()); lreq = {$urandom(), $urandom(), $urandom(), $urandom(), $urandom()};
      mr = ($urandom_range(0, 3) != 0);
      rpv = 1'($urandom()); rsp = {$urandom(), $urandom(), $urandom()};
      #1;
      ok = 1;
      if (rg != (rv && mr) || sg != (!rv && sv && mr) || lg != (!rv && !sv && lv && mr)) ok = 0;
      if (mv != ((rv || sv || lv) && mr)) ok = 0;
      if (rv && (mreq.is_cap || mreq.addr != ra || mreq.is_store != rs || mreq.data != rd)) ok = 0;
      if (!rv && sv && (!mreq.is_cap || !mreq.src_ssq || mreq.addr != sreq.addr ||
                        mreq.idx != sreq.idx || mreq.is_store != sreq.is_store)) ok = 0;
      if (!rv && !sv && lv && (!mreq.is_cap || mreq.src_ssq || mreq.addr != lreq.addr ||
                               mreq.idx != lreq.idx || mreq.data != lreq.data)) ok = 0;
      if (conf != (rv && (sv || lv))) ok = 0;
      if (rrv != (rpv && !rsp.is_cap) || srv != (rpv && rsp.is_cap && rsp.src_ssq) ||
          lrv != (rpv && rsp.is_cap && !rsp.src_ssq)) ok = 0;
      checks++;
      if (!ok) begin
        failures++;
        if (failures < 10) $display("t=%0d rv=%0b sv=%0b lv=%0b mr=%0b rg=%0b sg=%0b lg=%0b", t, rv, sv, lv, mr, rg, sg, lg);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
