// shadow_queue_tb: directed test of one shadow store queue (SSQ) against a
// small memory holding a 4-way CMT. It walks each path of the entry state
// machine and counts the capability loads each instruction needs:
//   untagged store           -> needCC cleared at address arrival, 0 loads
//   cstr from SHB way 1      -> way 1 full, way 2 empty: 2 loads, then after
//                               commit one store of {size, base} to way 2
//   tagged store, C-cache hit-> cleared at arrival, 0 loads
//   tagged store, miss       -> metadata in way 2: 3 loads, fill, clear
//   out-of-bounds store      -> 4 loads, store capability fault
//   store behind older cclr  -> no load until the cclr's store is done, then
//                               4 loads and a fault (use after free)
//   cclr of absent metadata  -> cclr fault; cstr into a full row -> cstr fault
//   three stores allocated in one cycle on the three dispatch lanes -> each
//                               cleared at address arrival
// The memory answers loads two cycles after they are taken and accepts a
// request in three cycles of four.
module shadow_queue_tb;
  import rvcure_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [63:0] BASE = 64'h0000_0000_8000_0000;

  logic en = 1;
  logic av, adv, cv, rv, grant, rspv, cch, fltv, fillv, updv, updc, addr_cstr, evu, evh, evi, evd;
  logic [4:0] ai, adi, ci, rspi;
  int         lane = 0;   // dispatch lane used for the next allocation
  // all three lanes at once (step 8); zero otherwise
  logic [2:0]      xav;
  logic [2:0][4:0] xai;
  logic [2:0][2:0] xop;
  logic [2:0][6:0] xrob;
  logic [2:0][1:0] xlog;
  op_e aop;
  logic [6:0] arob, head, fltrob;
  logic aneed;
  logic [1:0] alog, clrv;
  logic [1:0][6:0] clrrob;
  logic [63:0] addr, rspd, upda;
  logic [31:0] asize;
  cap_meta_t ccm, fillm, updm;
  logic [9:0] sway, updw;
  logic [23:0] pv;
  logic [23:0][6:0] prob;
  logic [23:0] pcmt;
  cap_req_t req;
  fault_cause_e fc;
  logic [15:0] fillt, updt;

  shadow_queue #(.IS_SSQ(1'b1)) dut (
    .clk, .rst_n, .enable_dpt_i(en), .base_i(BASE), .log2n_i(4'd2), .nways_i(11'd4),
    .alloc_valid_i((3'(av) << lane) | xav), .alloc_idx_i((15'(ai) << (5 * lane)) | xai),
    .alloc_op_i((9'(aop) << (3 * lane)) | xop), .alloc_rob_i((21'(arob) << (7 * lane)) | xrob),
    .alloc_needcc_i((3'(aneed) << lane) | xav), .alloc_acc_log2_i((6'(alog) << (2 * lane)) | xlog),
    .addr_valid_i(adv), .addr_idx_i(adi), .addr_i(addr), .addr_size_i(asize),
    .cc_hit_i(cch), .cc_meta_i(ccm), .addr_is_cstr_o(addr_cstr), .start_way_i(sway),
    .rob_head_i(head), .dep_valid_i('0), .dep_rob_i('0), .dep_cmt_i('0),
    .commit_valid_i(cv), .commit_idx_i(ci),
    .req_valid_o(rv), .req_o(req), .req_grant_i(grant),
    .resp_valid_i(rspv), .resp_idx_i(rspi), .resp_data_i(rspd),
    .clr_valid_o(clrv), .clr_rob_o(clrrob),
    .fault_valid_o(fltv), .fault_rob_o(fltrob), .fault_cause_o(fc),
    .fill_valid_o(fillv), .fill_tag_o(fillt), .fill_meta_o(fillm),
    .upd_valid_o(updv), .upd_is_cstr_o(updc), .upd_tag_o(updt), .upd_addr_o(upda),
    .upd_way_o(updw), .upd_meta_o(updm), .pend_valid_o(pv), .pend_rob_o(prob), .pend_cmt_o(pcmt),
    .ev_untagged_o(evu), .ev_cc_hit_o(evh), .ev_iter_o(evi), .ev_dep_stall_o(evd));

  // ------------------------------------------------------------ memory
  logic [63:0] mem [logic [63:0]];
  logic        p1v, p2v;
  logic [4:0]  p1i, p2i;
  logic [63:0] p1d, p2d;
  int          nloads = 0, nstores = 0, nclr = 0, nflt = 0, nfill = 0, ndep = 0;
  logic [63:0] last_store_addr, last_store_data;
  fault_cause_e last_fc;
  logic [6:0]  last_clr_rob;
  logic [127:0] clr_seen;   // ROB entries whose needCC bit was cleared

  assign grant = rv && (($urandom_range(0, 3) != 0));
  assign rspv = p2v;
  assign rspi = p2i;
  assign rspd = p2d;

  function automatic logic [63:0] rd(input logic [63:0] a);
    return mem.exists(a) ? mem[a] : 64'h0;
  endfunction

  always_ff @(posedge clk) begin
    p2v <= p1v && rst_n; p2i <= p1i; p2d <= p1d;
    p1v <= 1'b0;
    if (rst_n && rv && grant) begin
      if (req.is_store) begin
        mem[req.addr] = req.data;
        nstores++;
        last_store_addr <= req.addr;
        last_store_data <= req.data;
      end else begin
        p1v <= 1'b1; p1i <= req.idx; p1d <= rd(req.addr);
        nloads++;
      end
    end
    if (|clrv) begin nclr++; last_clr_rob <= clrv[0] ? clrrob[0] : clrrob[1]; end
    if (clrv[0]) clr_seen[clrrob[0]] <= 1'b1;
    if (clrv[1]) clr_seen[clrrob[1]] <= 1'b1;
    if (fltv) begin nflt++; last_fc <= fc; end
    if (fillv) nfill++;
    if (evd) ndep++;
  end

  function automatic logic [63:0] way_addr(input logic [15:0] t, input int w);
    return BASE + (64'(t) << 5) + 64'(w * 8);
  endfunction

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (loads=%0d)", m, nloads); end
  endtask

  task automatic alloc(input int idx, input op_e op, input int rob);
    @(negedge clk);
    lane = $urandom_range(0, 2);
    av = 1; ai = 5'(idx); aop = op; arob = 7'(rob); aneed = (op == OP_STORE); alog = 2'd3;
    @(negedge clk);
    av = 0;
  endtask

  task automatic send(input int idx, input logic [63:0] a, input int size, input bit hit,
                      input cap_meta_t m, input int startw);
    @(negedge clk);
    adv = 1; adi = 5'(idx); addr = a; asize = 32'(size); cch = hit; ccm = m; sway = 10'(startw);
    @(negedge clk);
    adv = 0; cch = 0;
  endtask

  task automatic commit(input int idx);
    @(negedge clk); cv = 1; ci = 5'(idx);
    @(negedge clk); cv = 0;
  endtask

  task automatic settle(input int n);
    repeat (n) @(posedge clk);
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [15:0] T = 16'h3A5C;
  localparam logic [31:0] OBJ = 32'h1000_0100;
  logic [63:0] tp;

  initial begin
    int l0, c0, f0, s0;
    av = 0; adv = 0; cv = 0; cch = 0; ccm = '0; sway = 0; head = 0; asize = 0;
    ai = 0; adi = 0; ci = 0; aop = OP_OTHER; arob = 0; aneed = 0; alog = 0; addr = 0;
    xav = 0; xai = '0; xop = '0; xrob = '0; xlog = '0; clr_seen = '0;
    tp = {T, 16'h0, OBJ};
    mem[way_addr(T, 0)] = {32'd16, 32'h2000_0000};   // other objects of this tag
    mem[way_addr(T, 1)] = {32'd32, 32'h3000_0000};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. untagged store
    l0 = nloads; c0 = nclr;
    alloc(0, OP_STORE, 1);
    send(0, 64'h0000_0000_1234_0000, 0, 0, '0, 0);
    settle(4);
    chk(nloads == l0 && nclr == c0 + 1 && last_clr_rob == 1, "untagged store cleared without loads");
    commit(0);

    // 2. cstr starting from SHB way 1
    l0 = nloads; s0 = nstores;
    alloc(1, OP_CSTR, 2);
    send(1, tp, 64, 0, '0, 1);
    chk(1, "cstr sent");
    settle(20);
    chk(nloads == l0 + 2, $sformatf("cstr needed 2 loads, got %0d", nloads - l0));
    chk(nstores == s0 && pv[1], "cstr store waits for commit");
    commit(1);
    settle(10);
    chk(nstores == s0 + 1 && last_store_addr == way_addr(T, 2) &&
        last_store_data == {32'd64, OBJ}, "cstr stored {size,base} in way 2");
    chk(!pv[1], "cstr left the queue");

    // 3. tagged store, C-cache hit
    l0 = nloads; c0 = nclr;
    alloc(2, OP_STORE, 3);
    send(2, tp + 8, 0, 1, {32'd64, OBJ}, 0);
    settle(4);
    chk(nloads == l0 && nclr == c0 + 1, "C-cache hit cleared needCC without loads");
    commit(2);

    // 4. tagged store, C-cache miss: metadata in way 2
    l0 = nloads; c0 = nclr; f0 = nfill;
    alloc(3, OP_STORE, 4);
    send(3, tp + 56, 0, 0, '0, 0);
    settle(25);
    chk(nloads == l0 + 3, $sformatf("miss needed 3 loads, got %0d", nloads - l0));
    chk(nclr == c0 + 1 && nfill == f0 + 1, "miss: cleared and filled");
    commit(3);

    // 5. out of bounds (last byte past the object)
    l0 = nloads; f0 = nflt; c0 = nclr;
    alloc(4, OP_STORE, 5);
    send(4, tp + 57, 0, 0, '0, 0);
    settle(30);
    chk(nloads == l0 + 4 && nflt == f0 + 1 && last_fc == FAULT_STORE && nclr == c0,
        "out-of-bounds store: 4 loads then fault");
    commit(4);

    // 6. store younger than a cclr of the same object
    alloc(5, OP_CCLR, 10);
    alloc(6, OP_STORE, 11);
    l0 = nloads; f0 = nflt;
    send(6, tp + 8, 0, 0, '0, 0);
    settle(10);
    chk(nloads == l0 && ndep > 0, "store stalled behind older cclr");
    s0 = nstores;
    send(5, tp, 0, 0, '0, 2);                  // CHB says way 2
    settle(10);
    chk(nloads == l0 + 1, $sformatf("cclr found its way at once, loads=%0d", nloads - l0));
    commit(5);
    settle(40);
    chk(nstores == s0 + 1 && last_store_addr == way_addr(T, 2) && last_store_data == 0,
        "cclr cleared way 2");
    chk(nloads == l0 + 1 + 4 && nflt == f0 + 1 && last_fc == FAULT_STORE,
        "use after free detected after 4 loads");
    commit(6);

    // 7. cclr of metadata that is not there; cstr into a full row
    f0 = nflt;
    alloc(7, OP_CCLR, 12);
    send(7, tp, 0, 0, '0, 0);
    settle(30);
    chk(nflt == f0 + 1 && last_fc == FAULT_CCLR, "double clear faults");
    commit(7);
    mem[way_addr(T, 2)] = {32'd8, 32'h4000_0000};
    mem[way_addr(T, 3)] = {32'd8, 32'h5000_0000};
    f0 = nflt; s0 = nstores;
    alloc(8, OP_CSTR, 13);
    send(8, tp, 16, 0, '0, 3);
    settle(30);
    chk(nflt == f0 + 1 && last_fc == FAULT_CSTR, "cstr into full row faults");
    commit(8);
    settle(5);
    chk(nstores == s0 && pv == 0, "faulted cstr stores nothing and leaves");

    // 8. three stores dispatched in one cycle, one on each lane
    l0 = nloads; c0 = nclr;
    @(negedge clk);
    ai = 0; aop = OP_OTHER; arob = 0; aneed = 0; alog = 0;   // single-lane path idle
    for (int l = 0; l < 3; l++) begin
      xai[l] = 5'(9 + l); xop[l] = 3'(OP_STORE); xrob[l] = 7'(20 + l); xlog[l] = 2'd3;
    end
    xav = 3'b111;
    @(negedge clk);
    xav = 0;
    for (int l = 0; l < 3; l++) send(9 + l, 64'h0000_0000_1234_0040 + 64'(8 * l), 0, 0, '0, 0);
    settle(4);
    chk(nloads == l0 && nclr == c0 + 3 && clr_seen[22:20] == 3'b111 && pv == 0,
        "three stores from one dispatch cycle each cleared needCC");
    for (int l = 0; l < 3; l++) commit(9 + l);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
