// rvcure_top_tb: end-to-end run of the RV-CURE extensions at their default
// sizes (24-entry SLQ/SSQ, 96-entry ROB, 256-entry C-cache and head
// buffers). The testbench stands in for the baseline core: it dispatches
// instructions one at a time, each on a random one of the three dispatch
// lanes, sends their addresses, commits them in order
// from a ROB model, and provides a D-cache that answers loads three cycles
// after taking them and accepts a request four cycles in five. The CMT lives
// in that memory (base 0x40000000, 4 ways).
// The program follows the paper's heap and stack protection sequences
// (tagd, cstr, accesses, cclr) and adds the error cases: an out-of-bounds
// load, a use after free, a double clear, a cstr into a full CMT row, and a
// load that must wait for an older cstr. Each mechanism is counted and a
// failure is counted for any that never happened: untagged bypass, C-cache
// hit, CMT way iteration, capability fault, tag-dependency stall, regular
// request beating a capability request, SHB/CHB update, commit held by
// needCC, tagd/xtag results one cycle after issue, enableDPT off.
module rvcure_top_tb;
  import rvcure_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [63:0] BASE = 64'h0000_0000_4000_0000;

  // ------------------------------------------------------------ DUT signals
  logic        dis_valid = 0;
  logic [31:0] dis_instr = 0;
  logic [6:0]  dis_rob = 0;
  logic [4:0]  dis_ldq = 0, dis_stq = 0;
  int          lane = 0;            // dispatch lane used by the next instruction
  logic [2:0][2:0] dis_op_a;
  logic [2:0]  dis_needcc_a;
  op_e         dis_op;
  assign dis_op = op_e'(dis_op_a[lane]);
  logic        dis_needcc;
  assign dis_needcc = dis_needcc_a[lane];
  logic        ptu_valid = 0, ptu_is_tagd = 0, ptu_vo;
  logic [63:0] ptu_rs1 = 0, ptu_data;
  logic [6:0]  ptu_rd = 0, ptu_rdo;
  logic        agen_ld_valid = 0, agen_st_valid = 0;
  logic [4:0]  agen_ld_idx = 0, agen_st_idx = 0;
  logic [63:0] agen_ld_addr = 0, agen_st_addr = 0;
  logic [31:0] agen_st_size = 0;
  logic        csr_wen = 0, csr_rhit;
  logic [11:0] csr_waddr = 0, csr_raddr = 0;
  logic [63:0] csr_wdata = 0, csr_rdata;
  logic [6:0]  rob_head = 0;
  logic        rob_head_ok = 0, rob_can_commit, rob_head_fault;
  logic        commit_ld_valid = 0, commit_st_valid = 0;
  logic [4:0]  commit_ld_idx = 0, commit_st_idx = 0;
  logic        lsu_valid = 0, lsu_grant, lsu_resp_valid;
  logic [63:0] lsu_addr = 0;
  logic        mem_req_valid, mem_ready = 1, mem_resp_valid;
  mem_req_t    mem_req;
  mem_resp_t   mem_resp;
  logic        flt_valid;
  logic [6:0]  flt_rob;
  fault_cause_e flt_cause;
  logic [1:0]  ev_unt, ev_hit, ev_iter, ev_dep;
  logic        ev_conf, ev_hb;

  rvcure_top dut (
    .clk, .rst_n,
    .dis_valid_i(3'(dis_valid) << lane), .dis_instr_i(96'(dis_instr) << (32 * lane)),
    .dis_rob_i(21'(dis_rob) << (7 * lane)), .dis_ldq_i(15'(dis_ldq) << (5 * lane)),
    .dis_stq_i(15'(dis_stq) << (5 * lane)), .dis_op_o(dis_op_a), .dis_needcc_o(dis_needcc_a),
    .ptu_valid_i(ptu_valid), .ptu_is_tagd_i(ptu_is_tagd), .ptu_rs1_i(ptu_rs1), .ptu_rd_i(ptu_rd),
    .ptu_valid_o(ptu_vo), .ptu_data_o(ptu_data), .ptu_rd_o(ptu_rdo),
    .agen_ld_valid_i(agen_ld_valid), .agen_ld_idx_i(agen_ld_idx), .agen_ld_addr_i(agen_ld_addr),
    .agen_st_valid_i(agen_st_valid), .agen_st_idx_i(agen_st_idx), .agen_st_addr_i(agen_st_addr),
    .agen_st_size_i(agen_st_size),
    .csr_wen_i(csr_wen), .csr_waddr_i(csr_waddr), .csr_wdata_i(csr_wdata),
    .csr_raddr_i(csr_raddr), .csr_rdata_o(csr_rdata), .csr_rhit_o(csr_rhit),
    .rob_head_i(rob_head), .rob_head_ok_i(rob_head_ok), .rob_can_commit_o(rob_can_commit),
    .rob_head_fault_o(rob_head_fault),
    .commit_ld_valid_i(commit_ld_valid), .commit_ld_idx_i(commit_ld_idx),
    .commit_st_valid_i(commit_st_valid), .commit_st_idx_i(commit_st_idx),
    .lsu_req_valid_i(lsu_valid), .lsu_req_is_store_i(1'b0), .lsu_req_addr_i(lsu_addr),
    .lsu_req_data_i(64'h0), .lsu_req_grant_o(lsu_grant), .lsu_resp_valid_o(lsu_resp_valid),
    .mem_req_valid_o(mem_req_valid), .mem_req_o(mem_req), .mem_ready_i(mem_ready),
    .mem_resp_valid_i(mem_resp_valid), .mem_resp_i(mem_resp),
    .cap_fault_valid_o(flt_valid), .cap_fault_rob_o(flt_rob), .cap_fault_cause_o(flt_cause),
    .ev_untagged_o(ev_unt), .ev_cc_hit_o(ev_hit), .ev_iter_o(ev_iter), .ev_dep_stall_o(ev_dep),
    .ev_conflict_o(ev_conf), .ev_hb_upd_o(ev_hb));

  // ------------------------------------------------------------ counters
  int n_untagged = 0, n_cc_hit = 0, n_iter = 0, n_dep = 0, n_conf = 0, n_hb = 0;
  int n_fault = 0, n_needcc_hold = 0, n_cap_loads = 0, n_cap_stores = 0, n_reg = 0;
  int n_reg_resp = 0, n_ptu = 0, n_dpt_off = 0, n_arb_bad = 0;
  fault_cause_e last_cause;
  logic [6:0]   last_fault_rob;

  // ------------------------------------------------------------ D-cache model
  logic [63:0] mem [logic [63:0]];
  mem_resp_t   pipe_d [3];
  logic        pipe_v [3];

  function automatic logic [63:0] rdm(input logic [63:0] a);
    return mem.exists(a) ? mem[a] : 64'h0;
  endfunction

  assign mem_resp_valid = pipe_v[2];
  assign mem_resp       = pipe_d[2];

  always_ff @(posedge clk) begin
    pipe_v[2] <= pipe_v[1]; pipe_d[2] <= pipe_d[1];
    pipe_v[1] <= pipe_v[0]; pipe_d[1] <= pipe_d[0];
    pipe_v[0] <= 1'b0;
    if (!rst_n) begin
      pipe_v[1] <= 1'b0;
      pipe_v[2] <= 1'b0;
    end else if (mem_req_valid) begin
      if (mem_req.is_store) begin
        mem[mem_req.addr] = mem_req.data;
        if (mem_req.is_cap) n_cap_stores++;
      end else begin
        pipe_v[0] <= 1'b1;
        pipe_d[0] <= '{is_cap: mem_req.is_cap, src_ssq: mem_req.src_ssq, idx: mem_req.idx,
                       data: rdm(mem_req.addr)};
        if (mem_req.is_cap) n_cap_loads++;
      end
      if (!mem_req.is_cap) n_reg++;
      if (mem_req.is_cap && lsu_valid) begin
        n_arb_bad++;
        $display("FAIL: capability request took the port from a regular request");
      end
    end
    if (lsu_resp_valid) n_reg_resp++;
    n_untagged += int'(ev_unt[0]) + int'(ev_unt[1]);
    n_cc_hit   += int'(ev_hit[0]) + int'(ev_hit[1]);
    n_iter     += int'(ev_iter[0]) + int'(ev_iter[1]);
    if (|ev_dep) n_dep++;
    if (ev_conf) n_conf++;
    if (ev_hb)   n_hb++;
    if (flt_valid) begin n_fault++; last_cause <= flt_cause; last_fault_rob <= flt_rob; end
  end

  always @(negedge clk) mem_ready = ($urandom_range(0, 4) != 0);

  // ------------------------------------------------------------ ROB model
  typedef struct {op_e op; int q; bit executed; bit faulted;} ent_t;
  ent_t tbl [96];
  int head = 0, tail = 0, ldq_tail = 0, stq_tail = 0;

  always begin
    @(negedge clk);
    commit_ld_valid = 0;
    commit_st_valid = 0;
    rob_head = 7'(head % 96);
    rob_head_ok = (head < tail) && tbl[head % 96].executed;
    #1;
    if (rob_head_ok && (rob_can_commit || rob_head_fault)) begin
      tbl[head % 96].faulted = rob_head_fault;
      if (tbl[head % 96].op == OP_LOAD) begin
        commit_ld_valid = 1; commit_ld_idx = 5'(tbl[head % 96].q);
      end else if (tbl[head % 96].op inside {OP_STORE, OP_CSTR, OP_CCLR}) begin
        commit_st_valid = 1; commit_st_idx = 5'(tbl[head % 96].q);
      end
      head++;
    end else if (rob_head_ok) n_needcc_hold++;
  end

  // ------------------------------------------------------------ helpers
  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic logic [31:0] enc(input op_e op);
    case (op)
      OP_LOAD:  return {17'h0, 3'd3, 5'd1, 7'h03};
      OP_STORE: return {17'h0, 3'd3, 5'd0, 7'h23};
      OP_TAGD:  return {17'h0, 3'd0, 5'd1, 7'h0B};
      OP_XTAG:  return {17'h0, 3'd1, 5'd1, 7'h0B};
      OP_CSTR:  return {17'h0, 3'd2, 5'd0, 7'h0B};
      OP_CCLR:  return {17'h0, 3'd3, 5'd0, 7'h0B};
      default:  return 32'h0000_0013;   // addi x0, x0, 0
    endcase
  endfunction

  task automatic csr_write(input logic [11:0] a, input logic [63:0] d);
    @(negedge clk); csr_wen = 1; csr_waddr = a; csr_wdata = d;
    @(negedge clk); csr_wen = 0;
  endtask

  task automatic dispatch(input op_e op, output int slot, output bit needcc);
    @(negedge clk);
    slot = tail;
    tbl[tail % 96].op = op;
    tbl[tail % 96].executed = 0;
    tbl[tail % 96].faulted = 0;
    tbl[tail % 96].q = 0;
    lane = $urandom_range(0, 2);
    dis_valid = 1; dis_instr = enc(op); dis_rob = 7'(tail % 96);
    dis_ldq = 5'(ldq_tail % 24); dis_stq = 5'(stq_tail % 24);
    if (op == OP_LOAD) begin tbl[tail % 96].q = ldq_tail % 24; ldq_tail++; end
    if (op inside {OP_STORE, OP_CSTR, OP_CCLR}) begin tbl[tail % 96].q = stq_tail % 24; stq_tail++; end
    #1;
    needcc = dis_needcc;
    chk(dis_op == op, "decoder class");
    tail++;
    @(negedge clk);
    dis_valid = 0;
  endtask

  task automatic execute(input int slot, input logic [63:0] a, input int size);
    @(negedge clk);
    if (tbl[slot % 96].op == OP_LOAD) begin
      agen_ld_valid = 1; agen_ld_idx = 5'(tbl[slot % 96].q); agen_ld_addr = a;
    end else begin
      agen_st_valid = 1; agen_st_idx = 5'(tbl[slot % 96].q); agen_st_addr = a;
      agen_st_size = 32'(size);
    end
    @(negedge clk);
    agen_ld_valid = 0; agen_st_valid = 0;
    tbl[slot % 96].executed = 1;
  endtask

  task automatic wait_commit(input int slot);
    int n = 0;
    while (head <= slot && n < 400) begin @(posedge clk); n++; end
    chk(head > slot, $sformatf("instruction %0d committed", slot));
    @(negedge clk);
  endtask

  // one whole memory-type instruction; returns whether it faulted
  task automatic run(input op_e op, input logic [63:0] a, input int size, output bit faulted);
    int s, f0;
    bit nc;
    f0 = n_fault;
    dispatch(op, s, nc);
    execute(s, a, size);
    wait_commit(s);
    // cstr and cclr store their metadata after commit and report faults then
    if (op inside {OP_CSTR, OP_CCLR}) repeat (60) @(negedge clk);
    faulted = tbl[s % 96].faulted || (n_fault != f0);
  endtask

  task automatic tag_ptr(input bit tagd, input logic [63:0] p, output logic [63:0] r);
    int s;
    bit nc;
    dispatch(tagd ? OP_TAGD : OP_XTAG, s, nc);
    @(negedge clk);
    ptu_valid = 1; ptu_is_tagd = tagd; ptu_rs1 = p; ptu_rd = 7'(s % 96);
    @(posedge clk); #1;
    chk(ptu_vo && ptu_rdo == 7'(s % 96), "pointer-tag result one cycle after issue");
    r = ptu_data;
    n_ptu++;
    @(negedge clk);
    ptu_valid = 0;
    tbl[s % 96].executed = 1;
    wait_commit(s);
  endtask

  function automatic logic [63:0] way_addr(input logic [63:0] tp, input int w);
    return BASE + (64'(tp[63:48]) << 5) + 64'(w * 8);
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ program
  logic [63:0] heap_p, heap_t, glb_t, stk_t, stk2_t, x;
  initial begin
    bit f, nc;
    int l0, h0, i0, s_cstr, s_ld, cstr_store_cycle, ld_clear_cycle;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // enableDPT off: a tagged load needs no check
    begin
      int s;
      dispatch(OP_LOAD, s, nc);
      chk(!nc, "no needCC while enableDPT is off");
      execute(s, 64'hABCD_0000_1000_0000, 8);
      wait_commit(s);
      n_dpt_off++;
    end

    csr_write(CSR_BASE_CMT, BASE);
    csr_write(CSR_NWAYS_CMT, 64'd4);
    csr_write(CSR_ENABLE_DPT, 64'd1);
    @(negedge clk); csr_raddr = CSR_NWAYS_CMT; #1;
    chk(csr_rdata == 4 && csr_rhit, "numWaysCMT reads back 4");

    // ---- heap object (lower half of the address space): tagd, cstr
    heap_p = 64'h0000_0000_1000_0000;
    tag_ptr(1, heap_p, heap_t);
    chk(heap_t[63:48] != 0 && heap_t[47:0] == heap_p[47:0], "tagd keeps address, adds tag");
    tag_ptr(0, heap_t, x);
    chk(x == heap_p, "xtag strips the tag");
    run(OP_CSTR, heap_t, 64, f);
    chk(!f && rdm(way_addr(heap_t, 0)) == {32'd64, heap_p[31:0]}, "cstr wrote way 0");
    // access inside: C-cache hit (cstr filled it at commit)
    l0 = n_cap_loads; h0 = n_cc_hit;
    run(OP_LOAD, heap_t + 8, 8, f);
    chk(!f && n_cap_loads == l0 && n_cc_hit == h0 + 1, "in-bounds load hits the C-cache");
    run(OP_STORE, heap_t + 56, 8, f);
    chk(!f, "in-bounds store passes");

    // ---- global object whose metadata is only in memory, behind another
    glb_t = {16'h5A01, 48'h0000_2000_0000};
    mem[way_addr(glb_t, 0)] = {32'd16, 32'h7000_0000};
    mem[way_addr(glb_t, 1)] = {32'd128, 32'h2000_0000};
    l0 = n_cap_loads; i0 = n_iter;
    fork
      begin   // regular traffic competing for the D-cache port
        repeat (6) @(negedge clk);
        lsu_valid = 1; lsu_addr = 64'h1000;
        repeat (12) @(negedge clk);
        lsu_valid = 0;
      end
      run(OP_LOAD, glb_t + 100, 8, f);
    join
    chk(!f && n_cap_loads == l0 + 2 && n_iter == i0 + 1, "load found metadata in way 1");
    l0 = n_cap_loads;
    run(OP_LOAD, glb_t + 120, 8, f);
    chk(!f && n_cap_loads == l0, "second load hits the filled C-cache");
    // out of bounds: 4 ways checked, then a load fault
    l0 = n_cap_loads;
    run(OP_LOAD, glb_t + 128, 1, f);
    chk(f && last_cause == FAULT_LOAD && n_cap_loads == l0 + 4, "out-of-bounds load faults");

    // ---- free the heap object: cclr, then use after free, double free
    run(OP_CCLR, heap_t, 0, f);
    chk(!f && rdm(way_addr(heap_t, 0)) == 0, "cclr cleared way 0");
    l0 = n_cap_loads;
    run(OP_LOAD, heap_t + 8, 8, f);
    chk(f && last_cause == FAULT_LOAD && n_cap_loads == l0 + 4, "use after free faults");
    run(OP_CCLR, heap_t, 0, f);
    chk(f && last_cause == FAULT_CCLR, "double free faults");

    // ---- stack object (upper half): a load that must wait for its cstr
    stk_t = 64'h0000_0030_0000_0000;
    tag_ptr(1, stk_t, stk_t);
    dispatch(OP_CSTR, s_cstr, nc);
    dispatch(OP_LOAD, s_ld, nc);
    execute(s_ld, stk_t + 4, 4);
    repeat (6) @(negedge clk);
    chk(n_dep > 0, "load held by the older cstr");
    l0 = n_cap_loads;
    execute(s_cstr, stk_t, 32);
    wait_commit(s_ld);
    repeat (60) @(negedge clk);
    chk(!tbl[s_ld % 96].faulted, "load passes once the cstr is stored");
    chk(rdm(way_addr(stk_t, 0)) == {32'd32, stk_t[31:0]}, "stack cstr in way 0");
    // LAFD: SHB(tag) = 1 now; a second stack object of the same tag row goes to way 1
    stk2_t = {stk_t[63:48], 48'h0030_0000_0100};
    run(OP_CSTR, stk2_t, 16, f);
    chk(!f && rdm(way_addr(stk2_t, 1)) == {32'd16, stk2_t[31:0]}, "SHB sent the next cstr to way 1");
    // clear in reverse order: CHB starts at 0, finds stk2 in way 1 after 2 loads
    l0 = n_cap_loads;
    run(OP_CCLR, stk2_t, 0, f);
    chk(!f && n_cap_loads == l0 + 2 && rdm(way_addr(stk2_t, 1)) == 0, "cclr of stk2");
    // LAFD set CHB = (1-1)%4 = 0: the clear of stk finds way 0 at once
    l0 = n_cap_loads;
    run(OP_CCLR, stk_t, 0, f);
    chk(!f && n_cap_loads == l0 + 1, "CHB gave the right way at first attempt");

    // ---- untagged access and a full CMT row
    l0 = n_cap_loads;
    run(OP_STORE, 64'h0000_0000_0000_8000, 8, f);
    chk(!f && n_cap_loads == l0, "untagged store needs no capability load");
    glb_t = {16'h0077, 48'h0000_2100_0000};
    for (int w = 0; w < 4; w++) mem[way_addr(glb_t, w)] = {32'd8, 32'h7100_0000 + 32'(w * 16)};
    run(OP_CSTR, glb_t, 8, f);
    chk(f && last_cause == FAULT_CSTR, "cstr into a full row faults");

    repeat (10) @(negedge clk);
    // every mechanism must have happened
    chk(n_untagged > 0, "untagged bypass happened");
    chk(n_cc_hit > 0, "C-cache hit happened");
    chk(n_iter > 0, "CMT way iteration happened");
    chk(n_fault >= 4, "capability faults happened");
    chk(n_dep > 0, "tag-dependency stall happened");
    chk(n_conf > 0, "regular request beat a capability request");
    chk(n_hb > 0, "head buffers were updated");
    chk(n_needcc_hold > 0, "commit waited for needCC");
    chk(n_ptu > 0, "pointer-tag unit used");
    chk(n_dpt_off > 0, "enableDPT off exercised");
    chk(n_reg > 0 && n_reg_resp > 0, "regular requests served");
    chk(n_arb_bad == 0, "no capability request granted while a regular one waited");
    $display("untagged=%0d cc_hit=%0d iter=%0d faults=%0d dep_stall_cycles=%0d conflicts=%0d hb_upd=%0d needcc_hold=%0d cap_loads=%0d cap_stores=%0d",
             n_untagged, n_cc_hit, n_iter, n_fault, n_dep, n_conf, n_hb, n_needcc_hold,
             n_cap_loads, n_cap_stores);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
