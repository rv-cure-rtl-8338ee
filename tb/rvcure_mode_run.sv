// rvcure_mode_run: one rvcure_top, at its default sizes apart from the
// head-buffer mode MODE, driven through a fixed allocation workload. Used by
// rvcure_modes_tb, which runs one copy per mode and compares them.
// The harness models the core as in rvcure_top_tb: instructions are
// dispatched one at a time on a random dispatch lane, committed in order
// from a small ROB model, and
// served by a memory that answers loads after three cycles and refuses a
// random one request in five. The CMT has 8 ways at base 0x40000000.
// Workload (the same for every mode):
//   stack - objects in the upper half of the address space sharing tag
//           0x5A11 are created and freed last-in first-out, in nested
//           bursts of depth 1 to 5 (like the locals of nested calls);
//   heap  - objects in the lower half sharing tag 0x3322 are created and
//           freed first-in first-out, 3 to 5 live at a time.
// Each create is a cstr, each free a cclr, each followed by an in-bounds
// load. Outputs, valid when done is high: the number of CMT ways the cstr
// and cclr searches read in each phase, faults, failed checks of the
// harness's own (CMT contents, load results), and the operation count.
module rvcure_mode_run
  import rvcure_pkg::*;
#(
  parameter hb_mode_e MODE = HB_ADAPTIVE
) (
  output int  ways_stack,
  output int  ways_heap,
  output int  ops,
  output int  faults,
  output int  checks,
  output int  bad,
  output bit  done
);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [63:0] BASE = 64'h0000_0000_4000_0000;
  localparam int          NW   = 8;

  logic        dis_valid = 0;
  logic [31:0] dis_instr = 0;
  logic [6:0]  dis_rob = 0;
  logic [4:0]  dis_ldq = 0, dis_stq = 0;
  int          lane = 0;            // dispatch lane used by the next instruction
  logic [2:0][2:0] dis_op_a;
  logic [2:0]  dis_needcc_a;
  op_e         dis_op;
  assign dis_op = op_e'(dis_op_a[lane]);
  logic        dis_needcc, ptu_vo;
  assign dis_needcc = dis_needcc_a[lane];
  logic [63:0] ptu_data;
  logic [6:0]  ptu_rdo;
  logic        agen_ld_valid = 0, agen_st_valid = 0;
  logic [4:0]  agen_ld_idx = 0, agen_st_idx = 0;
  logic [63:0] agen_ld_addr = 0, agen_st_addr = 0;
  logic [31:0] agen_st_size = 0;
  logic        csr_wen = 0, csr_rhit;
  logic [11:0] csr_waddr = 0;
  logic [63:0] csr_wdata = 0, csr_rdata;
  logic [6:0]  rob_head = 0;
  logic        rob_head_ok = 0, rob_can_commit, rob_head_fault;
  logic        commit_ld_valid = 0, commit_st_valid = 0;
  logic [4:0]  commit_ld_idx = 0, commit_st_idx = 0;
  logic        lsu_grant, lsu_resp_valid;
  logic        mem_req_valid, mem_ready = 1, mem_resp_valid;
  mem_req_t    mem_req;
  mem_resp_t   mem_resp;
  logic        flt_valid;
  logic [6:0]  flt_rob;
  fault_cause_e flt_cause;
  logic [1:0]  ev_unt, ev_hit, ev_iter, ev_dep;
  logic        ev_conf, ev_hb;

  rvcure_top #(.HB_MODE(MODE)) dut (
    .clk, .rst_n,
    .dis_valid_i(3'(dis_valid) << lane), .dis_instr_i(96'(dis_instr) << (32 * lane)),
    .dis_rob_i(21'(dis_rob) << (7 * lane)), .dis_ldq_i(15'(dis_ldq) << (5 * lane)),
    .dis_stq_i(15'(dis_stq) << (5 * lane)), .dis_op_o(dis_op_a), .dis_needcc_o(dis_needcc_a),
    .ptu_valid_i(1'b0), .ptu_is_tagd_i(1'b0), .ptu_rs1_i(64'h0), .ptu_rd_i(7'h0),
    .ptu_valid_o(ptu_vo), .ptu_data_o(ptu_data), .ptu_rd_o(ptu_rdo),
    .agen_ld_valid_i(agen_ld_valid), .agen_ld_idx_i(agen_ld_idx), .agen_ld_addr_i(agen_ld_addr),
    .agen_st_valid_i(agen_st_valid), .agen_st_idx_i(agen_st_idx), .agen_st_addr_i(agen_st_addr),
    .agen_st_size_i(agen_st_size),
    .csr_wen_i(csr_wen), .csr_waddr_i(csr_waddr), .csr_wdata_i(csr_wdata),
    .csr_raddr_i(12'h0), .csr_rdata_o(csr_rdata), .csr_rhit_o(csr_rhit),
    .rob_head_i(rob_head), .rob_head_ok_i(rob_head_ok), .rob_can_commit_o(rob_can_commit),
    .rob_head_fault_o(rob_head_fault),
    .commit_ld_valid_i(commit_ld_valid), .commit_ld_idx_i(commit_ld_idx),
    .commit_st_valid_i(commit_st_valid), .commit_st_idx_i(commit_st_idx),
    .lsu_req_valid_i(1'b0), .lsu_req_is_store_i(1'b0), .lsu_req_addr_i(64'h0),
    .lsu_req_data_i(64'h0), .lsu_req_grant_o(lsu_grant), .lsu_resp_valid_o(lsu_resp_valid),
    .mem_req_valid_o(mem_req_valid), .mem_req_o(mem_req), .mem_ready_i(mem_ready),
    .mem_resp_valid_i(mem_resp_valid), .mem_resp_i(mem_resp),
    .cap_fault_valid_o(flt_valid), .cap_fault_rob_o(flt_rob), .cap_fault_cause_o(flt_cause),
    .ev_untagged_o(ev_unt), .ev_cc_hit_o(ev_hit), .ev_iter_o(ev_iter), .ev_dep_stall_o(ev_dep),
    .ev_conflict_o(ev_conf), .ev_hb_upd_o(ev_hb));

  // ------------------------------------------------------------ memory
  logic [63:0] mem [logic [63:0]];
  mem_resp_t   pipe_d [3];
  logic        pipe_v [3];
  int          phase = 0;        // 1 stack, 2 heap
  bit          counting = 0;     // inside a cstr/cclr

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
      if (mem_req.is_store) mem[mem_req.addr] = mem_req.data;
      else begin
        pipe_v[0] <= 1'b1;
        pipe_d[0] <= '{is_cap: mem_req.is_cap, src_ssq: mem_req.src_ssq, idx: mem_req.idx,
                       data: rdm(mem_req.addr)};
        if (mem_req.is_cap && mem_req.src_ssq && counting) begin
          if (phase == 1) ways_stack <= ways_stack + 1;
          if (phase == 2) ways_heap  <= ways_heap + 1;
        end
      end
    end
    if (flt_valid) faults <= faults + 1;
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
      end else begin
        commit_st_valid = 1; commit_st_idx = 5'(tbl[head % 96].q);
      end
      head++;
    end
  end

  function automatic logic [31:0] enc(input op_e op);
    case (op)
      OP_LOAD: return {17'h0, 3'd3, 5'd1, 7'h03};
      OP_CSTR: return {17'h0, 3'd2, 5'd0, 7'h0B};
      default: return {17'h0, 3'd3, 5'd0, 7'h0B};   // cclr
    endcase
  endfunction

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin bad++; $display("FAIL (mode %0d): %s", MODE, m); end
  endtask

  task automatic csr_write(input logic [11:0] a, input logic [63:0] d);
    @(negedge clk); csr_wen = 1; csr_waddr = a; csr_wdata = d;
    @(negedge clk); csr_wen = 0;
  endtask

  // dispatch, send the address, wait for commit (and for the metadata store)
  task automatic run(input op_e op, input logic [63:0] a, input int size);
    int s, n;
    @(negedge clk);
    s = tail;
    tbl[s % 96] = '{op: op, q: 0, executed: 0, faulted: 0};
    lane = $urandom_range(0, 2);
    dis_valid = 1; dis_instr = enc(op); dis_rob = 7'(s % 96);
    dis_ldq = 5'(ldq_tail % 24); dis_stq = 5'(stq_tail % 24);
    if (op == OP_LOAD) begin tbl[s % 96].q = ldq_tail % 24; ldq_tail++; end
    else               begin tbl[s % 96].q = stq_tail % 24; stq_tail++; end
    tail++;
    @(negedge clk);
    dis_valid = 0;
    if (op == OP_LOAD) begin
      agen_ld_valid = 1; agen_ld_idx = 5'(tbl[s % 96].q); agen_ld_addr = a;
    end else begin
      agen_st_valid = 1; agen_st_idx = 5'(tbl[s % 96].q); agen_st_addr = a;
      agen_st_size = 32'(size);
    end
    counting = (op != OP_LOAD);
    @(negedge clk);
    agen_ld_valid = 0; agen_st_valid = 0;
    tbl[s % 96].executed = 1;
    n = 0;
    while (head <= s && n < 1000) begin @(negedge clk); n++; end
    chk(head > s, "instruction committed");
    if (op != OP_LOAD) repeat (3 * NW + 40) @(negedge clk);
    chk(!tbl[s % 96].faulted, "no load fault");
    counting = 0;
    ops++;
  endtask

  function automatic logic [63:0] way_addr(input logic [15:0] t, input int w);
    return BASE + (64'(t) << 6) + 64'(w * 8);
  endfunction

  function automatic bit row_has(input logic [15:0] t, input logic [63:0] p, input int size);
    for (int w = 0; w < NW; w++)
      if (rdm(way_addr(t, w)) == {32'(size), p[31:0]}) return 1;
    return 0;
  endfunction

  localparam logic [15:0] TS = 16'h5A11, TH = 16'h3322;

  task automatic create(input logic [15:0] t, input logic [63:0] a, input int size);
    logic [63:0] p;
    p = {t, a[47:0]};
    run(OP_CSTR, p, size);
    chk(row_has(t, p, size), "cstr recorded the object");
    run(OP_LOAD, p + 64'(size - 8), 8);
  endtask

  initial begin
    int depth [8] = '{3, 5, 2, 4, 1, 5, 3, 2};
    logic [63:0] sp, hp;
    int hq [$];
    ways_stack = 0; ways_heap = 0; ops = 0; faults = 0; checks = 0; bad = 0; done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    csr_write(CSR_BASE_CMT, BASE);
    csr_write(CSR_NWAYS_CMT, 64'(NW));
    csr_write(CSR_ENABLE_DPT, 64'd1);

    // stack: nested bursts, freed in reverse order
    phase = 1;
    sp = 64'h0000_003F_FFFF_0000;
    foreach (depth[i]) begin
      for (int d = 0; d < depth[i]; d++) create(TS, sp - 64'(64 * (d + 1)), 64);
      for (int d = depth[i] - 1; d >= 0; d--) begin
        run(OP_LOAD, {TS, 48'(sp - 64'(64 * (d + 1)))}, 8);
        run(OP_CCLR, {TS, 48'(sp - 64'(64 * (d + 1)))}, 0);
      end
    end

    // heap: first allocated, first freed
    phase = 2;
    hp = 64'h0000_0000_1000_0000;
    for (int k = 0; k < 3; k++) begin create(TH, hp, 32); hq.push_back(int'(hp[31:0])); hp += 64; end
    for (int k = 0; k < 14; k++) begin
      logic [63:0] old;
      old = {32'h0, 32'(hq.pop_front())};
      run(OP_LOAD, {TH, 48'(old)}, 8);
      run(OP_CCLR, {TH, 48'(old)}, 0);
      if (k % 4 != 3) begin create(TH, hp, 32); hq.push_back(int'(hp[31:0])); hp += 64; end
      if (k % 5 == 4) begin create(TH, hp, 32); hq.push_back(int'(hp[31:0])); hp += 64; end
    end
    while (hq.size() > 0) begin
      logic [63:0] old;
      old = {32'h0, 32'(hq.pop_front())};
      run(OP_CCLR, {TH, 48'(old)}, 0);
    end
    phase = 0;

    for (int w = 0; w < NW; w++) begin
      chk(rdm(way_addr(TS, w)) == 0, "stack row empty at the end");
      chk(rdm(way_addr(TH, w)) == 0, "heap row empty at the end");
    end
    done = 1;
  end
endmodule
