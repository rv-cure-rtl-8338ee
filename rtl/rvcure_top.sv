// rvcure_top: the RV-CURE additions to an out-of-order RISC-V core.
//
// Wires the pieces the design adds to the baseline core's pipeline:
//   decode  - needcc_decoder classifies each dispatched instruction and sets
//             needCC for loads/stores when enableDPT is on;
//   execute - ptr_tag_unit runs tagd/xtag with 1-cycle latency;
//   memory  - the capability-execution pipeline beside the LSU: an SLQ
//             paired with the load queue, an SSQ paired with the store queue
//             (stores, cstr, cclr), a C-cache looked up by every incoming
//             address, the SHB/CHB giving cstr/cclr their first way, and
//             lsu_cap_arb placing capability requests on the shared D-cache
//             port behind regular requests;
//   commit  - rob_needcc keeps one needCC bit per ROB entry; the head may
//             commit only when the core allows it and its needCC is clear.
// The baseline core (its decoder, ROB, LQ/SQ, address generation, LSU
// scheduler, TLB and D-cache) is outside this module: its signals are ports.
// Up to DISP_W (3, the paper's dispatch width) instructions are dispatched
// per cycle, each lane with its own decoder; one load and one store address
// arrive, one load and one store commit, and one memory request is issued
// per cycle.
// cstr and cclr are dispatched to the store side (an SQ/SSQ index), as the
// paper has the SSQ handle them. The single address, commit and memory port
// per queue are this design's simplification.
module rvcure_top
  import rvcure_pkg::*;
#(
  parameter int unsigned DISP_W    = 3,   // dispatch width
  parameter int unsigned Q_ENTRIES = QUEUE_ENTRIES,
  parameter int unsigned ROB_N     = ROB_ENTRIES,
  parameter hb_mode_e    HB_MODE   = HB_ADAPTIVE
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // decode / dispatch
  input  logic [DISP_W-1:0]                dis_valid_i,
  input  logic [DISP_W-1:0][31:0]          dis_instr_i,
  input  logic [DISP_W-1:0][ROB_IDX_W-1:0] dis_rob_i,
  input  logic [DISP_W-1:0][Q_IDX_W-1:0]   dis_ldq_i,
  input  logic [DISP_W-1:0][Q_IDX_W-1:0]   dis_stq_i,
  output logic [DISP_W-1:0][2:0]           dis_op_o,     // op_e per lane
  output logic [DISP_W-1:0]                dis_needcc_o,
  // execute: pointer-tagging unit
  input  logic                 ptu_valid_i,
  input  logic                 ptu_is_tagd_i,
  input  logic [XLEN-1:0]      ptu_rs1_i,
  input  logic [6:0]           ptu_rd_i,
  output logic                 ptu_valid_o,
  output logic [XLEN-1:0]      ptu_data_o,
  output logic [6:0]           ptu_rd_o,
  // memory addresses from the address calculation unit
  input  logic                 agen_ld_valid_i,
  input  logic [Q_IDX_W-1:0]   agen_ld_idx_i,
  input  logic [XLEN-1:0]      agen_ld_addr_i,
  input  logic                 agen_st_valid_i,
  input  logic [Q_IDX_W-1:0]   agen_st_idx_i,
  input  logic [XLEN-1:0]      agen_st_addr_i,
  input  logic [31:0]          agen_st_size_i,   // rs2 of a cstr
  // CSR access
  input  logic                 csr_wen_i,
  input  logic [11:0]          csr_waddr_i,
  input  logic [XLEN-1:0]      csr_wdata_i,
  input  logic [11:0]          csr_raddr_i,
  output logic [XLEN-1:0]      csr_rdata_o,
  output logic                 csr_rhit_o,
  // ROB head and commit
  input  logic [ROB_IDX_W-1:0] rob_head_i,
  input  logic                 rob_head_ok_i,
  output logic                 rob_can_commit_o,
  output logic                 rob_head_fault_o,
  input  logic                 commit_ld_valid_i,
  input  logic [Q_IDX_W-1:0]   commit_ld_idx_i,
  input  logic                 commit_st_valid_i,
  input  logic [Q_IDX_W-1:0]   commit_st_idx_i,
  // regular LSU request and the shared D-cache port
  input  logic                 lsu_req_valid_i,
  input  logic                 lsu_req_is_store_i,
  input  logic [XLEN-1:0]      lsu_req_addr_i,
  input  logic [XLEN-1:0]      lsu_req_data_i,
  output logic                 lsu_req_grant_o,
  output logic                 lsu_resp_valid_o,
  output logic                 mem_req_valid_o,
  output mem_req_t             mem_req_o,
  input  logic                 mem_ready_i,
  input  logic                 mem_resp_valid_i,
  input  mem_resp_t            mem_resp_i,
  // capability fault to the core's exception logic
  output logic                 cap_fault_valid_o,
  output logic [ROB_IDX_W-1:0] cap_fault_rob_o,
  output fault_cause_e         cap_fault_cause_o,
  // events ([0] SLQ, [1] SSQ) for performance counters
  output logic [1:0]           ev_untagged_o,
  output logic [1:0]           ev_cc_hit_o,
  output logic [1:0]           ev_iter_o,
  output logic [1:0]           ev_dep_stall_o,
  output logic                 ev_conflict_o,
  output logic                 ev_hb_upd_o
);
  // ------------------------------------------------------------- CSRs
  logic               enable_dpt;
  logic [XLEN-1:0]    base_cmt;
  logic [NWAYS_W-1:0] nways;
  logic [LOG2N_W-1:0] log2n;

  cap_csr u_csr (
    .clk, .rst_n,
    .wen_i(csr_wen_i), .waddr_i(csr_waddr_i), .wdata_i(csr_wdata_i),
    .raddr_i(csr_raddr_i), .rdata_o(csr_rdata_o), .rhit_o(csr_rhit_o),
    .enable_dpt_o(enable_dpt), .base_cmt_o(base_cmt), .nways_o(nways), .log2n_o(log2n)
  );

  // ------------------------------------------------------------- decode
  logic [DISP_W-1:0][2:0] dis_op;
  logic [DISP_W-1:0]      dis_needcc, ld_alloc, st_alloc;
  logic [DISP_W-1:0][1:0] dis_acc_log2;

  for (genvar l = 0; l < DISP_W; l++) begin : g_dec
    op_e op_l;
    needcc_decoder u_dec (
      .valid_i(dis_valid_i[l]), .instr_i(dis_instr_i[l]), .enable_dpt_i(enable_dpt),
      .op_o(op_l), .is_mem_o(), .acc_log2_o(dis_acc_log2[l]),
      .needcc_o(dis_needcc[l])
    );
    assign dis_op[l]   = op_l;
    assign ld_alloc[l] = (op_l == OP_LOAD);
    assign st_alloc[l] = (op_l == OP_STORE) || (op_l == OP_CSTR) || (op_l == OP_CCLR);
  end
  assign dis_op_o     = dis_op;
  assign dis_needcc_o = dis_needcc;

  // ------------------------------------------------------------- execute
  ptr_tag_unit #(.RD_W(7)) u_ptu (
    .clk, .rst_n,
    .valid_i(ptu_valid_i), .is_tagd_i(ptu_is_tagd_i), .rs1_i(ptu_rs1_i), .rd_i(ptu_rd_i),
    .valid_o(ptu_valid_o), .rd_data_o(ptu_data_o), .rd_o(ptu_rd_o)
  );

  // ------------------------------------------------------------- C-cache
  logic [1:0][TAG_W-1:0] cc_tag;
  logic [1:0]            cc_hit;
  cap_meta_t [1:0]       cc_meta;
  logic                  slq_fill, ssq_fill;
  logic [TAG_W-1:0]      slq_fill_tag, ssq_fill_tag;
  cap_meta_t             slq_fill_meta, ssq_fill_meta;
  logic                  upd_valid, upd_is_cstr, slq_upd_unused, slq_upd_cstr_unused;
  logic [TAG_W-1:0]      upd_tag, slq_upd_tag_unused;
  logic [XLEN-1:0]       upd_addr, slq_upd_addr_unused;
  logic [WAY_W-1:0]      upd_way, slq_upd_way_unused;
  cap_meta_t             upd_meta, slq_upd_meta_unused;

  assign cc_tag[0] = ptr_tag(agen_ld_addr_i);
  assign cc_tag[1] = ptr_tag(agen_st_addr_i);

  ccache #(.SETS(CC_SETS), .NLOOKUP(2)) u_cc (
    .clk, .rst_n,
    .lk_tag_i(cc_tag), .lk_hit_o(cc_hit), .lk_meta_o(cc_meta),
    .fill_valid_i(slq_fill || ssq_fill),
    .fill_tag_i(slq_fill ? slq_fill_tag : ssq_fill_tag),
    .fill_meta_i(slq_fill ? slq_fill_meta : ssq_fill_meta),
    .cmt_valid_i(upd_valid), .cmt_is_cstr_i(upd_is_cstr), .cmt_tag_i(upd_tag),
    .cmt_meta_i(upd_meta)
  );

  // ------------------------------------------------------------- SHB / CHB
  logic             ssq_addr_is_cstr, slq_addr_is_cstr_unused;
  logic [WAY_W-1:0] start_way;

  head_buffers #(.SETS(CC_SETS), .MODE(HB_MODE)) u_hb (
    .clk, .rst_n,
    .rd_tag_i(cc_tag[1]), .rd_is_cstr_i(ssq_addr_is_cstr), .rd_way_o(start_way),
    .upd_valid_i(upd_valid), .upd_is_cstr_i(upd_is_cstr), .upd_tag_i(upd_tag),
    .upd_addr_i(upd_addr), .upd_way_i(upd_way), .nways_i(nways)
  );

  // ------------------------------------------------------------- queues
  logic [Q_ENTRIES-1:0]                pend_valid, slq_pend_unused, pend_cmt, slq_pend_cmt_unused;
  logic [Q_ENTRIES-1:0][ROB_IDX_W-1:0] pend_rob, slq_pend_rob_unused;
  logic                                slq_req_valid, ssq_req_valid, slq_grant, ssq_grant;
  cap_req_t                            slq_req, ssq_req;
  logic                                slq_resp_valid, ssq_resp_valid;
  logic [1:0]                          slq_clr, ssq_clr;
  logic [1:0][ROB_IDX_W-1:0]           slq_clr_rob, ssq_clr_rob;
  logic                                slq_flt, ssq_flt;
  logic [ROB_IDX_W-1:0]                slq_flt_rob, ssq_flt_rob;
  fault_cause_e                        slq_flt_cause, ssq_flt_cause;

  shadow_queue #(.ENTRIES(Q_ENTRIES), .IDX_W(Q_IDX_W), .NDEP(Q_ENTRIES),
                 .ROB_N(ROB_N), .IS_SSQ(1'b0), .NALLOC(DISP_W)) u_slq (
    .clk, .rst_n,
    .enable_dpt_i(enable_dpt), .base_i(base_cmt), .log2n_i(log2n), .nways_i(nways),
    .alloc_valid_i(ld_alloc), .alloc_idx_i(dis_ldq_i), .alloc_op_i(dis_op),
    .alloc_rob_i(dis_rob_i), .alloc_needcc_i(dis_needcc), .alloc_acc_log2_i(dis_acc_log2),
    .addr_valid_i(agen_ld_valid_i), .addr_idx_i(agen_ld_idx_i), .addr_i(agen_ld_addr_i),
    .addr_size_i('0), .cc_hit_i(cc_hit[0]), .cc_meta_i(cc_meta[0]),
    .addr_is_cstr_o(slq_addr_is_cstr_unused), .start_way_i('0),
    .rob_head_i(rob_head_i), .dep_valid_i(pend_valid), .dep_rob_i(pend_rob), .dep_cmt_i(pend_cmt),
    .commit_valid_i(commit_ld_valid_i), .commit_idx_i(commit_ld_idx_i),
    .req_valid_o(slq_req_valid), .req_o(slq_req), .req_grant_i(slq_grant),
    .resp_valid_i(slq_resp_valid), .resp_idx_i(mem_resp_i.idx), .resp_data_i(mem_resp_i.data),
    .clr_valid_o(slq_clr), .clr_rob_o(slq_clr_rob),
    .fault_valid_o(slq_flt), .fault_rob_o(slq_flt_rob), .fault_cause_o(slq_flt_cause),
    .fill_valid_o(slq_fill), .fill_tag_o(slq_fill_tag), .fill_meta_o(slq_fill_meta),
    .upd_valid_o(slq_upd_unused), .upd_is_cstr_o(slq_upd_cstr_unused),
    .upd_tag_o(slq_upd_tag_unused), .upd_addr_o(slq_upd_addr_unused),
    .upd_way_o(slq_upd_way_unused), .upd_meta_o(slq_upd_meta_unused),
    .pend_valid_o(slq_pend_unused), .pend_rob_o(slq_pend_rob_unused), .pend_cmt_o(slq_pend_cmt_unused),
    .ev_untagged_o(ev_untagged_o[0]), .ev_cc_hit_o(ev_cc_hit_o[0]),
    .ev_iter_o(ev_iter_o[0]), .ev_dep_stall_o(ev_dep_stall_o[0])
  );

  shadow_queue #(.ENTRIES(Q_ENTRIES), .IDX_W(Q_IDX_W), .NDEP(Q_ENTRIES),
                 .ROB_N(ROB_N), .IS_SSQ(1'b1), .NALLOC(DISP_W)) u_ssq (
    .clk, .rst_n,
    .enable_dpt_i(enable_dpt), .base_i(base_cmt), .log2n_i(log2n), .nways_i(nways),
    .alloc_valid_i(st_alloc),
    .alloc_idx_i(dis_stq_i), .alloc_op_i(dis_op),
    .alloc_rob_i(dis_rob_i), .alloc_needcc_i(dis_needcc), .alloc_acc_log2_i(dis_acc_log2),
    .addr_valid_i(agen_st_valid_i), .addr_idx_i(agen_st_idx_i), .addr_i(agen_st_addr_i),
    .addr_size_i(agen_st_size_i), .cc_hit_i(cc_hit[1]), .cc_meta_i(cc_meta[1]),
    .addr_is_cstr_o(ssq_addr_is_cstr), .start_way_i(start_way),
    .rob_head_i(rob_head_i), .dep_valid_i('0), .dep_rob_i('0), .dep_cmt_i('0),
    .commit_valid_i(commit_st_valid_i), .commit_idx_i(commit_st_idx_i),
    .req_valid_o(ssq_req_valid), .req_o(ssq_req), .req_grant_i(ssq_grant),
    .resp_valid_i(ssq_resp_valid), .resp_idx_i(mem_resp_i.idx), .resp_data_i(mem_resp_i.data),
    .clr_valid_o(ssq_clr), .clr_rob_o(ssq_clr_rob),
    .fault_valid_o(ssq_flt), .fault_rob_o(ssq_flt_rob), .fault_cause_o(ssq_flt_cause),
    .fill_valid_o(ssq_fill), .fill_tag_o(ssq_fill_tag), .fill_meta_o(ssq_fill_meta),
    .upd_valid_o(upd_valid), .upd_is_cstr_o(upd_is_cstr), .upd_tag_o(upd_tag),
    .upd_addr_o(upd_addr), .upd_way_o(upd_way), .upd_meta_o(upd_meta),
    .pend_valid_o(pend_valid), .pend_rob_o(pend_rob), .pend_cmt_o(pend_cmt),
    .ev_untagged_o(ev_untagged_o[1]), .ev_cc_hit_o(ev_cc_hit_o[1]),
    .ev_iter_o(ev_iter_o[1]), .ev_dep_stall_o(ev_dep_stall_o[1])
  );

  assign ev_hb_upd_o = upd_valid;

  // ------------------------------------------------------------- LSU port
  lsu_cap_arb u_arb (
    .reg_valid_i(lsu_req_valid_i), .reg_is_store_i(lsu_req_is_store_i),
    .reg_addr_i(lsu_req_addr_i), .reg_data_i(lsu_req_data_i), .reg_grant_o(lsu_req_grant_o),
    .ssq_valid_i(ssq_req_valid), .ssq_req_i(ssq_req), .ssq_grant_o(ssq_grant),
    .slq_valid_i(slq_req_valid), .slq_req_i(slq_req), .slq_grant_o(slq_grant),
    .mem_valid_o(mem_req_valid_o), .mem_req_o(mem_req_o), .mem_ready_i(mem_ready_i),
    .mem_resp_valid_i(mem_resp_valid_i), .mem_resp_i(mem_resp_i),
    .reg_resp_valid_o(lsu_resp_valid_o), .ssq_resp_valid_o(ssq_resp_valid),
    .slq_resp_valid_o(slq_resp_valid), .cap_conflict_o(ev_conflict_o)
  );

  // ------------------------------------------------------------- ROB bits
  rob_needcc #(.ENTRIES(ROB_N), .IDX_W(ROB_IDX_W), .NDIS(DISP_W), .NCLR(4), .NFLT(2)) u_rob (
    .clk, .rst_n,
    .dis_valid_i(dis_valid_i), .dis_idx_i(dis_rob_i), .dis_needcc_i(dis_needcc),
    .clr_valid_i({ssq_clr, slq_clr}), .clr_idx_i({ssq_clr_rob, slq_clr_rob}),
    .flt_valid_i({ssq_flt, slq_flt}), .flt_idx_i({ssq_flt_rob, slq_flt_rob}),
    .head_idx_i(rob_head_i), .head_can_commit_i(rob_head_ok_i),
    .head_needcc_o(), .head_fault_o(rob_head_fault_o), .can_commit_o(rob_can_commit_o)
  );

  always_comb begin
    cap_fault_valid_o = slq_flt || ssq_flt;
    cap_fault_rob_o   = slq_flt ? slq_flt_rob   : ssq_flt_rob;
    cap_fault_cause_o = slq_flt ? slq_flt_cause : ssq_flt_cause;
  end

  // Only one capability response per cycle comes back, so at most one fill
  a_one_fill: assert property (@(posedge clk) disable iff (!rst_n) !(slq_fill && ssq_fill));
endmodule
