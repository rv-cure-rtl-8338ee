// shadow_queue: shadow load queue (SLQ) or shadow store queue (SSQ).
//
// Each entry shadows the load-queue or store-queue entry of the same index
// and walks the four-state machine of the capability-execution pipeline:
//   S_INIT  - allocated at dispatch, waiting for the memory address. When the
//             address arrives: a zero tag (or enableDPT off) goes straight to
//             S_DONE and clears needCC; a load/store whose C-cache lookup
//             holds metadata that passes the check also goes to S_DONE and
//             clears needCC (a C-cache hit); everything else goes to S_READY.
//   S_READY - the entry asks for a capability load of CMT way W of its tag's
//             row, at Base + (T << (3 + log2 N)) + (W << 3); once the request
//             is taken it goes to S_WAIT.
//   S_WAIT  - on the load response the entry checks the metadata. A pass
//             (load/store: access in bounds; cstr: way empty; cclr: way holds
//             this pointer's metadata) goes to S_DONE, and for a load/store
//             clears needCC and fills the C-cache. A miss moves to the next
//             way and back to S_READY; after all N ways it is a capability
//             fault (the entry goes to S_DONE with the fault flag).
//   S_DONE  - waits for deallocation. A load/store leaves at commit. A cstr or
//             cclr that found its way leaves once it has committed and its
//             metadata store (new metadata, or zero to clear) has been taken;
//             that store also updates the C-cache and the SHB/CHB.
// Loads and stores start at way 0; a cstr or cclr starts at the way its
// head buffer gives (start_way_i). Tag dependencies: an entry neither issues
// capability loads nor accepts a C-cache hit while any capability store
// (cstr/cclr still in the SSQ) older than itself in program order exists;
// age is the ROB-index distance from the ROB head, and a cstr/cclr that has
// already committed (its ROB index may now lie behind the head) counts as
// older than every uncommitted entry. The queue's own pending
// cstr/cclr entries are always considered; dep_* brings in those of the
// other queue (the SLQ receives the SSQ's pend_* outputs).
// Up to NALLOC entries are allocated per cycle, one per dispatch lane.
// Request choice (this design's): the SSQ's metadata stores first, then the
// lowest-index entry in S_READY. One request, one response, one address and
// one commit per cycle per queue. The paper's FSM, the way equation, the
// start ways and the dependency rule are followed; the port set, the
// priority among entries and the single-ported queue are this design's.
// Branch-misprediction squashes are not modelled (the paper does not
// describe them).
module shadow_queue
  import rvcure_pkg::*;
#(
  parameter int unsigned ENTRIES = QUEUE_ENTRIES,
  parameter int unsigned IDX_W   = Q_IDX_W,
  parameter int unsigned NDEP    = QUEUE_ENTRIES,
  parameter int unsigned ROB_N   = ROB_ENTRIES,
  parameter bit          IS_SSQ  = 1'b0,
  parameter int unsigned NALLOC  = 3      // allocations per cycle (dispatch width)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration (CSRs)
  input  logic                          enable_dpt_i,
  input  logic [XLEN-1:0]               base_i,
  input  logic [LOG2N_W-1:0]            log2n_i,
  input  logic [NWAYS_W-1:0]            nways_i,
  // dispatch
  input  logic [NALLOC-1:0]                alloc_valid_i,
  input  logic [NALLOC-1:0][IDX_W-1:0]     alloc_idx_i,
  input  logic [NALLOC-1:0][2:0]           alloc_op_i,   // op_e values
  input  logic [NALLOC-1:0][ROB_IDX_W-1:0] alloc_rob_i,
  input  logic [NALLOC-1:0]                alloc_needcc_i,
  input  logic [NALLOC-1:0][1:0]           alloc_acc_log2_i,
  // address from the memory-address calculation unit
  input  logic                          addr_valid_i,
  input  logic [IDX_W-1:0]              addr_idx_i,
  input  logic [XLEN-1:0]               addr_i,
  input  logic [31:0]                   addr_size_i,   // cstr object size (rs2)
  input  logic                          cc_hit_i,      // C-cache lookup of addr_i
  input  cap_meta_t                     cc_meta_i,
  output logic                          addr_is_cstr_o, // selects SHB (1) or CHB (0)
  input  logic [WAY_W-1:0]              start_way_i,   // SHB/CHB read for addr_i
  // ordering
  input  logic [ROB_IDX_W-1:0]          rob_head_i,
  input  logic [NDEP-1:0]               dep_valid_i,
  input  logic [NDEP-1:0][ROB_IDX_W-1:0] dep_rob_i,
  input  logic [NDEP-1:0]               dep_cmt_i,     // dep entry has committed
  // commit from the ROB
  input  logic                          commit_valid_i,
  input  logic [IDX_W-1:0]              commit_idx_i,
  // capability request / response
  output logic                          req_valid_o,
  output cap_req_t                      req_o,
  input  logic                          req_grant_i,
  input  logic                          resp_valid_i,
  input  logic [IDX_W-1:0]              resp_idx_i,
  input  logic [XLEN-1:0]               resp_data_i,
  // to the ROB
  output logic [1:0]                    clr_valid_o,
  output logic [1:0][ROB_IDX_W-1:0]     clr_rob_o,
  output logic                          fault_valid_o,
  output logic [ROB_IDX_W-1:0]          fault_rob_o,
  output fault_cause_e                  fault_cause_o,
  // C-cache fill after a passed check
  output logic                          fill_valid_o,
  output logic [TAG_W-1:0]              fill_tag_o,
  output cap_meta_t                     fill_meta_o,
  // committed cstr/cclr store: C-cache and head-buffer update
  output logic                          upd_valid_o,
  output logic                          upd_is_cstr_o,
  output logic [TAG_W-1:0]              upd_tag_o,
  output logic [XLEN-1:0]               upd_addr_o,
  output logic [WAY_W-1:0]              upd_way_o,
  output cap_meta_t                     upd_meta_o,
  // pending capability stores (used by the SLQ and the SSQ itself)
  output logic [ENTRIES-1:0]            pend_valid_o,
  output logic [ENTRIES-1:0][ROB_IDX_W-1:0] pend_rob_o,
  output logic [ENTRIES-1:0]            pend_cmt_o,
  // events, one pulse each
  output logic                          ev_untagged_o,
  output logic                          ev_cc_hit_o,
  output logic                          ev_iter_o,
  output logic                          ev_dep_stall_o
);
  logic [ENTRIES-1:0]   valid_q, needcc_q, found_q, fault_q, commit_q;
  cap_state_e           state_q [ENTRIES];
  op_e                  op_q    [ENTRIES];
  logic [ROB_IDX_W-1:0] rob_q   [ENTRIES];
  logic [XLEN-1:0]      addr_q  [ENTRIES];
  logic [31:0]          size_q  [ENTRIES];
  logic [WAY_W-1:0]     way_q   [ENTRIES];
  logic [NWAYS_W-1:0]   tried_q [ENTRIES];

  function automatic logic [ROB_IDX_W:0] age(input logic [ROB_IDX_W-1:0] r,
                                             input logic [ROB_IDX_W-1:0] h);
    return (r >= h) ? {1'b0, r} - {1'b0, h} : {1'b0, r} + (ROB_IDX_W+1)'(ROB_N) - {1'b0, h};
  endfunction

  function automatic logic is_capst(input op_e o);
    return (o == OP_CSTR) || (o == OP_CCLR);
  endfunction

  // ---------------------------------------------------------------- ordering
  logic [ENTRIES-1:0] dep_stall;
  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      pend_valid_o[e] = valid_q[e] && is_capst(op_q[e]);
      pend_rob_o[e]   = rob_q[e];
      pend_cmt_o[e]   = commit_q[e];
    end
  end

  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      dep_stall[e] = 1'b0;
      for (int d = 0; d < NDEP; d++)
        if (dep_valid_i[d] && !commit_q[e] &&
            (dep_cmt_i[d] || age(dep_rob_i[d], rob_head_i) < age(rob_q[e], rob_head_i)))
          dep_stall[e] = 1'b1;
      for (int d = 0; d < ENTRIES; d++)
        if (pend_valid_o[d] && !commit_q[e] &&
            (commit_q[d] || age(rob_q[d], rob_head_i) < age(rob_q[e], rob_head_i)))
          dep_stall[e] = 1'b1;
    end
  end

  // ----------------------------------------------------------- request pick
  logic               sel_valid, sel_store;
  logic [IDX_W-1:0]   sel_idx;
  logic [ENTRIES-1:0] st_cand, ld_cand, rdy_vec;
  logic [XLEN-1:0]    sel_capaddr;
  cap_meta_t          sel_newmeta;

  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      st_cand[e] = valid_q[e] && state_q[e] == S_DONE && commit_q[e] &&
                   found_q[e] && !fault_q[e] && is_capst(op_q[e]);
      rdy_vec[e] = valid_q[e] && state_q[e] == S_READY;
      ld_cand[e] = rdy_vec[e] && !dep_stall[e];
    end
    sel_valid = 1'b0;
    sel_store = 1'b0;
    sel_idx   = '0;
    for (int e = ENTRIES - 1; e >= 0; e--)
      if (ld_cand[e]) begin sel_valid = 1'b1; sel_idx = IDX_W'(e); end
    for (int e = ENTRIES - 1; e >= 0; e--)
      if (st_cand[e]) begin sel_valid = 1'b1; sel_store = 1'b1; sel_idx = IDX_W'(e); end
  end

  cap_addr_gen u_agen (
    .base_i (base_i),
    .tag_i  (ptr_tag(addr_q[sel_idx])),
    .log2n_i(log2n_i),
    .way_i  (way_q[sel_idx]),
    .addr_o (sel_capaddr)
  );

  always_comb begin
    sel_newmeta.size = size_q[sel_idx];
    sel_newmeta.base = addr_q[sel_idx][31:0];
    req_valid_o      = sel_valid;
    req_o.is_store   = sel_store;
    req_o.addr       = sel_capaddr;
    req_o.data       = (sel_store && op_q[sel_idx] == OP_CSTR) ? XLEN'(sel_newmeta) : '0;
    req_o.src_ssq    = IS_SSQ;
    req_o.idx        = sel_idx;
  end

  // ------------------------------------------------------- response checks
  logic      rsp_ok, rsp_empty, rsp_match, rsp_pass, rsp_live;
  cap_meta_t rsp_nm;
  cap_check u_rsp_chk (
    .meta_i     (cap_meta_t'(resp_data_i)),
    .addr_i     (addr_q[resp_idx_i]),
    .bytes_i    (size_q[resp_idx_i]),
    .access_ok_o(rsp_ok),
    .empty_o    (rsp_empty),
    .match_o    (rsp_match),
    .new_meta_o (rsp_nm)
  );

  always_comb begin
    rsp_live = resp_valid_i && valid_q[resp_idx_i] && state_q[resp_idx_i] == S_WAIT;
    unique case (op_q[resp_idx_i])
      OP_CSTR: rsp_pass = rsp_empty;
      OP_CCLR: rsp_pass = rsp_match;
      default: rsp_pass = rsp_ok;
    endcase
  end

  // ---------------------------------------------------- arrival (C-cache)
  logic      arr_ok, arr_empty, arr_match, arr_live, arr_tagged, arr_hit;
  cap_meta_t arr_nm;
  cap_check u_arr_chk (
    .meta_i     (cc_meta_i),
    .addr_i     (addr_i),
    .bytes_i    (size_q[addr_idx_i]),
    .access_ok_o(arr_ok),
    .empty_o    (arr_empty),
    .match_o    (arr_match),
    .new_meta_o (arr_nm)
  );

  always_comb begin
    addr_is_cstr_o = op_q[addr_idx_i] == OP_CSTR;
    arr_live   = addr_valid_i && valid_q[addr_idx_i] && state_q[addr_idx_i] == S_INIT;
    arr_tagged = enable_dpt_i && ptr_tag(addr_i) != '0;
    arr_hit    = cc_hit_i && arr_ok && !dep_stall[addr_idx_i] &&
                 !is_capst(op_q[addr_idx_i]);
  end

  // ------------------------------------------------------------- outputs
  logic [WAY_W-1:0] wmask;
  logic             rsp_last;
  always_comb begin
    wmask    = WAY_W'(nways_i - 1'b1);
    rsp_last = (tried_q[resp_idx_i] + 1'b1) >= nways_i;

    clr_valid_o[0] = arr_live && needcc_q[addr_idx_i] && (!arr_tagged || arr_hit);
    clr_rob_o[0]   = rob_q[addr_idx_i];
    clr_valid_o[1] = rsp_live && rsp_pass && needcc_q[resp_idx_i] && !is_capst(op_q[resp_idx_i]);
    clr_rob_o[1]   = rob_q[resp_idx_i];

    fault_valid_o  = rsp_live && !rsp_pass && rsp_last;
    fault_rob_o    = rob_q[resp_idx_i];
    unique case (op_q[resp_idx_i])
      OP_LOAD:  fault_cause_o = FAULT_LOAD;
      OP_CSTR:  fault_cause_o = FAULT_CSTR;
      OP_CCLR:  fault_cause_o = FAULT_CCLR;
      default:  fault_cause_o = FAULT_STORE;
    endcase

    fill_valid_o   = rsp_live && rsp_pass && !is_capst(op_q[resp_idx_i]);
    fill_tag_o     = ptr_tag(addr_q[resp_idx_i]);
    fill_meta_o    = cap_meta_t'(resp_data_i);

    upd_valid_o    = sel_valid && sel_store && req_grant_i;
    upd_is_cstr_o  = op_q[sel_idx] == OP_CSTR;
    upd_tag_o      = ptr_tag(addr_q[sel_idx]);
    upd_addr_o     = addr_q[sel_idx];
    upd_way_o      = way_q[sel_idx];
    upd_meta_o     = sel_newmeta;

    ev_untagged_o  = arr_live && !arr_tagged;
    ev_cc_hit_o    = arr_live && arr_tagged && arr_hit;
    ev_iter_o      = rsp_live && !rsp_pass && !rsp_last;
    ev_dep_stall_o = |(dep_stall & rdy_vec);
  end

  // ------------------------------------------------------------ state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q  <= '0;
      needcc_q <= '0;
      found_q  <= '0;
      fault_q  <= '0;
      commit_q <= '0;
      for (int e = 0; e < ENTRIES; e++) begin
        state_q[e] <= S_INIT;
        op_q[e]    <= OP_OTHER;
        rob_q[e]   <= '0;
        addr_q[e]  <= '0;
        size_q[e]  <= '0;
        way_q[e]   <= '0;
        tried_q[e] <= '0;
      end
    end else begin
      // address arrival
      if (arr_live) begin
        addr_q[addr_idx_i] <= addr_i;
        if (op_q[addr_idx_i] == OP_CSTR) size_q[addr_idx_i] <= addr_size_i;
        tried_q[addr_idx_i] <= '0;
        if (!arr_tagged) begin
          state_q[addr_idx_i] <= S_DONE;
          found_q[addr_idx_i] <= 1'b0;
        end else if (arr_hit) begin
          state_q[addr_idx_i] <= S_DONE;
          found_q[addr_idx_i] <= 1'b1;
        end else begin
          state_q[addr_idx_i] <= S_READY;
          way_q[addr_idx_i]   <= is_capst(op_q[addr_idx_i]) ? (start_way_i & wmask) : '0;
        end
      end
      // capability load issued
      if (sel_valid && !sel_store && req_grant_i) state_q[sel_idx] <= S_WAIT;
      // capability load response
      if (rsp_live) begin
        if (rsp_pass) begin
          state_q[resp_idx_i] <= S_DONE;
          found_q[resp_idx_i] <= 1'b1;
        end else if (rsp_last) begin
          state_q[resp_idx_i] <= S_DONE;
          fault_q[resp_idx_i] <= 1'b1;
        end else begin
          state_q[resp_idx_i] <= S_READY;
          way_q[resp_idx_i]   <= (way_q[resp_idx_i] + 1'b1) & wmask;
          tried_q[resp_idx_i] <= tried_q[resp_idx_i] + 1'b1;
        end
      end
      // metadata store of a committed cstr/cclr taken: deallocate
      if (upd_valid_o) valid_q[sel_idx] <= 1'b0;
      // cstr/cclr that committed without a store to make
      for (int e = 0; e < ENTRIES; e++)
        if (valid_q[e] && is_capst(op_q[e]) && commit_q[e] && state_q[e] == S_DONE &&
            (!found_q[e] || fault_q[e]))
          valid_q[e] <= 1'b0;
      // commit
      if (commit_valid_i && valid_q[commit_idx_i]) begin
        if (is_capst(op_q[commit_idx_i])) commit_q[commit_idx_i] <= 1'b1;
        else                               valid_q[commit_idx_i]  <= 1'b0;
      end
      // dispatch
      for (int a = 0; a < NALLOC; a++) if (alloc_valid_i[a]) begin
        valid_q[alloc_idx_i[a]]  <= 1'b1;
        state_q[alloc_idx_i[a]]  <= S_INIT;
        op_q[alloc_idx_i[a]]     <= op_e'(alloc_op_i[a]);
        rob_q[alloc_idx_i[a]]    <= alloc_rob_i[a];
        needcc_q[alloc_idx_i[a]] <= alloc_needcc_i[a];
        size_q[alloc_idx_i[a]]   <= 32'd1 << alloc_acc_log2_i[a];
        found_q[alloc_idx_i[a]]  <= 1'b0;
        fault_q[alloc_idx_i[a]]  <= 1'b0;
        commit_q[alloc_idx_i[a]] <= 1'b0;
        way_q[alloc_idx_i[a]]    <= '0;
        tried_q[alloc_idx_i[a]]  <= '0;
      end
    end
  end

  // A queue slot is only reused after it has been freed
  for (genvar a = 0; a < NALLOC; a++) begin : g_alloc_chk
    a_alloc_free: assert property (@(posedge clk) disable iff (!rst_n)
      alloc_valid_i[a] |-> !valid_q[alloc_idx_i[a]] ||
                           (commit_valid_i && commit_idx_i == alloc_idx_i[a]));
  end
  // A capability response only comes back to an entry that is waiting for it
  a_resp_wait: assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid_i |-> valid_q[resp_idx_i] && state_q[resp_idx_i] == S_WAIT);
endmodule
