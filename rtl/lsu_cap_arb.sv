// lsu_cap_arb: capability-request arbitration at the LSU scheduler input.
//
// One request per cycle reaches the D-cache port (through the TLB). Regular
// loads and stores always win; capability requests only use a cycle no
// regular request wants, which is the lowest priority the paper assigns
// them. Among capability requests the SSQ goes before the SLQ (this design's
// choice: SSQ requests include the metadata stores that older loads and
// stores wait for). A request is taken in the cycle its grant is high, which
// needs mem_ready_i. Load responses coming back are steered by their is_cap
// flag: regular ones to the LSU, capability ones to the SLQ or SSQ that
// sent them. Combinational.
module lsu_cap_arb
  import rvcure_pkg::*;
(
  input  logic      reg_valid_i,
  input  logic      reg_is_store_i,
  input  logic [XLEN-1:0] reg_addr_i,
  input  logic [XLEN-1:0] reg_data_i,
  output logic      reg_grant_o,
  input  logic      ssq_valid_i,
  input  cap_req_t  ssq_req_i,
  output logic      ssq_grant_o,
  input  logic      slq_valid_i,
  input  cap_req_t  slq_req_i,
  output logic      slq_grant_o,
  output logic      mem_valid_o,
  output mem_req_t  mem_req_o,
  input  logic      mem_ready_i,
  input  logic      mem_resp_valid_i,
  input  mem_resp_t mem_resp_i,
  output logic      reg_resp_valid_o,
  output logic      ssq_resp_valid_o,
  output logic      slq_resp_valid_o,
  output logic      cap_conflict_o     // a capability request lost to a regular one
);
  always_comb begin
    reg_grant_o = 1'b0;
    ssq_grant_o = 1'b0;
    slq_grant_o = 1'b0;
    mem_req_o   = '0;
    if (reg_valid_i) begin
      reg_grant_o        = mem_ready_i;
      mem_req_o.is_cap   = 1'b0;
      mem_req_o.is_store = reg_is_store_i;
      mem_req_o.addr     = reg_addr_i;
      mem_req_o.data     = reg_data_i;
    end else if (ssq_valid_i) begin
      ssq_grant_o        = mem_ready_i;
      mem_req_o.is_cap   = 1'b1;
      mem_req_o.is_store = ssq_req_i.is_store;
      mem_req_o.addr     = ssq_req_i.addr;
      mem_req_o.data     = ssq_req_i.data;
      mem_req_o.src_ssq  = 1'b1;
      mem_req_o.idx      = ssq_req_i.idx;
    end else if (slq_valid_i) begin
      slq_grant_o        = mem_ready_i;
      mem_req_o.is_cap   = 1'b1;
      mem_req_o.is_store = slq_req_i.is_store;
      mem_req_o.addr     = slq_req_i.addr;
      mem_req_o.data     = slq_req_i.data;
      mem_req_o.src_ssq  = 1'b0;
      mem_req_o.idx      = slq_req_i.idx;
    end
    mem_valid_o      = (reg_valid_i || ssq_valid_i || slq_valid_i) && mem_ready_i;
    cap_conflict_o   = reg_valid_i && (ssq_valid_i || slq_valid_i);
    reg_resp_valid_o = mem_resp_valid_i && !mem_resp_i.is_cap;
    ssq_resp_valid_o = mem_resp_valid_i &&  mem_resp_i.is_cap &&  mem_resp_i.src_ssq;
    slq_resp_valid_o = mem_resp_valid_i &&  mem_resp_i.is_cap && !mem_resp_i.src_ssq;
  end
endmodule
