// rob_needcc: the needCC bit column added to the re-order buffer.
//
// One bit per ROB entry. Dispatch (NDIS lanes, 3 by default as in the
// paper's 3-wide core) writes the decoder's needCC bit into each entry it
// allocates; the capability pipeline clears the bit of an entry
// whose capability check passed (NCLR clear ports per cycle); the commit
// condition of the head entry gains the term "& !needCC". A clear and a
// dispatch to the same entry in one cycle: dispatch wins (the clear belongs
// to the entry's previous occupant). A capability fault reported for an
// entry sets its fault bit instead; the head's fault bit tells the core to
// take the capability-fault exception rather than commit (the core's
// exception path is not part of this block). Bits reset to 0. Commit-ready
// is combinational from the head index.
module rob_needcc
  import rvcure_pkg::*;
#(
  parameter int unsigned ENTRIES = ROB_ENTRIES,
  parameter int unsigned IDX_W   = ROB_IDX_W,
  parameter int unsigned NDIS    = 3,   // instructions dispatched per cycle
  parameter int unsigned NCLR    = 4,
  parameter int unsigned NFLT    = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NDIS-1:0]            dis_valid_i,
  input  logic [NDIS-1:0][IDX_W-1:0] dis_idx_i,
  input  logic [NDIS-1:0]            dis_needcc_i,
  input  logic [NCLR-1:0]            clr_valid_i,
  input  logic [NCLR-1:0][IDX_W-1:0] clr_idx_i,
  input  logic [NFLT-1:0]            flt_valid_i,
  input  logic [NFLT-1:0][IDX_W-1:0] flt_idx_i,
  input  logic [IDX_W-1:0]           head_idx_i,
  input  logic                       head_can_commit_i, // the core's own condition
  output logic                       head_needcc_o,
  output logic                       head_fault_o,
  output logic                       can_commit_o
);
  logic [ENTRIES-1:0] needcc_q, fault_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      needcc_q <= '0;
      fault_q  <= '0;
    end else begin
      for (int c = 0; c < NCLR; c++)
        if (clr_valid_i[c] && 32'(clr_idx_i[c]) < ENTRIES) needcc_q[clr_idx_i[c]] <= 1'b0;
      for (int f = 0; f < NFLT; f++)
        if (flt_valid_i[f] && 32'(flt_idx_i[f]) < ENTRIES) fault_q[flt_idx_i[f]] <= 1'b1;
      for (int d = 0; d < NDIS; d++)
        if (dis_valid_i[d] && 32'(dis_idx_i[d]) < ENTRIES) begin
          needcc_q[dis_idx_i[d]] <= dis_needcc_i[d];
          fault_q[dis_idx_i[d]]  <= 1'b0;
        end
    end
  end

  always_comb begin
    head_needcc_o = (32'(head_idx_i) < ENTRIES) ? needcc_q[head_idx_i] : 1'b0;
    head_fault_o  = (32'(head_idx_i) < ENTRIES) ? fault_q[head_idx_i] : 1'b0;
    can_commit_o  = head_can_commit_i && !head_needcc_o;
  end
endmodule
