// cap_csr: the RV-CURE control and status registers.
//
// enableDPT switches capability enforcement on, baseAddrCMT holds the CMT's
// base address and numWaysCMT its number of ways. One write port (written
// at the end of the cycle) and one combinational read port. The register
// names follow the paper; the CSR numbers (0x8C0..0x8C2), the reset values
// (off, base 0, one way) and the rule that numWaysCMT is kept as a power of
// two are this design's choices: the kernel doubles the way count when the
// CMT is resized, so a written value is rounded down to a power of two,
// clamped to 1..1024, and its log2 is supplied for the address equation.
module cap_csr
  import rvcure_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wen_i,
  input  logic [11:0]        waddr_i,
  input  logic [XLEN-1:0]    wdata_i,
  input  logic [11:0]        raddr_i,
  output logic [XLEN-1:0]    rdata_o,
  output logic               rhit_o,       // raddr_i names one of these CSRs
  output logic               enable_dpt_o,
  output logic [XLEN-1:0]    base_cmt_o,
  output logic [NWAYS_W-1:0] nways_o,
  output logic [LOG2N_W-1:0] log2n_o
);
  logic [LOG2N_W-1:0] wlog2;

  // highest set bit of the written way count, clamped to 2^10
  always_comb begin
    wlog2 = '0;
    for (int b = 0; b <= WAY_W; b++)
      if (wdata_i[b]) wlog2 = LOG2N_W'(b);
    if (wdata_i[XLEN-1:WAY_W+1] != '0) wlog2 = LOG2N_W'(WAY_W);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enable_dpt_o <= 1'b0;
      base_cmt_o   <= '0;
      log2n_o      <= '0;
    end else if (wen_i) begin
      unique case (waddr_i)
        CSR_ENABLE_DPT: enable_dpt_o <= wdata_i[0];
        CSR_BASE_CMT:   base_cmt_o   <= {wdata_i[XLEN-1:3], 3'b000};
        CSR_NWAYS_CMT:  log2n_o      <= wlog2;
        default: ;
      endcase
    end
  end

  assign nways_o = NWAYS_W'(1) << log2n_o;

  always_comb begin
    rhit_o  = 1'b1;
    unique case (raddr_i)
      CSR_ENABLE_DPT: rdata_o = XLEN'(enable_dpt_o);
      CSR_BASE_CMT:   rdata_o = base_cmt_o;
      CSR_NWAYS_CMT:  rdata_o = XLEN'(nways_o);
      default: begin rdata_o = '0; rhit_o = 1'b0; end
    endcase
  end
endmodule
