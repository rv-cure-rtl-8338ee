// head_buffers: the store head buffer (SHB) and clear head buffer (CHB).
//
// Two arrays of 256 way numbers indexed by tag[7:0]. An SHB entry names the
// CMT way where the next cstr of that partial tag should start searching for
// an empty slot; a CHB entry names the way where the next cclr should start
// looking for its metadata. The read port is combinational and selects SHB
// for a cstr and CHB otherwise (the 2:1 mux of the paper's figure). When a
// cstr or cclr that finished in way N of an M-way CMT commits, the update
// port writes, following the paper:
//   LAFD:     cstr -> SHB = (N+1)%M   cclr -> CHB = (N-1)%M
//   FAFD:     cstr -> SHB = (N+1)%M   cclr -> CHB = (N+1)%M
//   ADAPTIVE: LAFD if the address is in the upper half of the memory space,
//             else FAFD (the paper's default mode)
//   BASE:     no update; every search starts from way 0.
// Entries are WAY_W = 10 bits wide (512 entries x 10 bits = 0.625 KB, the
// size the paper gives). Which address bit marks "upper half" is this
// design's choice (UPPER_BIT; bit 37 halves the Sv39 user space). M is a
// power of two, so the modulo is a mask. Entries reset to 0.
module head_buffers
  import rvcure_pkg::*;
#(
  parameter int unsigned SETS      = CC_SETS,
  parameter hb_mode_e    MODE      = HB_ADAPTIVE,
  parameter int unsigned UPPER_BIT = 37
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [TAG_W-1:0]   rd_tag_i,
  input  logic               rd_is_cstr_i,
  output logic [WAY_W-1:0]   rd_way_o,
  input  logic               upd_valid_i,
  input  logic               upd_is_cstr_i,
  input  logic [TAG_W-1:0]   upd_tag_i,
  input  logic [XLEN-1:0]    upd_addr_i,
  input  logic [WAY_W-1:0]   upd_way_i,     // N: way where the search ended
  input  logic [NWAYS_W-1:0] nways_i        // M
);
  localparam int unsigned IW = $clog2(SETS);

  logic [WAY_W-1:0] shb_q [SETS];
  logic [WAY_W-1:0] chb_q [SETS];
  logic [WAY_W-1:0] mask, next_up, next_dn, new_way;
  logic             lafd;

  always_comb begin
    mask    = WAY_W'(nways_i - 1'b1);
    next_up = (upd_way_i + 1'b1) & mask;
    next_dn = (upd_way_i - 1'b1) & mask;
    unique case (MODE)
      HB_LAFD:  lafd = 1'b1;
      HB_FAFD:  lafd = 1'b0;
      default:  lafd = upd_addr_i[UPPER_BIT];
    endcase
    new_way  = (upd_is_cstr_i || !lafd) ? next_up : next_dn;
    rd_way_o = (MODE == HB_BASE) ? '0 :
               rd_is_cstr_i ? shb_q[rd_tag_i[IW-1:0]] : chb_q[rd_tag_i[IW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SETS; i++) begin
        shb_q[i] <= '0;
        chb_q[i] <= '0;
      end
    end else if (upd_valid_i && MODE != HB_BASE) begin
      if (upd_is_cstr_i) shb_q[upd_tag_i[IW-1:0]] <= new_way;
      else               chb_q[upd_tag_i[IW-1:0]] <= new_way;
    end
  end
endmodule
