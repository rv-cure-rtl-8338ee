// ccache: the capability cache (C-cache).
//
// A direct-mapped store of capability metadata, one entry per value of the
// lower tag byte tag[7:0] (256 entries). Each entry keeps the upper tag byte
// tag[15:8] as its meta tag and the 8-byte metadata as its data, which is
// the 2.25 KB the paper gives; a valid bit per entry is added by this design.
// NLOOKUP combinational lookup ports serve incoming tagged addresses: a hit
// means the entry is valid and its meta tag equals tag[15:8]; whether the
// metadata then satisfies the access is decided by the caller's check.
// Two update ports, applied at the clock edge:
//   fill  - a capability check passed on metadata from memory: allocate;
//   cmt   - a committed cstr (allocate with its metadata) or cclr
//           (invalidate the entry if its meta tag matches).
// When both ports name the same entry in one cycle the fill is applied
// first and the commit port second.
module ccache
  import rvcure_pkg::*;
#(
  parameter int unsigned SETS    = CC_SETS,
  parameter int unsigned NLOOKUP = 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NLOOKUP-1:0][TAG_W-1:0] lk_tag_i,
  output logic [NLOOKUP-1:0]            lk_hit_o,
  output cap_meta_t [NLOOKUP-1:0]       lk_meta_o,
  input  logic                          fill_valid_i,
  input  logic [TAG_W-1:0]              fill_tag_i,
  input  cap_meta_t                     fill_meta_i,
  input  logic                          cmt_valid_i,
  input  logic                          cmt_is_cstr_i,  // 0: cclr
  input  logic [TAG_W-1:0]              cmt_tag_i,
  input  cap_meta_t                     cmt_meta_i
);
  localparam int unsigned IW = $clog2(SETS);

  logic [SETS-1:0]  valid_q;
  logic [7:0]       mtag_q [SETS];
  cap_meta_t        data_q [SETS];

  always_comb begin
    for (int l = 0; l < NLOOKUP; l++) begin
      lk_hit_o[l]  = valid_q[lk_tag_i[l][IW-1:0]] &&
                     (mtag_q[lk_tag_i[l][IW-1:0]] == lk_tag_i[l][15:8]);
      lk_meta_o[l] = data_q[lk_tag_i[l][IW-1:0]];
    end
  end

  // meta tag the cclr compares with: a fill to the same entry in the same
  // cycle counts as already done (fill first, then the commit port)
  logic [7:0] clr_mtag;
  assign clr_mtag = (fill_valid_i && fill_tag_i[IW-1:0] == cmt_tag_i[IW-1:0]) ?
                    fill_tag_i[15:8] : mtag_q[cmt_tag_i[IW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_q <= '0;
    else begin
      if (fill_valid_i) valid_q[fill_tag_i[IW-1:0]] <= 1'b1;
      if (cmt_valid_i) begin
        if (cmt_is_cstr_i) valid_q[cmt_tag_i[IW-1:0]] <= 1'b1;
        else if (clr_mtag == cmt_tag_i[15:8])
          valid_q[cmt_tag_i[IW-1:0]] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid_i && !(cmt_valid_i && cmt_is_cstr_i &&
                          cmt_tag_i[IW-1:0] == fill_tag_i[IW-1:0])) begin
      mtag_q[fill_tag_i[IW-1:0]] <= fill_tag_i[15:8];
      data_q[fill_tag_i[IW-1:0]] <= fill_meta_i;
    end
    if (cmt_valid_i && cmt_is_cstr_i) begin
      mtag_q[cmt_tag_i[IW-1:0]] <= cmt_tag_i[15:8];
      data_q[cmt_tag_i[IW-1:0]] <= cmt_meta_i;
    end
  end
endmodule
