// ptr_tag_unit: execute-stage unit for the tagd and xtag instructions.
//
// tagd computes a CRC-16 of the pointer's 48 address bits and returns the
// pointer with that hash in bits [63:48]; xtag returns the pointer with bits
// [63:48] zeroed. Both have a 1-cycle latency (registered result), the
// latency the paper lists for this unit. The CRC polynomial, the bits it
// covers and the tag position are this design's choices. Because a zero tag
// marks an untagged pointer, a CRC of 0 is replaced by 1 so that tagd always
// yields a tagged pointer (also this design's choice).
module ptr_tag_unit
  import rvcure_pkg::*;
#(
  parameter int unsigned RD_W = 7      // width of the destination register tag
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            valid_i,
  input  logic            is_tagd_i,   // 1: tagd, 0: xtag
  input  logic [XLEN-1:0] rs1_i,
  input  logic [RD_W-1:0] rd_i,
  output logic            valid_o,
  output logic [XLEN-1:0] rd_data_o,
  output logic [RD_W-1:0] rd_o
);
  logic [TAG_W-1:0] crc, tag;
  logic [XLEN-1:0]  result;

  always_comb begin
    crc = crc16_addr(rs1_i[ADDR_BITS-1:0]);
    tag = (crc == '0) ? TAG_W'(1) : crc;
    result = is_tagd_i ? {tag, rs1_i[ADDR_BITS-1:0]}
                       : {{TAG_W{1'b0}}, rs1_i[ADDR_BITS-1:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o   <= 1'b0;
      rd_data_o <= '0;
      rd_o      <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) begin
        rd_data_o <= result;
        rd_o      <= rd_i;
      end
    end
  end
endmodule
