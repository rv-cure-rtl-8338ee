// cap_addr_gen: address of one way of a CMT row.
//
// Implements the paper's equation
//   CapAddr = Base + (T << (3 + log2 N)) + (W << 3)
// with T the 16-bit pointer tag, N the number of CMT ways (given as log2 N)
// and W the way to access; each way holds 8 bytes. Combinational.
module cap_addr_gen
  import rvcure_pkg::*;
(
  input  logic [XLEN-1:0]    base_i,
  input  logic [TAG_W-1:0]   tag_i,
  input  logic [LOG2N_W-1:0] log2n_i,
  input  logic [WAY_W-1:0]   way_i,
  output logic [XLEN-1:0]    addr_o
);
  always_comb begin
    addr_o = base_i + (XLEN'(tag_i) << (3 + log2n_i)) + (XLEN'(way_i) << 3);
  end
endmodule
