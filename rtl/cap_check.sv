// cap_check: the comparison logic of the capability-execution pipeline.
//
// Given 8-byte metadata read from a CMT way and the untagged address of an
// instruction, it answers the question each instruction class asks:
//   load/store - access_ok: the metadata is non-empty and the bytes
//                [addr, addr+bytes) lie inside [base, base+size);
//   cstr       - empty: the way holds no metadata (all zero);
//   cclr       - match: the way holds metadata whose base is this address.
// It also builds the metadata a cstr stores, {size, addr[31:0]}.
// The paper keeps 8-byte metadata "as an encrypted format" without giving
// it; this design stores a plain 32-bit base and 32-bit size, so bounds are
// compared on the low 32 address bits (objects up to 4 GiB). Combinational.
module cap_check
  import rvcure_pkg::*;
(
  input  cap_meta_t       meta_i,
  input  logic [XLEN-1:0] addr_i,       // tag already stripped or ignored
  input  logic [31:0]     bytes_i,      // access size, or object size for cstr
  output logic            access_ok_o,
  output logic            empty_o,
  output logic            match_o,
  output cap_meta_t       new_meta_o
);
  logic [32:0] off_end;

  always_comb begin
    empty_o     = (meta_i == '0);
    off_end     = {1'b0, addr_i[31:0] - meta_i.base} + {1'b0, bytes_i};
    access_ok_o = !empty_o && (off_end <= {1'b0, meta_i.size});
    match_o     = !empty_o && (meta_i.base == addr_i[31:0]);
    new_meta_o.size = bytes_i;
    new_meta_o.base = addr_i[31:0];
  end
endmodule
