// needcc_decoder: decode-stage classification of RV-CURE instructions.
//
// Looks at one 32-bit instruction and reports its class (load, store, tagd,
// xtag, cstr, cclr or other), the access size of a load or store, and the
// needCC bit. needCC is set for loads and stores (integer and floating
// point) when enableDPT is on, as the paper's decode-stage rule states;
// every other instruction gets needCC = 0. Purely combinational.
// The paper does not give encodings for tagd/xtag/cstr/cclr; this design
// places them on the RISC-V custom-0 opcode with funct3 = 0..3.
module needcc_decoder
  import rvcure_pkg::*;
(
  input  logic        valid_i,
  input  logic [31:0] instr_i,
  input  logic        enable_dpt_i,
  output op_e         op_o,
  output logic        is_mem_o,       // load or store
  output logic [1:0]  acc_log2_o,     // log2 of access bytes (ld/st)
  output logic        needcc_o
);
  logic [6:0] opc;
  logic [2:0] f3;

  always_comb begin
    opc = instr_i[6:0];
    f3  = instr_i[14:12];
    op_o = OP_OTHER;
    unique case (opc)
      OPC_LOAD, OPC_LOAD_FP:   op_o = OP_LOAD;
      OPC_STORE, OPC_STORE_FP: op_o = OP_STORE;
      OPC_CUSTOM0: begin
        unique case (f3)
          F3_TAGD: op_o = OP_TAGD;
          F3_XTAG: op_o = OP_XTAG;
          F3_CSTR: op_o = OP_CSTR;
          F3_CCLR: op_o = OP_CCLR;
          default: op_o = OP_OTHER;
        endcase
      end
      default: op_o = OP_OTHER;
    endcase
    if (!valid_i) op_o = OP_OTHER;
    is_mem_o   = (op_o == OP_LOAD) || (op_o == OP_STORE);
    acc_log2_o = f3[1:0];
    needcc_o   = enable_dpt_i && is_mem_o;
  end
endmodule
