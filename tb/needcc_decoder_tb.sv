// needcc_decoder_tb: checks instruction classes and the needCC rule.
// Sweeps every 7-bit opcode with every funct3, with enableDPT on and off,
// and compares with a table written from the RISC-V opcode map and the
// custom-0 assignments of tagd/xtag/cstr/cclr.
module needcc_decoder_tb;
  import rvcure_pkg::*;
  int checks = 0, failures = 0;
  logic        valid, en;
  logic [31:0] instr;
  op_e         op;
  logic        is_mem, needcc;
  logic [1:0]  acc;

  needcc_decoder dut (.valid_i(valid), .instr_i(instr), .enable_dpt_i(en),
                      .op_o(op), .is_mem_o(is_mem), .acc_log2_o(acc), .needcc_o(needcc));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_e exp_op;
    for (int e = 0; e < 2; e++)
      for (int v = 0; v < 2; v++)
        for (int o = 0; o < 128; o++)
          for (int f = 0; f < 8; f++) begin
            en = e[0]; valid = v[0];
            instr = {$urandom()} ;
            instr[6:0] = o[6:0];
            instr[14:12] = f[2:0];
            #1;
            exp_op = OP_OTHER;
            if (valid) begin
              if (o == 'h03 || o == 'h07) exp_op = OP_LOAD;
              else if (o == 'h23 || o == 'h27) exp_op = OP_STORE;
              else if (o == 'h0B) begin
                if (f == 0) exp_op = OP_TAGD;
                if (f == 1) exp_op = OP_XTAG;
                if (f == 2) exp_op = OP_CSTR;
                if (f == 3) exp_op = OP_CCLR;
              end
            end
            checks++;
            if (op != exp_op || needcc != (en && (exp_op == OP_LOAD || exp_op == OP_STORE)) ||
                is_mem != (exp_op == OP_LOAD || exp_op == OP_STORE) ||
                ((exp_op == OP_LOAD || exp_op == OP_STORE) && acc != f[1:0])) begin
              failures++;
              if (failures < 10)
                $display("mismatch opc=%h f3=%0d en=%0d: op=%0d exp=%0d needcc=%0b",
                         o, f, en, op, exp_op, needcc);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
