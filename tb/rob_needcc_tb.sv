// rob_needcc_tb: random dispatches, clears and faults against a bit-array
// model; checks the head's needCC/fault bits and the commit condition.
// Each cycle up to three lanes dispatch to consecutive ROB entries, four
// clear ports and two fault ports fire at random entries.
module rob_needcc_tb;
  import rvcure_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic hok, hnc, hflt, cc;
  logic [2:0] dv, dn;
  logic [2:0][6:0] di;
  logic [6:0] head;
  logic [3:0] cv;
  logic [3:0][6:0] ci;
  logic [1:0] fv;
  logic [1:0][6:0] fi;
  bit model [96];
  bit mflt [96];

  rob_needcc dut (.clk, .rst_n, .dis_valid_i(dv), .dis_idx_i(di), .dis_needcc_i(dn),
                  .clr_valid_i(cv), .clr_idx_i(ci), .flt_valid_i(fv), .flt_idx_i(fi),
                  .head_idx_i(head), .head_can_commit_i(hok),
                  .head_needcc_o(hnc), .head_fault_o(hflt), .can_commit_o(cc));

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dv = 0; dn = 0; di = '0; cv = 0; ci = '0; fv = 0; fi = '0; head = 0; hok = 0;
    foreach (model[i]) begin model[i] = 0; mflt[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // check the current state for a random head
      head = 7'($urandom_range(0, 95));
      hok = 1'($urandom());
      #1;
      checks++;
      if (hnc != model[head] || hflt != mflt[head] || cc != (hok && !model[head])) begin
        failures++;
        if (failures < 10) $display("t=%0d head=%0d needcc=%0b model=%0b", t, head, hnc, model[head]);
      end
      // drive this cycle's updates
      begin
        int b;
        b = $urandom_range(0, 95);
        for (int l = 0; l < 3; l++) begin
          dv[l] = 1'($urandom());
          di[l] = 7'((b + l) % 96);
          dn[l] = 1'($urandom());
        end
      end
      for (int c = 0; c < 4; c++) begin
        cv[c] = ($urandom_range(0, 3) == 0);
        ci[c] = 7'($urandom_range(0, 95));
      end
      for (int f = 0; f < 2; f++) begin
        fv[f] = ($urandom_range(0, 15) == 0);
        fi[f] = 7'($urandom_range(0, 95));
      end
      @(posedge clk);
      for (int c = 0; c < 4; c++) if (cv[c]) model[ci[c]] = 0;
      for (int f = 0; f < 2; f++) if (fv[f]) mflt[fi[f]] = 1;
      for (int l = 0; l < 3; l++) if (dv[l]) begin model[di[l]] = dn[l]; mflt[di[l]] = 0; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
