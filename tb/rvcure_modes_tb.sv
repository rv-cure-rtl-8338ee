// rvcure_modes_tb: compares the head-buffer iteration modes on one workload.
// Four copies of rvcure_mode_run (base, LAFD, FAFD, adaptive) each run the
// same stack-like (last-in first-out, upper half of the address space) and
// heap-like (first-in first-out, lower half) create/free sequence through a
// full rvcure_top, and report how many CMT ways their cstr/cclr searches
// read. Checked: every copy finishes without faults and with its own checks
// passing; LAFD reads fewer ways than base on the stack phase and FAFD fewer
// than base on the heap phase; adaptive behaves exactly as LAFD on the stack
// phase and as FAFD on the heap phase, and so reads the fewest ways overall.
// The per-mode totals are printed as an average of ways per cstr/cclr.
module rvcure_modes_tb;
  import rvcure_pkg::*;
  int checks = 0, failures = 0;
  int ws [4], wh [4], ops [4], flt [4], ck [4], bad [4];
  bit dn [4];

  rvcure_mode_run #(.MODE(HB_BASE))     r0 (ws[0], wh[0], ops[0], flt[0], ck[0], bad[0], dn[0]);
  rvcure_mode_run #(.MODE(HB_LAFD))     r1 (ws[1], wh[1], ops[1], flt[1], ck[1], bad[1], dn[1]);
  rvcure_mode_run #(.MODE(HB_FAFD))     r2 (ws[2], wh[2], ops[2], flt[2], ck[2], bad[2], dn[2]);
  rvcure_mode_run #(.MODE(HB_ADAPTIVE)) r3 (ws[3], wh[3], ops[3], flt[3], ck[3], bad[3], dn[3]);

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string nm [4] = '{"base", "LAFD", "FAFD", "adaptive"};
    wait (dn[0] && dn[1] && dn[2] && dn[3]);
    #100;
    for (int m = 0; m < 4; m++) begin
      checks += ck[m];
      failures += bad[m];
      chk(flt[m] == 0, {nm[m], ": no capability faults"});
      $display("%-9s stack ways read %0d, heap ways read %0d", nm[m], ws[m], wh[m]);
    end
    chk(ws[1] < ws[0], "LAFD beats base on the stack pattern");
    chk(wh[2] < wh[0], "FAFD beats base on the heap pattern");
    chk(ws[3] == ws[1], "adaptive uses LAFD for upper-half addresses");
    chk(wh[3] == wh[2], "adaptive uses FAFD for lower-half addresses");
    for (int m = 0; m < 3; m++)
      chk(ws[3] + wh[3] <= ws[m] + wh[m], {"adaptive reads no more ways than ", nm[m]});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
