// tb_natsa_puu -- self-checking testbench of the PUU.
// Random distances against random stored profile values, plus the equal case
// (which must replace, the comparator being "<=") and the invalid-lane case
// (which must leave the profile alone).
module tb_natsa_puu;
  import natsa_pkg::*;

  logic valid;
  fix_t d, pp_in, pp_out;
  idx_t j, ii_in, ii_out;
  int checks = 0, failures = 0;

  natsa_puu dut (.*);

  task automatic run(logic v, int dd, int pp, int jj, int ii);
    int ep, ei;
    valid = v; d = dd; pp_in = pp; j = idx_t'(jj); ii_in = idx_t'(ii);
    #1;
    if (v && dd <= pp) begin ep = dd; ei = jj; end else begin ep = pp; ei = ii; end
    checks++;
    if (pp_out !== ep || ii_out !== idx_t'(ei)) begin
      failures++;
      $display("FAIL v=%0d d=%0d pp=%0d: got (%0d,%0d) exp (%0d,%0d)", v, dd, pp, pp_out, ii_out, ep, ei);
    end
  endtask

  initial begin
    for (int t = 0; t < 1000; t++)
      run($urandom % 4 != 0, int'($urandom) >>> 4, int'($urandom) >>> 4, $urandom % 65536, $urandom % 65536);
    run(1, 1234, 1234, 7, 9);     // equal distance replaces
    run(1, -5, 3, 1, 2);          // negative rounding residue still compares signed
    run(0, 1, 100, 3, 4);         // invalid lane keeps the old value
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
