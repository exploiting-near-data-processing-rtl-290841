// tb_natsa_dpu -- self-checking testbench of the DPU.
// Feeds random windows of random length (one sample pair per cycle) and
// compares the accumulated dot product with a 64-bit reference sum; checks
// that the result is ready the cycle after the last pair and that clr empties
// the accumulator.
module tb_natsa_dpu;
  import natsa_pkg::*;
  import natsa_ref_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  fix_t t_i = 0, t_j = 0, q;
  int checks = 0, failures = 0;

  natsa_dpu dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 200; trial++) begin
      int len, expv, cycles;
      len = 1 + $urandom % 32;
      expv = 0;
      cycles = 0;
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      check("clear", q, 0);
      for (int s = 0; s < len; s++) begin
        // samples of up to +/-64 with 8 fractional bits in use
        t_i = fix_t'(($urandom % 32768) - 16384) <<< 8;
        t_j = fix_t'(($urandom % 32768) - 16384) <<< 8;
        expv += rmul(t_i, t_j);
        en = 1;
        @(negedge clk);
        cycles++;
      end
      en = 0;
      check("dot product", q, expv);
      check("cycles per window", cycles, len);
      // holding en low keeps the value
      @(negedge clk);
      check("hold", q, expv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
