// tb_natsa_dpuu -- self-checking testbench of the DPUU.
// Walks random diagonals of a random series: starting from a directly computed
// dot product, applies the DPUU step by step and compares every q_{i+1,j+1}
// with a dot product computed from scratch.
module tb_natsa_dpuu;
  import natsa_pkg::*;
  import natsa_ref_pkg::*;

  fix_t q, t_i, t_j, t_im, t_jm, q_next;
  int checks = 0, failures = 0;
  int T [128];

  natsa_dpuu dut (.*);

  function automatic int dot(int a, int b, int m);
    int acc = 0;
    for (int s = 0; s < m; s++) acc += rmul(T[a+s], T[b+s]);
    return acc;
  endfunction

  initial begin
    for (int trial = 0; trial < 50; trial++) begin
      int m, a, b;
      m = 2 + $urandom % 16;
      a = $urandom % 20;
      b = $urandom % 40;
      for (int x = 0; x < 128; x++) T[x] = (int'($urandom % 4096) - 2048) <<< 8;
      q = dot(a, b, m);
      for (int step = 0; step + a + m < 128 && step + b + m < 128 && step < 40; step++) begin
        t_i = T[a+step]; t_j = T[b+step]; t_im = T[a+step+m]; t_jm = T[b+step+m];
        #1;
        checks++;
        if (q_next !== dot(a + step + 1, b + step + 1, m)) begin
          failures++;
          $display("FAIL m=%0d a=%0d b=%0d step=%0d got %0d exp %0d", m, a, b, step,
                   q_next, dot(a + step + 1, b + step + 1, m));
        end
        q = q_next;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
