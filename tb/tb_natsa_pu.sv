// tb_natsa_pu -- self-checking testbench of one NATSA processing unit.
// Loads a random time series with its window means and deviations into an
// HBM channel model (with back-pressure), hands the PU every diagonal group
// one after another, and compares the resulting profile with a brute-force
// matrix profile: PP[x] must equal the smallest distance to any window at
// least excl away, and II[x] must name a window at that distance.
module tb_natsa_pu;
  import natsa_pkg::*;
  import natsa_ref_pkg::*;

  localparam int L = 4;
  localparam int N = 48, M = 8, EXCL = 2;
  localparam int NP = N - M + 1;

  logic clk = 0, rst_n = 0;
  layout_t layout;
  logic grp_valid = 0, grp_ready, grp_done;
  idx_t grp_k;
  mem_req_t req;
  logic mem_ready;
  mem_rsp_t rsp;
  int checks = 0, failures = 0;
  int T [N], MU [NP], SG [NP];

  natsa_pu #(.LANES(L)) dut (.clk, .rst_n, .n(idx_t'(N)), .m(idx_t'(M)), .layout,
    .grp_valid, .grp_k, .grp_ready, .grp_done, .req, .mem_ready, .rsp);
  hbm_model #(.WORDS(2048), .LAT(4), .STALL_PCT(20)) u_mem (.clk, .rst_n, .req, .ready(mem_ready), .rsp);

  always #5 clk = ~clk;

  function automatic int dref(int i, int j);
    int q = 0;
    for (int s = 0; s < M; s++) q += rmul(T[i+s], T[j+s]);
    return rdist(q, M, MU[i], MU[j], SG[i], SG[j]);
  endfunction

  initial begin
    int ng;
    layout.t = 0; layout.mu = 256; layout.sig = 512; layout.pp = 768; layout.ii = 1024;
    for (int x = 0; x < N; x++) T[x] = (int'($urandom % 4096) - 2048) <<< 8;  // |T| < 8
    for (int x = 0; x < NP; x++) begin
      real mu, sg;
      mu = 0; sg = 0;
      for (int s = 0; s < M; s++) mu += real'(T[x+s]) / 65536.0 / M;
      for (int s = 0; s < M; s++) sg += (real'(T[x+s]) / 65536.0 - mu) ** 2 / M;
      MU[x] = to_fix(mu); SG[x] = to_fix($sqrt(sg));
    end
    for (int a = 0; a < 2048; a++) u_mem.mem[a] = 0;
    for (int x = 0; x < N; x++)  u_mem.mem[layout.t + x] = T[x];
    for (int x = 0; x < NP; x++) begin
      u_mem.mem[layout.mu + x] = MU[x]; u_mem.mem[layout.sig + x] = SG[x];
      u_mem.mem[layout.pp + x] = FIX_MAX; u_mem.mem[layout.ii + x] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    ng = (NP - EXCL + L - 1) / L;
    for (int g = ng - 1; g >= 0; g--) begin
      @(negedge clk);
      while (!grp_ready) @(negedge clk);
      grp_valid = 1; grp_k = idx_t'(EXCL + g * L);
      @(negedge clk) grp_valid = 0;
      while (!grp_done) @(negedge clk);
    end
    @(negedge clk);
    for (int x = 0; x < NP; x++) begin
      int best, pp, ii;
      best = int'(FIX_MAX);
      for (int y = 0; y < NP; y++)
        if ((x - y >= EXCL || y - x >= EXCL) && dref(x, y) < best) best = dref(x, y);
      pp = u_mem.mem[layout.pp + x]; ii = u_mem.mem[layout.ii + x];
      checks++;
      if (pp != best) begin failures++; $display("FAIL PP[%0d]=%0d expected %0d", x, pp, best); end
      checks++;
      if (ii >= NP || (x - ii < EXCL && ii - x < EXCL) || dref(x, ii) != pp) begin
        failures++; $display("FAIL II[%0d]=%0d does not match PP", x, ii);
      end
    end
    checks++;
    if (u_mem.stalls == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
