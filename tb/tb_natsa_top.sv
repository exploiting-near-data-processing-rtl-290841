// tb_natsa_top -- end-to-end testbench of NATSA at its default size
// (8 PUs, one per HBM channel, 4 lanes each).
// Acts as the host: writes a random time series (with one flat stretch) and
// its window means and deviations into all eight channel models, clears the
// private profiles, starts the run, waits for done, then reduces the eight
// private profiles and compares the result with a brute-force matrix profile.
// It also counts how often each mechanism of the design occurred and fails if
// one never did: DPU initialisation, DPUU updates, profile replacements and
// keeps, lanes masked at the end of the matrix, flat windows, memory
// back-pressure, groups from both ends of the partition, work on every PU,
// progress reports, and a mid-run snapshot of the profile, which must
// already hold valid upper bounds (the anytime property). The counters come from passive monitors bound into
// natsa_pu and natsa_dispatch.
module tb_natsa_top;
  import natsa_pkg::*;
  import natsa_ref_pkg::*;

  localparam int NPU = 8, L = 4;
  localparam int N = 64, M = 8, EXCL = 2;
  localparam int NP = N - M + 1;
  localparam int WORDS = 1024;

  logic clk = 0, rst_n = 0, start = 0;
  layout_t layout;
  logic busy, done;
  idx_t num_groups, progress;
  mem_req_t mem_req [NPU];
  logic     mem_ready [NPU];
  mem_rsp_t mem_rsp [NPU];
  int checks = 0, failures = 0;
  int T [N], MU [NP], SG [NP];

  natsa_top dut (.clk, .rst_n, .start, .n(idx_t'(N)), .m(idx_t'(M)), .excl(idx_t'(EXCL)),
    .layout, .busy, .done, .num_groups, .progress, .mem_req, .mem_ready, .mem_rsp);

  for (genvar c = 0; c < NPU; c++) begin : g_ch
    hbm_model #(.WORDS(WORDS), .LAT(6), .STALL_PCT(15)) u_mem (
      .clk, .rst_n, .req(mem_req[c]), .ready(mem_ready[c]), .rsp(mem_rsp[c]));
  end

  always #5 clk = ~clk;

  // Mechanism counters: monitors bound into the PUs and the partitioner.
  import natsa_tb_cnt_pkg::*;
  int n_progress;
  bind natsa_pu natsa_pu_mon #(.LANES(LANES)) u_mon (
    .clk, .rst_n, .q_load, .qsel, .d_load, .lane_valid,
    .d0(g_lane[0].d_reg), .take0(g_lane[0].u_puu_col.take));
  bind natsa_dispatch natsa_dispatch_mon #(.NPU(NPU), .LANES(LANES)) u_mon (
    .clk, .rst_n, .grp_valid, .grp_k, .excl, .num_groups);
  idx_t last_progress = 0;
  always @(posedge clk) if (rst_n) begin
    if (progress != last_progress) n_progress++;
    last_progress <= progress;
  end

  function automatic int dref(int i, int j);
    int q = 0;
    for (int s = 0; s < M; s++) q += rmul(T[i+s], T[j+s]);
    return rdist(q, M, MU[i], MU[j], SG[i], SG[j]);
  endfunction

  task automatic count(string what, int v);
    checks++;
    $display("  %-28s %0d", what, v);
    if (v == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  int cycles, n_snapshot;

  // Reduced profile entry x over the eight channels, read while the run goes on.
  function automatic int pp_now(int x);
    int v;
    v = g_ch[0].u_mem.mem[layout.pp + x];
    if (int'(g_ch[1].u_mem.mem[layout.pp + x]) < v) v = g_ch[1].u_mem.mem[layout.pp + x];
    if (int'(g_ch[2].u_mem.mem[layout.pp + x]) < v) v = g_ch[2].u_mem.mem[layout.pp + x];
    if (int'(g_ch[3].u_mem.mem[layout.pp + x]) < v) v = g_ch[3].u_mem.mem[layout.pp + x];
    if (int'(g_ch[4].u_mem.mem[layout.pp + x]) < v) v = g_ch[4].u_mem.mem[layout.pp + x];
    if (int'(g_ch[5].u_mem.mem[layout.pp + x]) < v) v = g_ch[5].u_mem.mem[layout.pp + x];
    if (int'(g_ch[6].u_mem.mem[layout.pp + x]) < v) v = g_ch[6].u_mem.mem[layout.pp + x];
    if (int'(g_ch[7].u_mem.mem[layout.pp + x]) < v) v = g_ch[7].u_mem.mem[layout.pp + x];
    return v;
  endfunction

  // Anytime property: halfway through, every profile entry must already be an
  // upper bound of the final one and equal to a real distance (or untouched).
  task automatic snapshot();
    int improved;
    improved = 0;
    for (int x = 0; x < NP; x++) begin
      int v, best, hit;
      v = pp_now(x);
      best = int'(FIX_MAX); hit = (v == int'(FIX_MAX));
      for (int y = 0; y < NP; y++) if (x - y >= EXCL || y - x >= EXCL) begin
        if (dref(x, y) < best) best = dref(x, y);
        if (dref(x, y) == v) hit = 1;
      end
      checks++;
      if (v < best || !hit) begin failures++; $display("FAIL anytime: PP[%0d]=%0d mid-run, final %0d", x, v, best); end
      if (v != int'(FIX_MAX)) improved++;
    end
    $display("anytime snapshot at %0d of %0d groups: %0d of %0d entries already set", progress, num_groups, improved, NP);
    if (improved > 0) n_snapshot++;
  endtask

  initial begin
    layout.t = 0; layout.mu = 128; layout.sig = 256; layout.pp = 384; layout.ii = 512;
    for (int x = 0; x < N; x++) T[x] = (int'($urandom % 4096) - 2048) <<< 8;
    for (int x = 20; x < 20 + M; x++) T[x] = 3 <<< 16;          // one flat window
    for (int x = 0; x < NP; x++) begin
      real mu, sg;
      mu = 0; sg = 0;
      for (int s = 0; s < M; s++) mu += real'(T[x+s]) / 65536.0 / M;
      for (int s = 0; s < M; s++) sg += (real'(T[x+s]) / 65536.0 - mu) ** 2 / M;
      MU[x] = to_fix(mu); SG[x] = to_fix($sqrt(sg));
    end
    for (int a = 0; a < WORDS; a++) begin
      g_ch[0].u_mem.mem[a] = 0; g_ch[1].u_mem.mem[a] = 0; g_ch[2].u_mem.mem[a] = 0; g_ch[3].u_mem.mem[a] = 0;
      g_ch[4].u_mem.mem[a] = 0; g_ch[5].u_mem.mem[a] = 0; g_ch[6].u_mem.mem[a] = 0; g_ch[7].u_mem.mem[a] = 0;
    end
    for (int a = 0; a < WORDS; a++) begin
      logic [31:0] v;
      v = 0;
      if (a >= layout.t && a < layout.t + N) v = T[a - layout.t];
      else if (a >= layout.mu  && a < layout.mu  + NP) v = MU[a - layout.mu];
      else if (a >= layout.sig && a < layout.sig + NP) v = SG[a - layout.sig];
      else if (a >= layout.pp  && a < layout.pp  + NP) v = FIX_MAX;
      g_ch[0].u_mem.mem[a] = v; g_ch[1].u_mem.mem[a] = v; g_ch[2].u_mem.mem[a] = v; g_ch[3].u_mem.mem[a] = v;
      g_ch[4].u_mem.mem[a] = v; g_ch[5].u_mem.mem[a] = v; g_ch[6].u_mem.mem[a] = v; g_ch[7].u_mem.mem[a] = v;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 0;
    n_snapshot = 0;
    while (!done) begin
      @(negedge clk); cycles++;
      if (n_snapshot == 0 && int'(progress) == int'(num_groups) / 2 && int'(num_groups) > 1) snapshot();
    end
    $display("run: n=%0d m=%0d, %0d groups on %0d PUs, %0d cycles", N, M, num_groups, NPU, cycles);
    checks++;
    if (int'(num_groups) != (NP - EXCL + L - 1) / L || progress != num_groups) begin
      failures++; $display("FAIL groups %0d progress %0d", num_groups, progress);
    end
    // host-side reduction of the private profiles, then comparison
    for (int x = 0; x < NP; x++) begin
      int best, pp, ii, cpp [NPU], cii [NPU];
      cpp[0] = g_ch[0].u_mem.mem[layout.pp + x]; cii[0] = g_ch[0].u_mem.mem[layout.ii + x];
      cpp[1] = g_ch[1].u_mem.mem[layout.pp + x]; cii[1] = g_ch[1].u_mem.mem[layout.ii + x];
      cpp[2] = g_ch[2].u_mem.mem[layout.pp + x]; cii[2] = g_ch[2].u_mem.mem[layout.ii + x];
      cpp[3] = g_ch[3].u_mem.mem[layout.pp + x]; cii[3] = g_ch[3].u_mem.mem[layout.ii + x];
      cpp[4] = g_ch[4].u_mem.mem[layout.pp + x]; cii[4] = g_ch[4].u_mem.mem[layout.ii + x];
      cpp[5] = g_ch[5].u_mem.mem[layout.pp + x]; cii[5] = g_ch[5].u_mem.mem[layout.ii + x];
      cpp[6] = g_ch[6].u_mem.mem[layout.pp + x]; cii[6] = g_ch[6].u_mem.mem[layout.ii + x];
      cpp[7] = g_ch[7].u_mem.mem[layout.pp + x]; cii[7] = g_ch[7].u_mem.mem[layout.ii + x];
      pp = cpp[0]; ii = cii[0];
      for (int c = 1; c < NPU; c++) if (cpp[c] < pp) begin pp = cpp[c]; ii = cii[c]; end
      best = int'(FIX_MAX);
      for (int y = 0; y < NP; y++)
        if ((x - y >= EXCL || y - x >= EXCL) && dref(x, y) < best) best = dref(x, y);
      checks++;
      if (pp != best) begin failures++; $display("FAIL PP[%0d]=%0d expected %0d", x, pp, best); end
      checks++;
      if (ii >= NP || (x - ii < EXCL && ii - x < EXCL) || dref(x, ii) != pp) begin
        failures++; $display("FAIL II[%0d]=%0d does not match PP", x, ii);
      end
    end
    $display("mechanisms:");
    count("DPU initialisations", n_init);
    count("DPUU diagonal steps", n_update);
    count("profile replaced (d <= PP)", n_take);
    count("profile kept (d > PP)", n_keep);
    count("rows with masked lanes", n_masked);
    count("flat-window distances", n_flat);
    count("groups from the long end", n_lo_end);
    count("groups from the short end", n_hi_end);
    count("progress updates", n_progress);
    count("anytime snapshots checked", n_snapshot);
    count("HBM back-pressure cycles", g_ch[0].u_mem.stalls + g_ch[1].u_mem.stalls + g_ch[2].u_mem.stalls +
          g_ch[3].u_mem.stalls + g_ch[4].u_mem.stalls + g_ch[5].u_mem.stalls + g_ch[6].u_mem.stalls + g_ch[7].u_mem.stalls);
    for (int p = 0; p < NPU; p++) count($sformatf("groups run by PU %0d", p), pu_groups[p]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
