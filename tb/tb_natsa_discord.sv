// tb_natsa_discord -- motif and discord discovery on the full-size NATSA.
// The series is a periodic waveform (period P) with one corrupted stretch, the
// kind of signal the accelerator is meant for (for example a heartbeat trace
// with one abnormal beat). After an end-to-end run at the default size
// (8 PUs x 4 lanes) and the host-side reduction of the eight private
// profiles, it checks that
//   * every profile entry equals a brute-force matrix profile,
//   * every II entry names a window at that distance, outside the exclusion zone,
//   * the discord (largest profile value) lies on the corrupted stretch,
//   * windows far from the corruption find their repeat one or more periods
//     away (a motif) at a distance near zero,
// and it reports the run's cycle count.
module tb_natsa_discord;
  import natsa_pkg::*;
  import natsa_ref_pkg::*;

  localparam int NPU = 8;
  localparam int N = 200, M = 16, EXCL = 4, P = 25;
  localparam int BAD = 120;            // first sample of the corrupted stretch
  localparam int NP = N - M + 1;
  localparam int WORDS = 2048;

  logic clk = 0, rst_n = 0, start = 0;
  layout_t layout;
  logic busy, done;
  idx_t num_groups, progress;
  mem_req_t mem_req [NPU];
  logic     mem_ready [NPU];
  mem_rsp_t mem_rsp [NPU];
  int checks = 0, failures = 0;
  int T [N], MU [NP], SG [NP], PPr [NP], IIr [NP];

  natsa_top dut (.clk, .rst_n, .start, .n(idx_t'(N)), .m(idx_t'(M)), .excl(idx_t'(EXCL)),
    .layout, .busy, .done, .num_groups, .progress, .mem_req, .mem_ready, .mem_rsp);

  for (genvar c = 0; c < NPU; c++) begin : g_ch
    hbm_model #(.WORDS(WORDS), .LAT(8), .STALL_PCT(5)) u_mem (
      .clk, .rst_n, .req(mem_req[c]), .ready(mem_ready[c]), .rsp(mem_rsp[c]));
  end

  always #5 clk = ~clk;

  function automatic int dref(int i, int j);
    int q = 0;
    for (int s = 0; s < M; s++) q += rmul(T[i+s], T[j+s]);
    return rdist(q, M, MU[i], MU[j], SG[i], SG[j]);
  endfunction

  task automatic fill(int a, logic [31:0] v);
    g_ch[0].u_mem.mem[a] = v; g_ch[1].u_mem.mem[a] = v; g_ch[2].u_mem.mem[a] = v; g_ch[3].u_mem.mem[a] = v;
    g_ch[4].u_mem.mem[a] = v; g_ch[5].u_mem.mem[a] = v; g_ch[6].u_mem.mem[a] = v; g_ch[7].u_mem.mem[a] = v;
  endtask

  function automatic int rd_pp(int c, int x);
    case (c)
      0: return g_ch[0].u_mem.mem[layout.pp + x];  1: return g_ch[1].u_mem.mem[layout.pp + x];
      2: return g_ch[2].u_mem.mem[layout.pp + x];  3: return g_ch[3].u_mem.mem[layout.pp + x];
      4: return g_ch[4].u_mem.mem[layout.pp + x];  5: return g_ch[5].u_mem.mem[layout.pp + x];
      6: return g_ch[6].u_mem.mem[layout.pp + x];  default: return g_ch[7].u_mem.mem[layout.pp + x];
    endcase
  endfunction

  function automatic int rd_ii(int c, int x);
    case (c)
      0: return g_ch[0].u_mem.mem[layout.ii + x];  1: return g_ch[1].u_mem.mem[layout.ii + x];
      2: return g_ch[2].u_mem.mem[layout.ii + x];  3: return g_ch[3].u_mem.mem[layout.ii + x];
      4: return g_ch[4].u_mem.mem[layout.ii + x];  5: return g_ch[5].u_mem.mem[layout.ii + x];
      6: return g_ch[6].u_mem.mem[layout.ii + x];  default: return g_ch[7].u_mem.mem[layout.ii + x];
    endcase
  endfunction

  int cycles, discord, dmax, motifs_ok, far;

  initial begin
    layout.t = 0; layout.mu = 256; layout.sig = 512; layout.pp = 1024; layout.ii = 1280;
    // periodic waveform: a sharp spike on a slow sine, with a little noise;
    // samples rounded to 1/256 so products are exact in the fixed-point format
    for (int x = 0; x < N; x++) begin
      real ph, v;
      ph = 6.283185307 * real'(x % P) / real'(P);
      v  = $sin(ph) + ((x % P == 5) ? 2.0 : 0.0) + real'(int'($urandom % 9) - 4) / 256.0;
      if (x >= BAD && x < BAD + 10) v = -0.5 * $cos(3.0 * ph);     // abnormal beat
      T[x] = $rtoi(v * 256.0) <<< 8;
    end
    for (int x = 0; x < NP; x++) begin
      real mu, sg;
      mu = 0; sg = 0;
      for (int s = 0; s < M; s++) mu += real'(T[x+s]) / 65536.0 / M;
      for (int s = 0; s < M; s++) sg += (real'(T[x+s]) / 65536.0 - mu) ** 2 / M;
      MU[x] = to_fix(mu); SG[x] = to_fix($sqrt(sg));
    end
    for (int a = 0; a < WORDS; a++) begin
      logic [31:0] v;
      v = 0;
      if (a >= layout.t && a < layout.t + N) v = T[a - layout.t];
      else if (a >= layout.mu  && a < layout.mu  + NP) v = MU[a - layout.mu];
      else if (a >= layout.sig && a < layout.sig + NP) v = SG[a - layout.sig];
      else if (a >= layout.pp  && a < layout.pp  + NP) v = FIX_MAX;
      fill(a, v);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    $display("run: n=%0d m=%0d, %0d groups on %0d PUs, %0d cycles", N, M, num_groups, NPU, cycles);

    // host reduction
    for (int x = 0; x < NP; x++) begin
      PPr[x] = rd_pp(0, x); IIr[x] = rd_ii(0, x);
      for (int c = 1; c < NPU; c++) if (rd_pp(c, x) < PPr[x]) begin PPr[x] = rd_pp(c, x); IIr[x] = rd_ii(c, x); end
    end
    discord = 0; dmax = PPr[0]; motifs_ok = 0; far = 0;
    for (int x = 0; x < NP; x++) begin
      int best;
      best = int'(FIX_MAX);
      for (int y = 0; y < NP; y++)
        if ((x - y >= EXCL || y - x >= EXCL) && dref(x, y) < best) best = dref(x, y);
      checks++;
      if (PPr[x] != best) begin failures++; $display("FAIL PP[%0d]=%0d expected %0d", x, PPr[x], best); end
      checks++;
      if (IIr[x] >= NP || (x - IIr[x] < EXCL && IIr[x] - x < EXCL) || dref(x, IIr[x]) != PPr[x]) begin
        failures++; $display("FAIL II[%0d]=%0d does not match PP", x, IIr[x]);
      end
      if (PPr[x] > dmax) begin dmax = PPr[x]; discord = x; end
      if (x + M <= BAD - P || x >= BAD + 10 + P) begin
        far++;
        // a repeat lies a whole number of periods away, at a distance near zero
        if ((IIr[x] - x) % P == 0 && PPr[x] < (1 <<< 16)) motifs_ok++;
      end
    end
    $display("discord at window %0d (profile %f), corrupted stretch %0d..%0d", discord,
             real'(dmax) / 65536.0, BAD, BAD + 9);
    $display("motifs: %0d of %0d windows away from the corruption match one or more periods away", motifs_ok, far);
    checks++;
    if (!(discord + M > BAD && discord < BAD + 10)) begin failures++; $display("FAIL discord not on the corrupted stretch"); end
    checks++;
    if (motifs_ok < far * 9 / 10) begin failures++; $display("FAIL too few periodic motifs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
