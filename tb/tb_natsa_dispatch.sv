// tb_natsa_dispatch -- self-checking testbench of the workload partitioner.
// Three stand-in PUs take groups and finish them after random delays. Checks
// that every diagonal group is handed out exactly once, in the order
// 0, G-1, 1, G-2, ... (long and short groups alternating), only to idle PUs,
// that every PU gets work, that progress counts the finished groups and that
// done rises only after the last one; repeats for several series sizes,
// including one too short to have any group.
module tb_natsa_dispatch;
  import natsa_pkg::*;

  localparam int NPU = 3, L = 4;
  logic clk = 0, rst_n = 0, start = 0;
  idx_t n, m, excl, grp_k, num_groups, progress;
  logic [NPU-1:0] grp_valid, grp_ready, grp_done;
  logic busy, done;
  int checks = 0, failures = 0;
  int remaining [NPU];
  int got [$];
  int per_pu [NPU];

  natsa_dispatch #(.NPU(NPU), .LANES(L)) dut (.*);

  always #5 clk = ~clk;

  // Stand-in PUs.
  always_comb for (int p = 0; p < NPU; p++) grp_ready[p] = (remaining[p] == 0);
  always @(posedge clk) begin
    for (int p = 0; p < NPU; p++) begin
      grp_done[p] <= 1'b0;
      if (grp_valid[p]) begin
        if (!grp_ready[p]) begin failures++; $display("FAIL offer to busy PU %0d", p); end
        got.push_back(int'(grp_k));
        per_pu[p]++;
        remaining[p] <= 1 + $urandom % 20;
      end else if (remaining[p] == 1) begin
        remaining[p] <= 0;
        grp_done[p] <= 1'b1;
      end else if (remaining[p] > 1) remaining[p] <= remaining[p] - 1;
    end
  end

  task automatic run(int nn, int mm, int ee);
    int g, lo, hi, cyc;
    n = idx_t'(nn); m = idx_t'(mm); excl = idx_t'(ee);
    got.delete();
    for (int p = 0; p < NPU; p++) per_pu[p] = 0;
    g = (nn - mm + 1 > ee) ? (nn - mm + 1 - ee + L - 1) / L : 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done && cyc < 10000) begin
      checks++;
      if (int'(progress) > g) begin failures++; $display("FAIL progress %0d > %0d", progress, g); end
      @(negedge clk); cyc++;
    end
    checks++; if (!done || busy) begin failures++; $display("FAIL run n=%0d never finished", nn); end
    checks++; if (int'(num_groups) != g || int'(progress) != g) begin
      failures++; $display("FAIL groups %0d progress %0d expected %0d", num_groups, progress, g); end
    checks++; if (got.size() != g) begin failures++; $display("FAIL %0d groups handed out, expected %0d", got.size(), g); end
    lo = 0; hi = g - 1;
    foreach (got[e]) begin
      int exp_g;
      if (e % 2 == 0) begin exp_g = lo; lo++; end
      else begin exp_g = hi; hi--; end
      checks++;
      if (got[e] != ee + exp_g * L) begin failures++; $display("FAIL order: item %0d k=%0d expected %0d", e, got[e], ee + exp_g * L); end
    end
    if (g >= 2 * NPU) for (int p = 0; p < NPU; p++) begin
      checks++; if (per_pu[p] == 0) begin failures++; $display("FAIL PU %0d idle", p); end
    end
  endtask

  initial begin
    for (int p = 0; p < NPU; p++) remaining[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(100, 10, 3);
    run(64, 8, 2);
    run(33, 4, 5);
    run(10, 8, 4);   // np = 3 <= excl: nothing to do
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
