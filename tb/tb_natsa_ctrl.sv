// tb_natsa_ctrl -- self-checking testbench of the PU control unit.
// Runs the control unit alone against an HBM channel model with random
// back-pressure, with stand-in PUU results that encode row and lane. For
// several diagonal groups it checks the exact sequence of read addresses
// (init phase, then six operands per row and lane, clamped at the ends), the
// exact sequence of write-backs (row profile, then only the valid lanes'
// column profiles), the scratchpad contents seen by the datapath at each
// distance step, and the counts of DPU, q-register and distance strobes.
module tb_natsa_ctrl;
  import natsa_pkg::*;

  localparam int L = 4;
  localparam int WORDS = 2048;

  logic clk = 0, rst_n = 0;
  idx_t n, m, grp_k;
  layout_t layout;
  logic grp_valid = 0, grp_ready, grp_done;
  mem_req_t req;
  logic mem_ready;
  mem_rsp_t rsp;
  logic spm_we;
  logic [7:0] spm_waddr;
  logic [DW-1:0] spm_wdata;
  idx_t row_i, diag_k;
  logic [L-1:0] lane_valid;
  logic dpu_clr, dpu_en, qsel, q_load, d_load;
  fix_t pp_i_new;
  idx_t ii_i_new;
  fix_t pp_j_new [L];
  idx_t ii_j_new [L];

  int checks = 0, failures = 0;

  natsa_ctrl #(.LANES(L)) dut (.*);
  hbm_model #(.WORDS(WORDS), .LAT(3), .STALL_PCT(25)) u_mem (.clk, .rst_n, .req, .ready(mem_ready), .rsp);

  always #5 clk = ~clk;

  // Stand-in PUU results.
  always_comb begin
    pp_i_new = fix_t'(32'h0010_0000 + row_i);
    ii_i_new = idx_t'(16'h4000 + row_i);
    for (int l = 0; l < L; l++) begin
      pp_j_new[l] = fix_t'(32'h0020_0000 + 32'(l) * 32'h1000 + row_i);
      ii_j_new[l] = idx_t'(16'h6000 + 16'(l) * 16'h100 + row_i);
    end
  end

  function automatic logic [31:0] pattern(int a);
    return 32'(a) * 32'h9E37 + 32'h55;
  endfunction

  // Observed traffic.
  int rd_q [$];
  logic [63:0] wr_q [$];
  int n_dpu_en, n_qload_dpu, n_qload_dpuu, n_dload, n_done, n_stall;
  logic [31:0] spm [256];

  always @(posedge clk) if (rst_n) begin
    if (req.valid && mem_ready) begin
      if (req.we) wr_q.push_back({32'(req.addr), req.wdata});
      else        rd_q.push_back(int'(req.addr));
    end
    if (req.valid && !mem_ready) n_stall++;
    if (spm_we) spm[spm_waddr] <= spm_wdata;
    if (dpu_en) n_dpu_en++;
    if (q_load && !qsel) n_qload_dpu++;
    if (q_load && qsel)  n_qload_dpuu++;
    if (d_load) begin
      n_dload++;
      // operands seen by the datapath at the distance step of row row_i
      for (int g = 0; g <= L; g++) begin
        int x, np_;
        np_ = n - m + 1;
        x = (g == 0) ? row_i : row_i + diag_k + g - 1;
        if (x > np_ - 1) x = np_ - 1;
        checks++;
        if (spm[8*g+0] !== u_mem.mem[layout.t + x] ||
            spm[8*g+1] !== u_mem.mem[layout.t + ((x + m > n - 1) ? n - 1 : x + m)] ||
            spm[8*g+2] !== u_mem.mem[layout.mu + x] || spm[8*g+3] !== u_mem.mem[layout.sig + x] ||
            spm[8*g+4] !== u_mem.mem[layout.pp + x] || spm[8*g+5] !== u_mem.mem[layout.ii + x]) begin
          failures++;
          $display("FAIL scratchpad operands row %0d set %0d", row_i, g);
        end
      end
    end
    if (grp_done) n_done++;
  end

  task automatic run_group(int nn, int mm, int k);
    int np_, rows, x, idx;
    int exp_rd [$];
    logic [63:0] exp_wr [$];
    n = idx_t'(nn); m = idx_t'(mm);
    np_ = nn - mm + 1;
    rows = np_ - k;
    // refresh memory so reads are recognisable
    for (int a = 0; a < WORDS; a++) u_mem.mem[a] = pattern(a);
    rd_q.delete(); wr_q.delete();
    n_dpu_en = 0; n_qload_dpu = 0; n_qload_dpuu = 0; n_dload = 0; n_done = 0;
    // expected reads
    for (int s = 0; s < mm; s++) begin
      exp_rd.push_back(layout.t + s);
      for (int l = 0; l < L; l++) begin
        x = k + l + s; if (x > nn - 1) x = nn - 1;
        exp_rd.push_back(layout.t + x);
      end
    end
    for (int i = 0; i < rows; i++) begin
      for (int g = 0; g <= L; g++) begin
        int xm;
        x = (g == 0) ? i : i + k + g - 1;
        if (x > np_ - 1) x = np_ - 1;
        xm = x + mm; if (xm > nn - 1) xm = nn - 1;
        exp_rd.push_back(layout.t + x);   exp_rd.push_back(layout.t + xm);
        exp_rd.push_back(layout.mu + x);  exp_rd.push_back(layout.sig + x);
        exp_rd.push_back(layout.pp + x);  exp_rd.push_back(layout.ii + x);
      end
      exp_wr.push_back({32'(layout.pp + i), 32'h0010_0000 + 32'(i)});
      exp_wr.push_back({32'(layout.ii + i), 32'h4000 + 32'(i)});
      for (int l = 0; l < L; l++) if (i + k + l <= np_ - 1) begin
        exp_wr.push_back({32'(layout.pp + i + k + l), 32'h0020_0000 + 32'(l) * 32'h1000 + 32'(i)});
        exp_wr.push_back({32'(layout.ii + i + k + l), 32'h6000 + 32'(l) * 32'h100 + 32'(i)});
      end
    end
    @(negedge clk);
    checks++; if (!grp_ready) begin failures++; $display("FAIL not ready"); end
    grp_valid = 1; grp_k = idx_t'(k);
    @(negedge clk) grp_valid = 0;
    while (!grp_done) @(negedge clk);
    @(negedge clk);
    checks++;
    if (rd_q.size() != exp_rd.size()) begin
      failures++; $display("FAIL k=%0d: %0d reads, expected %0d", k, rd_q.size(), exp_rd.size());
    end
    idx = 0;
    foreach (exp_rd[e]) if (e < rd_q.size() && rd_q[e] != exp_rd[e]) idx++;
    checks++; if (idx != 0) begin failures++; $display("FAIL k=%0d: %0d read addresses differ", k, idx); end
    checks++;
    if (wr_q.size() != exp_wr.size()) begin
      failures++; $display("FAIL k=%0d: %0d writes, expected %0d", k, wr_q.size(), exp_wr.size());
    end
    idx = 0;
    foreach (exp_wr[e]) if (e < wr_q.size() && wr_q[e] != exp_wr[e]) idx++;
    checks++; if (idx != 0) begin failures++; $display("FAIL k=%0d: %0d writes differ", k, idx); end
    checks++; if (n_dpu_en != mm) begin failures++; $display("FAIL dpu_en count %0d", n_dpu_en); end
    checks++; if (n_qload_dpu != 1 || n_qload_dpuu != rows) begin
      failures++; $display("FAIL q loads %0d/%0d", n_qload_dpu, n_qload_dpuu); end
    checks++; if (n_dload != rows) begin failures++; $display("FAIL d loads %0d", n_dload); end
    checks++; if (n_done != 1 || !grp_ready) begin failures++; $display("FAIL done %0d", n_done); end
  endtask

  initial begin
    layout.t = 0; layout.mu = 256; layout.sig = 512; layout.pp = 768; layout.ii = 1024;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_group(40, 6, 2);     // long group, all lanes valid for most rows
    run_group(40, 6, 33);    // last group: lanes run past the end
    run_group(24, 8, 15);    // single row
    run_group(64, 16, 20);
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
