// natsa_dispatch_mon -- passive monitor bound into natsa_dispatch by the
// end-to-end testbenches. Counts the groups each PU receives and whether each
// group came from the long (low k) or the short (high k) half of the partition.
module natsa_dispatch_mon
  import natsa_pkg::*;
#(
  parameter int unsigned NPU   = 8,
  parameter int unsigned LANES = 4
) (
  input logic           clk,
  input logic           rst_n,
  input logic [NPU-1:0] grp_valid,
  input idx_t           grp_k,
  input idx_t           excl,
  input idx_t           num_groups
);
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NPU; p++) if (grp_valid[p]) begin
      natsa_tb_cnt_pkg::pu_groups[p]++;
      if (int'(grp_k) >= int'(excl) + (int'(num_groups) / 2) * int'(LANES)) natsa_tb_cnt_pkg::n_hi_end++;
      else natsa_tb_cnt_pkg::n_lo_end++;
    end
endmodule
