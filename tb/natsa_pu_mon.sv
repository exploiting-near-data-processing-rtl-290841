// natsa_pu_mon -- passive monitor bound into every natsa_pu by the end-to-end
// testbenches. Counts DPU and DPUU loads of the q registers, distance steps
// with masked lanes, and, one cycle after each distance step, whether lane 0's
// column PUU replaced or kept its entry and whether the distance came from a
// flat window.
module natsa_pu_mon
  import natsa_pkg::*;
#(
  parameter int unsigned LANES = 4
) (
  input logic             clk,
  input logic             rst_n,
  input logic             q_load,
  input logic             qsel,
  input logic             d_load,
  input logic [LANES-1:0] lane_valid,
  input fix_t             d0,
  input logic             take0
);
  logic after_d;
  always @(posedge clk) begin
    after_d <= rst_n && d_load;
    if (rst_n) begin
      if (q_load && !qsel) natsa_tb_cnt_pkg::n_init++;
      if (q_load && qsel)  natsa_tb_cnt_pkg::n_update++;
      if (d_load && !(&lane_valid)) natsa_tb_cnt_pkg::n_masked++;
      if (after_d && lane_valid[0]) begin
        if (take0) natsa_tb_cnt_pkg::n_take++; else natsa_tb_cnt_pkg::n_keep++;
        if (d0 == FIX_MAX) natsa_tb_cnt_pkg::n_flat++;
      end
    end
  end
endmodule
