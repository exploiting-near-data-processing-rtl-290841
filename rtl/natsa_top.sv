// natsa_top -- NATSA, a near-data matrix-profile accelerator in the logic
// layer next to an HBM stack.
//
// NPU processing units (natsa_pu) each own one HBM channel (8 channels, one PU
// per channel by default); the workload partitioner (natsa_dispatch) hands
// each idle PU the next group of LANES adjacent diagonals of the distance
// matrix. Every channel holds its own copy of the inputs (T, mu, sigma) and a
// private profile (PP, II) at the addresses given by `layout`; the PUs never
// share a profile word, so no coherence or atomics are needed. The host fills
// the inputs, sets every PP to FIX_MAX and every II to 0, starts the run, and
// at the end takes, for each index, the minimum over the channels' private
// profiles (ties: lowest channel number first). That host-side preparation and
// final reduction, the channel copies and one-PU-per-channel are this design's
// choices; the paper states only that the PUs sit next to the 8-channel HBM
// interface.
//
// Interface: start (one cycle) with n, m, excl; busy while running; done
// after the last group; progress = groups finished of num_groups. The HBM
// channels appear as arrays of plain request/response structs (natsa_pkg):
// mem_req[c], mem_ready[c], mem_rsp[c]. The HBM controller/PHY itself is
// outside this design.
module natsa_top
  import natsa_pkg::*;
#(
  parameter int unsigned NPU   = 8,
  parameter int unsigned LANES = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  idx_t     n,
  input  idx_t     m,
  input  idx_t     excl,
  input  layout_t  layout,
  output logic     busy,
  output logic     done,
  output idx_t     num_groups,
  output idx_t     progress,
  output mem_req_t mem_req   [NPU],
  input  logic     mem_ready [NPU],
  input  mem_rsp_t mem_rsp   [NPU]
);

  logic [NPU-1:0] grp_valid, grp_ready, grp_done;
  idx_t           grp_k;

  natsa_dispatch #(.NPU(NPU), .LANES(LANES)) u_dispatch (
    .clk, .rst_n, .start, .n, .m, .excl,
    .grp_valid, .grp_k, .grp_ready, .grp_done,
    .busy, .done, .num_groups, .progress
  );

  for (genvar p = 0; p < NPU; p++) begin : g_pu
    natsa_pu #(.LANES(LANES)) u_pu (
      .clk, .rst_n, .n, .m, .layout,
      .grp_valid(grp_valid[p]), .grp_k, .grp_ready(grp_ready[p]), .grp_done(grp_done[p]),
      .req(mem_req[p]), .mem_ready(mem_ready[p]), .rsp(mem_rsp[p])
    );
  end

endmodule
