// natsa_pu -- one NATSA processing unit (PU).
//
// A PU holds LANES vector lanes, each a DPU, a DPUU, a q_{i,j} select
// multiplexer with its q register, a DCU with its d register and two PUUs, plus
// one control unit and the 1 KB scratchpad. Lane l computes cell (i, i+k+l) of
// the distance matrix, so the lanes of a PU sweep LANES adjacent diagonals
// row by row and share the row operands T[i], T[i+m], mu_i, sigma_i, PP_i.
//
// Dataflow per lane (as in the PU drawing): DPU -> mux (step 2) -> q register
// -> DCU -> d register -> PUU -> PP/II; the q register also feeds the DPUU
// (step 1), whose q_{i+1,j+1} comes back through the mux for the next row.
// Matrix profile is symmetric, so each distance updates both the row profile
// PP_i (with index j) and the column profile PP_j (with index i). The column
// update uses one PUU per lane; the row update chains the lanes' second PUUs,
// lane 0 first, so PP_i ends as the minimum over all lanes. The second PUU per
// lane and the chaining are this design's choices; the drawing shows one PUU
// stack updating PP_i.
//
// Interface: see natsa_ctrl (group handshake, HBM channel port). Timing is set
// by the control unit: the PU is bound by its memory channel.
module natsa_pu
  import natsa_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned SPM_WORDS = 256
) (
  input  logic     clk,
  input  logic     rst_n,
  input  idx_t     n,
  input  idx_t     m,
  input  layout_t  layout,
  input  logic     grp_valid,
  input  idx_t     grp_k,
  output logic     grp_ready,
  output logic     grp_done,
  output mem_req_t req,
  input  logic     mem_ready,
  input  mem_rsp_t rsp
);

  localparam int unsigned NG  = LANES + 1;
  localparam int unsigned NRD = 6 * NG;
  localparam int unsigned SAW = $clog2(SPM_WORDS);

  // The operand layout needs 8 words per operand set.
  initial assert (8 * NG <= SPM_WORDS && SAW == 8)
    else $error("natsa_pu: scratchpad too small for %0d lanes", LANES);

  logic           spm_we;
  logic [7:0]     spm_waddr;
  logic [DW-1:0]  spm_wdata;
  logic [SAW-1:0] raddr [NRD];
  logic [DW-1:0]  rdata [NRD];

  idx_t row_i, diag_k;
  logic [LANES-1:0] lane_valid;
  logic dpu_clr, dpu_en, qsel, q_load, d_load;

  fix_t pp_i_new;
  idx_t ii_i_new;
  fix_t pp_j_new [LANES];
  idx_t ii_j_new [LANES];

  natsa_ctrl #(.LANES(LANES)) u_ctrl (
    .clk, .rst_n, .n, .m, .layout,
    .grp_valid, .grp_k, .grp_ready, .grp_done,
    .req, .mem_ready, .rsp,
    .spm_we, .spm_waddr, .spm_wdata,
    .row_i, .diag_k, .lane_valid,
    .dpu_clr, .dpu_en, .qsel, .q_load, .d_load,
    .pp_i_new, .ii_i_new, .pp_j_new, .ii_j_new
  );

  // Read port 6*g+f reads slot 8*g+f (operand set g, field f).
  always_comb
    for (int g = 0; g < NG; g++)
      for (int f = 0; f < 6; f++)
        raddr[6*g+f] = SAW'(8 * g + f);

  natsa_scratchpad #(.DW(DW), .WORDS(SPM_WORDS), .NRD(NRD)) u_spm (
    .clk, .we(spm_we), .waddr(spm_waddr[SAW-1:0]), .wdata(spm_wdata),
    .raddr, .rdata
  );

  // Row operands (set 0).
  fix_t t_i, t_im, mu_i, sig_i, pp_i;
  idx_t ii_i;
  assign t_i   = fix_t'(rdata[0]);
  assign t_im  = fix_t'(rdata[1]);
  assign mu_i  = fix_t'(rdata[2]);
  assign sig_i = fix_t'(rdata[3]);
  assign pp_i  = fix_t'(rdata[4]);
  assign ii_i  = idx_t'(rdata[5]);

  // Row-profile chain through the lanes.
  fix_t chain_pp [LANES+1];
  idx_t chain_ii [LANES+1];
  assign chain_pp[0] = pp_i;
  assign chain_ii[0] = ii_i;
  assign pp_i_new    = chain_pp[LANES];
  assign ii_i_new    = chain_ii[LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    localparam int unsigned B = 6 * (l + 1);
    fix_t t_j, t_jm, mu_j, sig_j, pp_j;
    idx_t ii_j, j_idx;
    fix_t q_dpu, q_dpuu, q_mux, q_reg, d_comb, d_reg;

    assign t_j   = fix_t'(rdata[B+0]);
    assign t_jm  = fix_t'(rdata[B+1]);
    assign mu_j  = fix_t'(rdata[B+2]);
    assign sig_j = fix_t'(rdata[B+3]);
    assign pp_j  = fix_t'(rdata[B+4]);
    assign ii_j  = idx_t'(rdata[B+5]);
    assign j_idx = row_i + diag_k + idx_t'(l);

    natsa_dpu u_dpu (
      .clk, .rst_n, .clr(dpu_clr), .en(dpu_en), .t_i, .t_j, .q(q_dpu)
    );

    natsa_dpuu u_dpuu (
      .q(q_reg), .t_i, .t_j, .t_im, .t_jm, .q_next(q_dpuu)
    );

    // Step 2: the q_{i,j} select multiplexer and register.
    assign q_mux = qsel ? q_dpuu : q_dpu;
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)      q_reg <= '0;
      else if (q_load) q_reg <= q_mux;

    natsa_dcu u_dcu (
      .q(q_reg), .m, .mu_i, .mu_j, .sig_i, .sig_j, .d(d_comb)
    );

    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)      d_reg <= '0;
      else if (d_load) d_reg <= d_comb;

    // Column profile PP_j, matched by window i.
    natsa_puu u_puu_col (
      .valid(lane_valid[l]), .d(d_reg), .j(row_i),
      .pp_in(pp_j), .ii_in(ii_j), .pp_out(pp_j_new[l]), .ii_out(ii_j_new[l])
    );

    // Row profile PP_i, matched by window j.
    natsa_puu u_puu_row (
      .valid(lane_valid[l]), .d(d_reg), .j(j_idx),
      .pp_in(chain_pp[l]), .ii_in(chain_ii[l]),
      .pp_out(chain_pp[l+1]), .ii_out(chain_ii[l+1])
    );
  end

endmodule
