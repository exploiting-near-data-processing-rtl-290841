// natsa_dcu -- Distance Computation Unit (DCU) of one vector lane of a NATSA PU.
//
// Turns a dot product into the squared z-normalised Euclidean distance of two
// windows of length m:
//   d_{i,j} = 2 * ( m - (q_{i,j} - m*mu_i*mu_j) / (sigma_i*sigma_j) )
// which equals 2m(1 - (q - m mu_i mu_j)/(m sigma_i sigma_j)). The operator chain
// follows the DCU drawing: a multiplier for m*mu_i*mu_j, a subtractor from
// q_{i,j}, a multiplier for sigma_i*sigma_j, a divider, a subtraction from m and
// a left shift by one (times two). The square root is not taken: the squared
// distance orders matches the same way.
//
// Interface and timing: combinational; m is the integer window length. This
// design's choices: signed fixed point (natsa_pkg), truncating multiply and
// divide with the quotient saturated, and d = FIX_MAX when sigma_i*sigma_j <= 0 (a flat window never matches).
module natsa_dcu
  import natsa_pkg::*;
(
  input  fix_t q,
  input  idx_t m,
  input  fix_t mu_i,
  input  fix_t mu_j,
  input  fix_t sig_i,
  input  fix_t sig_j,
  output fix_t d
);

  fix_t mmu, num, den, quot, m_fix;
  logic signed [2*DW-1:0] num_w, den_w, quot_w;
  localparam logic signed [2*DW-1:0] QMAX = {{DW{1'b0}}, FIX_MAX};

  always_comb begin
    m_fix  = fix_t'({{(DW-IW){1'b0}}, m}) <<< FRAC;
    mmu    = fmul(mu_i, mu_j) * $signed({1'b0, m});
    num    = q - mmu;
    den    = fmul(sig_i, sig_j);
    num_w  = {{DW{num[DW-1]}}, num} <<< FRAC;
    den_w  = {{DW{den[DW-1]}}, den};
    if (den > 0) quot_w = num_w / den_w;
    else         quot_w = 0;
    // Saturate the quotient to the fixed-point range.
    if (quot_w > QMAX)       quot = FIX_MAX;
    else if (quot_w < -QMAX) quot = -FIX_MAX;
    else                               quot = fix_t'(quot_w);
    d      = (den > 0) ? (m_fix - quot) <<< 1 : FIX_MAX;
  end

endmodule
