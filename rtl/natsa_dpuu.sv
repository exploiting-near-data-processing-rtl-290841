// natsa_dpuu -- Dot Product Update Unit (DPUU) of one vector lane of a NATSA PU.
//
// Walks one step down a diagonal of the distance matrix in constant time:
//   q_{i+1,j+1} = q_{i,j} + T[i+m]*T[j+m] - T[i]*T[j]
// (two multipliers, an adder and a subtractor, as drawn for the DPUU). This is
// the recurrence that lets matrix profile avoid recomputing every window's dot
// product from scratch.
//
// Interface and timing: purely combinational; the PU registers the result in
// its q_{i,j} register when the control unit moves to the next row. Signed
// fixed point with truncating multiplies (this design's choice of format).
module natsa_dpuu
  import natsa_pkg::*;
(
  input  fix_t q,       // q_{i,j}
  input  fix_t t_i,     // T[i]
  input  fix_t t_j,     // T[j]
  input  fix_t t_im,    // T[i+m]
  input  fix_t t_jm,    // T[j+m]
  output fix_t q_next   // q_{i+1,j+1}
);

  always_comb q_next = q + fmul(t_im, t_jm) - fmul(t_i, t_j);

endmodule
