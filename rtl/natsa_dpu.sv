// natsa_dpu -- Dot Product Unit (DPU) of one vector lane of a NATSA PU.
//
// Computes the first dot product of a diagonal, q_{i,j} = sum_{s<m} T[i+s]*T[j+s],
// by multiplying one pair of samples per enabled cycle and adding the product
// into an accumulator register, exactly as drawn for the DPU (multiplier, adder,
// "reg" feedback). Samples and the result are signed fixed point (natsa_pkg).
//
// Interface: clr zeroes the accumulator (priority over en); en adds
// fmul(t_i, t_j). q is the accumulator, valid the cycle after the last en.
// Timing: one product per cycle, so a window of m samples takes m cycles.
// The fixed-point format and the clear input are this design's choices.
module natsa_dpu
  import natsa_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic en,
  input  fix_t t_i,
  input  fix_t t_j,
  output fix_t q
);

  fix_t acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= '0;
    else if (en)  acc <= acc + fmul(t_i, t_j);
  end

  assign q = acc;

endmodule
