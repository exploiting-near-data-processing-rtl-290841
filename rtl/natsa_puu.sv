// natsa_puu -- Profile Update Unit (PUU) of one vector lane of a NATSA PU.
//
// Keeps the running minimum of the matrix profile: a "<=" comparator checks the
// new distance d_{i,j} against the stored profile value PP_i, and a multiplexer
// passes on either (d_{i,j}, j) or the old (PP_i, II_i), as drawn for the PUU.
// An equal distance replaces the stored one (the comparator is "<=").
//
// Interface and timing: combinational. valid=0 (a lane that runs past the end
// of the matrix) passes the old value through; the valid input is this
// design's addition for lanes at the edge of the matrix.
module natsa_puu
  import natsa_pkg::*;
(
  input  logic valid,
  input  fix_t d,       // d_{i,j}
  input  idx_t j,       // index of the matching window
  input  fix_t pp_in,   // PP_i
  input  idx_t ii_in,   // II_i
  output fix_t pp_out,
  output idx_t ii_out
);

  logic take;

  always_comb begin
    take   = valid && (d <= pp_in);
    pp_out = take ? d : pp_in;
    ii_out = take ? j : ii_in;
  end

endmodule
