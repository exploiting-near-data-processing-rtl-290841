// natsa_dispatch -- workload partitioner of NATSA.
//
// The upper triangle of the distance matrix, from diagonal excl (the exclusion
// zone that keeps trivial self-matches out) to diagonal np-1, is cut into
// groups of LANES adjacent diagonals; group g starts at diagonal
// k = excl + g*LANES. Diagonal k has np-k cells, so early groups are long and
// late groups short. To balance the PUs the partitioner hands out groups from
// both ends alternately (0, G-1, 1, G-2, ...), each to whichever PU is idle
// (round robin among idle PUs). Because every group spans the whole time span
// of its diagonals, a run stopped early still holds a valid, if approximate,
// profile (the anytime property).
//
// The paper states only that its partitioning balances load and preserves the
// anytime property; this particular order and the dynamic assignment are this
// design's choices.
//
// Interface: start (one cycle, while idle) begins a run over n, m, excl.
// grp_valid[p] is held until PU p accepts with grp_ready[p]; grp_done[p]
// pulses when PU p finishes a group. progress counts finished groups;
// done rises when all G groups have finished and stays until the next start.
module natsa_dispatch
  import natsa_pkg::*;
#(
  parameter int unsigned NPU   = 8,
  parameter int unsigned LANES = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  idx_t           n,
  input  idx_t           m,
  input  idx_t           excl,
  output logic [NPU-1:0] grp_valid,
  output idx_t           grp_k,
  input  logic [NPU-1:0] grp_ready,
  input  logic [NPU-1:0] grp_done,
  output logic           busy,
  output logic           done,
  output idx_t           num_groups,
  output idx_t           progress
);

  localparam int unsigned PW = (NPU > 1) ? $clog2(NPU) : 1;

  idx_t np, span;
  idx_t lo, hi;          // next group from the front / from the back
  logic from_hi;         // which end the next group comes from
  idx_t issued;
  logic [PW-1:0] rr;     // round-robin pointer
  logic [PW-1:0] pick;
  logic          found;
  idx_t          g_next;

  assign np         = n - m + idx_t'(1);
  assign span       = (np > excl) ? np - excl : '0;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     num_groups <= '0;
    else if (start) num_groups <= idx_t'((32'(span) + LANES - 1) / LANES);

  assign g_next = from_hi ? hi : lo;
  assign grp_k  = excl + idx_t'(32'(g_next) * LANES);

  // First idle PU at or after the round-robin pointer.
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int o = 0; o < NPU; o++) begin
      automatic logic [PW-1:0] p = PW'((32'(rr) + 32'(o)) % NPU);
      if (!found && grp_ready[p]) begin
        found = 1'b1;
        pick  = p;
      end
    end
  end

  logic offer;
  assign offer = busy && (issued < num_groups) && found;

  always_comb begin
    grp_valid = '0;
    if (offer) grp_valid[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      lo       <= '0;
      hi       <= '0;
      from_hi  <= 1'b0;
      issued   <= '0;
      progress <= '0;
      rr       <= '0;
    end else if (start && !busy) begin
      busy     <= 1'b1;
      done     <= 1'b0;
      lo       <= '0;
      hi       <= idx_t'((32'(span) + LANES - 1) / LANES) - idx_t'(1);
      from_hi  <= 1'b0;
      issued   <= '0;
      progress <= '0;
    end else if (busy) begin
      // PUs accept in the same cycle the offer is made (grp_ready is high).
      if (offer) begin
        issued  <= issued + idx_t'(1);
        from_hi <= !from_hi;
        if (from_hi) hi <= hi - idx_t'(1);
        else         lo <= lo + idx_t'(1);
        rr      <= PW'((32'(pick) + 1) % NPU);
      end
      progress <= progress + idx_t'($countones(grp_done));
      if (issued == num_groups && progress == num_groups) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

endmodule
