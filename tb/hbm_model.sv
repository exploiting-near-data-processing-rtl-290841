// hbm_model -- behavioural model of one HBM channel, for simulation only.
//
// A word-addressed memory of WORDS x 32 bits behind the request/response port
// of natsa_pkg: one request per cycle while ready is high, reads answered in
// order LAT cycles later, writes applied at once. With STALL_PCT > 0, ready
// drops at random to exercise back-pressure. Testbenches fill and read `mem`
// hierarchically, as the host would through its own HBM path. Not synthesizable
// timing of a real HBM stack: no banks, refresh or row-buffer effects.
module hbm_model
  import natsa_pkg::*;
#(
  parameter int unsigned WORDS     = 4096,
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  output logic     ready,
  output mem_rsp_t rsp
);

  logic [DW-1:0] mem [WORDS];
  mem_rsp_t      pipe [LAT];
  int unsigned   stalls;

  assign rsp = pipe[LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LAT; s++) pipe[s] <= '0;
      ready  <= 1'b1;
      stalls <= 0;
    end else begin
      for (int s = LAT - 1; s > 0; s--) pipe[s] <= pipe[s-1];
      pipe[0] <= '0;
      if (req.valid && ready) begin
        assert (32'(req.addr) < WORDS) else $error("hbm_model: address %0h out of range", req.addr);
        if (req.we) mem[req.addr[$clog2(WORDS)-1:0]] <= req.wdata;
        else begin
          pipe[0].valid <= 1'b1;
          pipe[0].rdata <= mem[req.addr[$clog2(WORDS)-1:0]];
        end
      end
      ready <= (STALL_PCT == 0) || (($urandom % 100) >= STALL_PCT);
      if (req.valid && !ready) stalls <= stalls + 1;
    end
  end

endmodule
