// natsa_ctrl -- control unit of a NATSA processing unit (PU).
//
// A PU computes the matrix-profile contribution of a group of LANES adjacent
// diagonals k, k+1, ..., k+LANES-1 of the distance matrix; lane l works on the
// cell (i, j) with j = i + k + l of row i. The control unit runs the group in
// two phases, matching steps 1 and 2 of the PU drawing:
//
//  * Init: for s = 0..m-1 it fetches T[s] and T[k+l+s] (one per lane) from the
//    HBM channel into the scratchpad and pulses dpu_en, so each lane's DPU
//    accumulates q_{0,k+l}. The select mux then loads the DPU result (qsel=0)
//    into the lane's q register.
//  * Rows: for i = 0, 1, ... it fetches, for row i and for each lane's column
//    j, the words T[x], T[x+m], mu[x], sigma[x], PP[x], II[x]; registers the
//    DCU distances (d_load); writes back the PUU results PP/II for row i and
//    for every valid column j; then loads q_{i+1,j+1} from the DPUU (qsel=1).
//    The group ends after row i = np-1-k (np = n-m+1, the profile length).
//
// Scratchpad layout: slot 8*g+f holds field f of operand set g, where g=0 is
// row i and g=1+l is lane l's column j; f = 0 T[x], 1 T[x+m], 2 mu, 3 sigma,
// 4 PP, 5 II. Lanes whose column lies past np-1 are invalid: their reads are
// clamped to valid addresses and their write-backs are skipped.
//
// Memory port: one request per cycle while mem_ready is high; read data come
// back in order on rsp; writes are posted. Group handshake: grp_ready is high
// when idle; grp_valid & grp_ready starts group grp_k; grp_done pulses at the end.
// Timing: about m*(LANES+1) + rows*(8*(LANES+1)) request slots plus memory
// latency per group, i.e. the PU is bound by its memory channel.
//
// The paper names the control unit and shows which units it drives; the
// phase sequence, the operand layout and the handshakes are this design's.
module natsa_ctrl
  import natsa_pkg::*;
#(
  parameter int unsigned LANES = 4,
  localparam int unsigned NG   = LANES + 1,       // operand sets per row
  localparam int unsigned SAW  = 8                // scratchpad address width
) (
  input  logic        clk,
  input  logic        rst_n,
  // run configuration
  input  idx_t        n,          // time-series length
  input  idx_t        m,          // window length
  input  layout_t     layout,
  // group handshake from the workload partitioner
  input  logic        grp_valid,
  input  idx_t        grp_k,
  output logic        grp_ready,
  output logic        grp_done,
  // HBM channel
  output mem_req_t    req,
  input  logic        mem_ready,
  input  mem_rsp_t    rsp,
  // scratchpad write port
  output logic           spm_we,
  output logic [SAW-1:0] spm_waddr,
  output logic [DW-1:0]  spm_wdata,
  // datapath control
  output idx_t        row_i,
  output idx_t        diag_k,
  output logic [LANES-1:0] lane_valid,
  output logic        dpu_clr,
  output logic        dpu_en,
  output logic        qsel,       // 0: DPU result, 1: DPUU result
  output logic        q_load,
  output logic        d_load,
  // PUU results to write back
  input  fix_t        pp_i_new,
  input  idx_t        ii_i_new,
  input  fix_t        pp_j_new [LANES],
  input  idx_t        ii_j_new [LANES]
);

  typedef enum logic [2:0] {S_IDLE, S_IFETCH, S_IACC, S_ILOAD, S_RFETCH, S_DIST, S_WB} state_t;
  state_t state;

  idx_t k, i, s, np;
  logic [7:0] iss, rcv, nitems;   // item counters of the current fetch/write-back

  assign np        = n - m + idx_t'(1);
  assign row_i     = i;
  assign diag_k    = k;
  assign grp_ready = (state == S_IDLE);

  always_comb
    for (int l = 0; l < LANES; l++)
      lane_valid[l] = (32'(i) + 32'(k) + 32'(l)) <= 32'(np) - 1;

  // Clamp an index into [0, lim].
  function automatic idx_t clampi(logic [31:0] x, idx_t lim);
    return (x > 32'(lim)) ? lim : idx_t'(x);
  endfunction

  // Address of fetch item `it` in the current phase.
  function automatic addr_t fetch_addr(logic [7:0] it);
    int unsigned g, f;
    logic [31:0] x;
    idx_t xc;
    if (state == S_IFETCH) begin
      x = (it == 0) ? 32'(s) : 32'(k) + 32'(it) - 1 + 32'(s);
      return layout.t + addr_t'(clampi(x, n - 1));
    end
    g  = int'(it) / 6;
    f  = int'(it) % 6;
    x  = (g == 0) ? 32'(i) : 32'(i) + 32'(k) + g - 1;
    xc = clampi(x, np - 1);
    case (f)
      0:       return layout.t   + addr_t'(xc);
      1:       return layout.t   + addr_t'(clampi(32'(xc) + 32'(m), n - 1));
      2:       return layout.mu  + addr_t'(xc);
      3:       return layout.sig + addr_t'(xc);
      4:       return layout.pp  + addr_t'(xc);
      default: return layout.ii  + addr_t'(xc);
    endcase
  endfunction

  // Scratchpad slot of fetch item `it`.
  function automatic logic [SAW-1:0] fetch_slot(logic [7:0] it);
    if (state == S_IFETCH) return SAW'(8 * it);
    return SAW'(8 * (int'(it) / 6) + int'(it) % 6);
  endfunction

  // Write-back items: 0 PP[i], 1 II[i], 2+2l PP[j_l], 3+2l II[j_l].
  int unsigned   wl;
  logic          wb_skip;
  addr_t         wb_addr;
  logic [DW-1:0] wb_data;
  always_comb begin
    wl      = (iss < 2) ? 0 : (int'(iss) - 2) / 2;
    wb_skip = 1'b0;
    wb_addr = '0;
    wb_data = '0;
    if (iss == 0) begin
      wb_addr = layout.pp + addr_t'(i);  wb_data = pp_i_new;
    end else if (iss == 1) begin
      wb_addr = layout.ii + addr_t'(i);  wb_data = DW'(ii_i_new);
    end else begin
      for (int l = 0; l < LANES; l++) begin
        if (wl == l) begin
          wb_skip = !lane_valid[l];
          wb_addr = (iss[0] ? layout.ii : layout.pp) + addr_t'(i) + addr_t'(k) + addr_t'(l);
          wb_data = iss[0] ? DW'(ii_j_new[l]) : pp_j_new[l];
        end
      end
    end
  end

  // Memory request and scratchpad write.
  always_comb begin
    req = '0;
    if (state == S_IFETCH || state == S_RFETCH) begin
      req.valid = (iss < nitems);
      req.we    = 1'b0;
      req.addr  = fetch_addr(iss);
    end else if (state == S_WB) begin
      req.valid = (iss < nitems) && !wb_skip;
      req.we    = 1'b1;
      req.addr  = wb_addr;
      req.wdata = wb_data;
    end
    spm_we    = rsp.valid;
    spm_waddr = fetch_slot(rcv);
    spm_wdata = rsp.rdata;
  end

  assign dpu_en = (state == S_IACC);
  assign d_load = (state == S_DIST);
  assign qsel   = (state == S_WB);
  assign q_load = (state == S_ILOAD) || (state == S_WB && iss >= nitems);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      k        <= '0;
      i        <= '0;
      s        <= '0;
      iss      <= '0;
      rcv      <= '0;
      nitems   <= '0;
      dpu_clr  <= 1'b0;
      grp_done <= 1'b0;
    end else begin
      dpu_clr  <= 1'b0;
      grp_done <= 1'b0;
      if (rsp.valid) rcv <= rcv + 8'd1;
      case (state)
        S_IDLE: if (grp_valid) begin
          k       <= grp_k;
          i       <= '0;
          s       <= '0;
          iss     <= '0;
          rcv     <= '0;
          nitems  <= 8'(NG);
          dpu_clr <= 1'b1;
          state   <= S_IFETCH;
        end
        S_IFETCH, S_RFETCH: begin
          if (req.valid && mem_ready) iss <= iss + 8'd1;
          if (rcv == nitems) state <= (state == S_IFETCH) ? S_IACC : S_DIST;
        end
        S_IACC: begin
          iss <= '0;
          rcv <= '0;
          if (s == m - 1) begin
            state <= S_ILOAD;
          end else begin
            s     <= s + idx_t'(1);
            state <= S_IFETCH;
          end
        end
        S_ILOAD: begin
          iss    <= '0;
          rcv    <= '0;
          nitems <= 8'(6 * NG);
          state  <= S_RFETCH;
        end
        S_DIST: begin
          iss    <= '0;
          nitems <= 8'(2 + 2 * LANES);
          state  <= S_WB;
        end
        S_WB: begin
          if (iss < nitems) begin
            if (wb_skip || mem_ready) iss <= iss + 8'd1;
          end else begin
            iss    <= '0;
            rcv    <= '0;
            nitems <= 8'(6 * NG);
            if (32'(i) + 32'(k) >= 32'(np) - 1) begin
              grp_done <= 1'b1;
              state    <= S_IDLE;
            end else begin
              i     <= i + idx_t'(1);
              state <= S_RFETCH;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A row's write-back may not overlap its own row index: k must be at least 1.
  a_k_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && grp_valid) |-> grp_k != 0);
  // Responses only arrive while a fetch is outstanding.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rsp.valid |-> ((state == S_IFETCH || state == S_RFETCH) && rcv < nitems));

endmodule
