// natsa_pkg -- shared types and constants of the NATSA matrix-profile accelerator.
//
// All datapath values (time-series samples, means, standard deviations, dot
// products, distances) are signed fixed-point numbers of DW bits with FRAC
// fractional bits. The published design works on floating-point data; fixed
// point is this implementation's own choice, made to keep every unit small and
// bit-exact to check. Profile indices are plain unsigned integers.
//
// Each PU talks to one HBM channel through a simple word-wide request/response
// port (mem_req_t / mem_rsp_t): one request per cycle when ready is high,
// read data returned in request order, writes are posted (no response).
package natsa_pkg;

  localparam int unsigned DW   = 32;      // datapath word width
  localparam int unsigned FRAC = 16;      // fractional bits of the fixed-point format
  localparam int unsigned AW   = 24;      // HBM word address width per channel
  localparam int unsigned IW   = 24;      // width of sample/profile indices (series of up to 16M samples)

  typedef logic signed [DW-1:0] fix_t;
  typedef logic [IW-1:0]        idx_t;
  typedef logic [AW-1:0]        addr_t;

  // Largest positive value: initial profile value ("no match yet").
  localparam fix_t FIX_MAX = {1'b0, {(DW-1){1'b1}}};

  // HBM channel request: valid, write enable, word address, write data.
  typedef struct packed {
    logic          valid;
    logic          we;
    addr_t         addr;
    logic [DW-1:0] wdata;
  } mem_req_t;

  // HBM channel read response.
  typedef struct packed {
    logic          valid;
    logic [DW-1:0] rdata;
  } mem_rsp_t;

  // Where the arrays live in every channel (word addresses).
  typedef struct packed {
    addr_t t;    // time series T[0..n-1]
    addr_t mu;   // window means mu[0..n-m]
    addr_t sig;  // window standard deviations sigma[0..n-m]
    addr_t pp;   // profile PP[0..n-m] (this channel's private copy)
    addr_t ii;   // profile index II[0..n-m] (this channel's private copy)
  } layout_t;

  // Fixed-point multiply, truncating toward minus infinity.
  function automatic fix_t fmul(fix_t a, fix_t b);
    logic signed [2*DW-1:0] p;
    p = a * b;
    return fix_t'(p >>> FRAC);
  endfunction

endpackage
