// barrett_reduce: x mod q_i for one special prime, by Barrett's method.
//
// eps = floor(2^W / q) is a constant, the quotient estimate is
// qh = (x * eps) >> W and r = x - qh*q. With x < 2^W the estimate is at most
// one short, so r < 2q and a single conditional subtraction finishes the
// reduction. Because q = 2^V - 2^v1 -/+ 2^v2 + 1, the product qh*q is formed
// with shifts and adders only, as the paper does for every multiplication by
// a special prime. The input width W is the paper's mu (2V for the product
// of two residues, 2V+15 in the residual unit).
//
// Interface: combinational, x (W bits) in, r (V bits, r < q) out. Pipeline
// registers (the paper draws two cut sets inside it) are left to the
// instantiating block.
module barrett_reduce
  import parentt_pkg::*;
#(
  parameter int unsigned W = 2*V,
  parameter modulus_t    M = MODULI[0]
) (
  input  logic [W-1:0] x,
  output coef_t        r
);
  localparam logic [W:0]   EPS_FULL = ((W+1)'(1) << W) / (W+1)'(M.q);
  localparam int unsigned  EW       = W - V + 2;          // eps < 2^(W-V+1)
  localparam logic [EW-1:0] EPS     = EW'(EPS_FULL);
  localparam int unsigned  QHW      = W - V + 2;          // quotient width

  logic [W+EW-1:0] prod;
  logic [QHW-1:0]  qh;
  logic [W+1:0]    qh_q;       // qh*q, computed with shifts and adds
  logic [V+1:0]    rem;

  always_comb begin
    prod = (W+EW)'(x) * (W+EW)'(EPS);
    qh   = QHW'(prod >> W);
    qh_q = ((W+2)'(qh) << V) - ((W+2)'(qh) << M.v1) + (W+2)'(qh);
    if (M.v2_neg) qh_q = qh_q + ((W+2)'(qh) << M.v2);
    else          qh_q = qh_q - ((W+2)'(qh) << M.v2);
    rem  = (V+2)'((W+2)'(x) - qh_q);
    r    = (rem >= (V+2)'(M.q)) ? coef_t'(rem - (V+2)'(M.q)) : coef_t'(rem);
  end

endmodule
