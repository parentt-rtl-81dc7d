// poly_mult: negacyclic polynomial multiplier p = a*b mod (x^n + 1, q_i).
//
// Two forward NTT units transform a and b; two modular multipliers form the
// point-wise product of their output pairs in the cycle they appear, and the
// iNTT unit consumes that product directly. Because the iNTT's folding set is
// the bit-reversed one, no shuffling buffer sits between the NTTs and the
// iNTT.
//
// Interface: a and b arrive as pairs (c_j, c_{j+n/2}), j = 0..n/2-1, one pair
// per cycle, the first flagged by in_first (a and b in lock-step). The
// product leaves in the same format. One product every n/2 cycles, latency
// polymult_latency(n) = 2*(3m + n/2 - 1) + 1 = n - 2 + (6m + 1) cycles.
// rst_n also enables the lock-step assertion, so a linter may report it as
// used both asynchronously and synchronously; that use is simulation-only.
module poly_mult
  import parentt_pkg::*;
#(
  parameter int unsigned N = NMAX,
  parameter modulus_t    M = MODULI[0]
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  coef_t a0,
  input  coef_t a1,
  input  coef_t b0,
  input  coef_t b1,
  output logic  out_valid,
  output logic  out_first,
  output coef_t p0,
  output coef_t p1
);
  logic  av, af, bv, bf;
  coef_t A0, A1, B0, B1, m0, m1, P0, P1;
  logic  pv, pf;

  ntt_unit #(.N(N), .M(M)) u_ntt_a (
    .clk, .rst_n, .in_valid, .in_first, .x0(a0), .x1(a1),
    .out_valid(av), .out_first(af), .y0(A0), .y1(A1));

  ntt_unit #(.N(N), .M(M)) u_ntt_b (
    .clk, .rst_n, .in_valid, .in_first, .x0(b0), .x1(b1),
    .out_valid(bv), .out_first(bf), .y0(B0), .y1(B1));

  mod_mult #(.M(M)) u_pw0 (.a(A0), .b(B0), .p(m0));
  mod_mult #(.M(M)) u_pw1 (.a(A1), .b(B1), .p(m1));

  always_ff @(posedge clk) begin
    P0 <= m0;
    P1 <= m1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pv <= 1'b0;
      pf <= 1'b0;
    end else begin
      pv <= av;
      pf <= af;
    end
  end

  intt_unit #(.N(N), .M(M)) u_intt (
    .clk, .rst_n, .in_valid(pv), .in_first(pf), .x0(P0), .x1(P1),
    .out_valid, .out_first, .y0(p0), .y1(p1));

  // Both NTT units see the same control, so they stay in lock-step.
  always_ff @(posedge clk) begin
    if (rst_n) a_lockstep: assert ((av == bv) && (af == bf));
  end

endmodule
