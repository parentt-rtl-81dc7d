// parentt_top: PaReNTT long polynomial modular multiplier,
// p(x) = a(x) * b(x) mod (x^n + 1, q) with a 180-bit q = q_1 ... q_6.
//
// Three steps in one feed-forward pipeline:
//  1. residual polynomials: for both inputs and both parallel lanes, one
//     residual_unit per prime computes a_j mod q_i (4*T units);
//  2. evaluation in the residue domain: T poly_mult instances, one per
//     prime, each two NTT units, point-wise multipliers and one iNTT unit;
//  3. inverse mapping: one inverse_crt per lane recombines the T residue
//     products into coefficients mod q.
//
// Interface: two coefficients of each input per cycle, lane 0 carrying
// c_j and lane 1 c_{j+n/2} for j = 0..n/2-1, with in_first on j = 0 and
// in_valid on all n/2 cycles; coefficients must be below q. The product
// leaves in the same two-lane order, flagged by out_valid/out_first.
// Polynomials may follow each other back to back: one product per n/2
// cycles, latency TOP_LAT = RES_LAT + (n - 2 + 6 log2(n) + 1) + ICRT_LAT.
// There is no back-pressure; the pipeline advances every cycle.
// rst_n also enables the lock-step assertion, so a linter may report it as
// used both asynchronously and synchronously; that use is simulation-only.
module parentt_top
  import parentt_pkg::*;
#(
  parameter int unsigned N = NMAX
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  wide_t a_lo,
  input  wide_t a_hi,
  input  wide_t b_lo,
  input  wide_t b_hi,
  output logic  out_valid,
  output logic  out_first,
  output wide_t p_lo,
  output wide_t p_hi
);
  // residues: [prime]
  coef_t ra_lo [T], ra_hi [T], rb_lo [T], rb_hi [T];
  coef_t pr_lo [T], pr_hi [T];
  logic  pm_valid [T], pm_first [T];

  // tags through the residual units
  logic [RES_LAT-1:0] v_pre, f_pre;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_pre <= '0;
      f_pre <= '0;
    end else begin
      v_pre <= RES_LAT'({v_pre, in_valid});
      f_pre <= RES_LAT'({f_pre, in_first});
    end
  end

  for (genvar i = 0; i < T; i++) begin : g_prime
    residual_unit #(.M(MODULI[i])) u_ra_lo (.clk, .a(a_lo), .r(ra_lo[i]));
    residual_unit #(.M(MODULI[i])) u_ra_hi (.clk, .a(a_hi), .r(ra_hi[i]));
    residual_unit #(.M(MODULI[i])) u_rb_lo (.clk, .a(b_lo), .r(rb_lo[i]));
    residual_unit #(.M(MODULI[i])) u_rb_hi (.clk, .a(b_hi), .r(rb_hi[i]));

    poly_mult #(.N(N), .M(MODULI[i])) u_pm (
      .clk, .rst_n,
      .in_valid(v_pre[RES_LAT-1]), .in_first(f_pre[RES_LAT-1]),
      .a0(ra_lo[i]), .a1(ra_hi[i]), .b0(rb_lo[i]), .b1(rb_hi[i]),
      .out_valid(pm_valid[i]), .out_first(pm_first[i]),
      .p0(pr_lo[i]), .p1(pr_hi[i]));
  end

  inverse_crt u_icrt_lo (.clk, .p(pr_lo), .y(p_lo));
  inverse_crt u_icrt_hi (.clk, .p(pr_hi), .y(p_hi));

  logic [ICRT_LAT-1:0] v_post, f_post;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_post <= '0;
      f_post <= '0;
    end else begin
      v_post <= ICRT_LAT'({v_post, pm_valid[0]});
      f_post <= ICRT_LAT'({f_post, pm_first[0]});
    end
  end
  assign out_valid = v_post[ICRT_LAT-1];
  assign out_first = f_post[ICRT_LAT-1];

  // All residue multipliers run in lock-step.
  for (genvar i = 1; i < T; i++) begin : g_chk
    always_ff @(posedge clk) begin
      if (rst_n) a_lockstep: assert ((pm_valid[i] == pm_valid[0]) && (pm_first[i] == pm_first[0]));
    end
  end

endmodule
