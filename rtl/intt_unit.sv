// intt_unit: two-parallel feed-forward n-point inverse NTT (negative-wrapped,
// low-complexity form, 1/n folded into a 1/2 per stage) modulo one prime.
//
// m processing elements separated by m-1 DSD commutators holding
// 1, 2, ..., n/4 words. The PEs run the bit-reversed folding set, so the
// u-th input pair after in_first must be (P~_r, P~_{r+n/2}) with
// r = bitrev_{m-1}(u): the order in which ntt_unit produces its output, so
// the product of two NTTs enters here with no reordering. Output: the u-th
// pair after out_first is (p_u, p_{u+n/2}) with
// p_j = n^(-1) sum_k P~_k psi^(-(2k+1) j) mod q, i.e. natural order.
//
// Timing: one block every n/2 cycles; latency 3m + n/2 - 1 cycles.
module intt_unit
  import parentt_pkg::*;
#(
  parameter int unsigned N = NMAX,
  parameter modulus_t    M = MODULI[0]
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  coef_t x0,
  input  coef_t x1,
  output logic  out_valid,
  output logic  out_first,
  output coef_t y0,
  output coef_t y1
);
  localparam int unsigned LOGN = clog2(N);

  logic  pe_v [LOGN], pe_f [LOGN], po_v [LOGN], po_f [LOGN];
  coef_t pe_0 [LOGN], pe_1 [LOGN], po_0 [LOGN], po_1 [LOGN];

  assign pe_v[0] = in_valid;
  assign pe_f[0] = in_first;
  assign pe_0[0] = x0;
  assign pe_1[0] = x1;

  for (genvar s = 0; s < LOGN; s++) begin : g_stage
    intt_pe #(.N(N), .STAGE(s), .M(M)) u_pe (
      .clk, .rst_n,
      .in_valid(pe_v[s]), .in_first(pe_f[s]), .x0(pe_0[s]), .x1(pe_1[s]),
      .out_valid(po_v[s]), .out_first(po_f[s]), .y0(po_0[s]), .y1(po_1[s])
    );
    if (s < LOGN - 1) begin : g_dsd
      dsd #(.W(V), .D(1 << s)) u_dsd (
        .clk, .rst_n,
        .in_valid(po_v[s]), .in_first(po_f[s]), .x0(po_0[s]), .x1(po_1[s]),
        .out_valid(pe_v[s+1]), .out_first(pe_f[s+1]), .y0(pe_0[s+1]), .y1(pe_1[s+1])
      );
    end
  end

  assign out_valid = po_v[LOGN-1];
  assign out_first = po_f[LOGN-1];
  assign y0        = po_0[LOGN-1];
  assign y1        = po_1[LOGN-1];

endmodule
