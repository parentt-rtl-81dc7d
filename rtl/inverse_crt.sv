// inverse_crt: maps T residues p_{i,j} (one per prime) back to the
// coefficient p_j mod q, q = q_1 * ... * q_T.
//
// p_j = sum_i [p_{i,j} * q~_i]_{q_i} * q*_i mod q, with q*_i = q/q_i and
// q~_i = (q/q_i)^(-1) mod q_i. Per residue a V x V multiplier by the constant
// q~_i and a Barrett unit for the special prime q_i, then a V x (T-1)V
// multiplier by q*_i; each such product is already below q, so the T terms
// are combined by a tree of T-1 modular adders mod q (compare and subtract),
// with no reduction modulo the long q. This is the paper's optimized inverse
// mapping, drawn there for T = 4 and built here for any T.
//
// Timing: ICRT_LAT = 2 + ceil(log2 T) register stages, one coefficient per
// cycle; a register follows every multiplier and every adder level.
module inverse_crt
  import parentt_pkg::*;
(
  input  logic  clk,
  input  coef_t p [T],
  output wide_t y
);
  localparam int unsigned LV = clog2(T);

  function automatic int unsigned cnt_at(int unsigned lvl);
    return (T + (1 << lvl) - 1) >> lvl;
  endfunction

  function automatic wide_t add_mod_q(wide_t a, wide_t b);
    logic [QW:0] s;
    s = {1'b0, a} + {1'b0, b};
    return (s >= {1'b0, Q}) ? wide_t'(s - {1'b0, Q}) : wide_t'(s);
  endfunction

  coef_t y_r1 [T];
  wide_t lv   [LV+1][T];

  for (genvar i = 0; i < T; i++) begin : g_res
    localparam coef_t QT = q_tilde(i);
    localparam wide_t QS = q_star(i);
    logic [2*V-1:0] prod;
    coef_t          red;
    assign prod = (2*V)'(p[i]) * (2*V)'(QT);
    barrett_reduce #(.W(2*V), .M(MODULI[i])) u_red (.x(prod), .r(red));
    always_ff @(posedge clk) begin
      y_r1[i]  <= red;
      lv[0][i] <= wide_t'(QW'(y_r1[i]) * QS);
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned l = 1; l <= LV; l++)
      for (int unsigned k = 0; k < T; k++)
        if (k < cnt_at(l)) begin
          if (2*k + 1 < cnt_at(l-1)) lv[l][k] <= add_mod_q(lv[l-1][2*k], lv[l-1][2*k+1]);
          else                       lv[l][k] <= lv[l-1][2*k];
        end else begin
          lv[l][k] <= '0;
        end
  end

  assign y = lv[LV][0];

endmodule
