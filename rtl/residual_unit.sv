// residual_unit: residual coefficient computation by factorization,
// a_j mod q_i for a T*V-bit coefficient a_j and one special prime q_i.
//
// a_j is cut into T = d*t' segments z_k of V bits, a_j = sum z_k * 2^(V k).
// Since 2^V = beta_i mod q_i, z_k * 2^(Vk) = z_k * beta_i^k, and multiplying
// by beta_i = 2^v1 +/- 2^v2 - 1 is one shift-add unit (SAU). The segments
// form d blocks of t' segments: in block rho, segment k' passes through k'
// chained SAUs and the t' results are added. Block 0's sum stays unreduced;
// each further block is reduced by a Barrett unit and multiplied by the
// V-bit constant [beta_i^(t' rho)]_{q_i} (the one V x V multiplier per
// block). A final adder and Barrett unit give a_j mod q_i. Both Barrett units
// take MU = 2V+15 = 75-bit inputs, which bounds the SAU depth (t'-1) and v1.
// This follows the paper's Algorithm 2 and its t = 6 (d = 2, t' = 3)
// architecture; the register placement is this design's.
//
// Timing: RES_LAT = 3 register stages (block sums; reduced and scaled block
// results; final residue). One coefficient per cycle.
module residual_unit
  import parentt_pkg::*;
#(
  parameter modulus_t M = MODULI[0]
) (
  input  logic  clk,
  input  wide_t a,
  output coef_t r
);
  localparam int unsigned V1 = int'(M.v1);
  // The widest block sum must fit the Barrett input.
  localparam int unsigned WB = V + (TP - 1) * (V1 + 1) + clog2(TP);

  function automatic coef_t beta_pow(int unsigned k);
    return pow_mod_c(beta_of(M), k, M.q);
  endfunction

  logic [MU-1:0] blk_sum [DBLK];
  logic [MU-1:0] blk_r1  [DBLK];
  logic [MU-1:0] part_r2 [DBLK];

  for (genvar rho = 0; rho < DBLK; rho++) begin : g_blk
    logic [MU-1:0] term [TP];
    assign term[0] = MU'(a[(rho*TP)*V +: V]);
    for (genvar k = 1; k < TP; k++) begin : g_seg
      logic [MU-1:0] chain [k+1];
      assign chain[0] = MU'(a[(rho*TP + k)*V +: V]);
      for (genvar d = 0; d < k; d++) begin : g_sau
        localparam int unsigned WI = V + d * (V1 + 1);
        logic [WI+V1:0] y;
        sau #(.W_IN(WI), .M(M)) u_sau (.x(chain[d][WI-1:0]), .y(y));
        assign chain[d+1] = MU'(y);
      end
      assign term[k] = chain[k];
    end

    always_comb begin
      blk_sum[rho] = '0;
      for (int k = 0; k < TP; k++) blk_sum[rho] = blk_sum[rho] + term[k];
    end

    always_ff @(posedge clk) blk_r1[rho] <= blk_sum[rho];

    if (rho == 0) begin : g_first
      always_ff @(posedge clk) part_r2[0] <= blk_r1[0];
    end else begin : g_scaled
      coef_t red;
      logic [2*V-1:0] scaled;
      barrett_reduce #(.W(MU), .M(M)) u_red (.x(blk_r1[rho]), .r(red));
      assign scaled = (2*V)'(red) * (2*V)'(beta_pow(TP * rho));
      always_ff @(posedge clk) part_r2[rho] <= MU'(scaled);
    end
  end

  logic [MU-1:0] total;
  coef_t         res;
  always_comb begin
    total = '0;
    for (int k = 0; k < DBLK; k++) total = total + part_r2[k];
  end
  barrett_reduce #(.W(MU), .M(M)) u_final (.x(total), .r(res));
  always_ff @(posedge clk) r <= res;

  initial begin
    assert (WB + clog2(DBLK) + 1 <= MU)
      else $error("SAU word length %0d exceeds the Barrett input width %0d", WB, MU);
  end

endmodule
