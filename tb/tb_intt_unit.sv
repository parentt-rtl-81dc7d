// tb_intt_unit: feeds two random blocks to a 32-point iNTT unit in the
// bit-reversed pair order the NTT unit produces and compares the outputs with
// the direct inverse p_j = n^-1 sum_k P~_k psi^(-(2k+1) j) mod q, which must
// come out in natural order (p_u, p_{u+n/2}); also checks the latency.
module tb_intt_unit;
  import parentt_pkg::*;
  localparam int N = 32, LOGN = 5, NB = 2;
  localparam modulus_t M = MODULI[3];
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0;
  coef_t x0 = 0, x1 = 0, y0, y1;
  logic out_valid, out_first;
  int checks = 0, failures = 0, cyc = 0;
  intt_unit #(.N(N), .M(M)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  coef_t P [NB][N], R [NB][N];
  int t_in = -1;
  initial begin
    coef_t psi, ninv;
    psi  = psi_for(M, N);
    ninv = pow_mod_c(coef_t'(N), M.q - 2, M.q);
    for (int b = 0; b < NB; b++) begin
      for (int k = 0; k < N; k++) P[b][k] = coef_t'($urandom % M.q);
      for (int j = 0; j < N; j++) begin
        R[b][j] = 0;
        for (int k = 0; k < N; k++)
          R[b][j] = add_mod(R[b][j], mul_mod_c(P[b][k], pow_mod_c(psi, (2*N - 1) * ((2*k+1)*j % (2*N)), M.q), M.q), M.q);
        R[b][j] = mul_mod_c(R[b][j], ninv, M.q);
      end
    end
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int b = 0; b < NB; b++)
      for (int u = 0; u < N/2; u++) begin
        int r;
        r = bitrev(u, LOGN - 1);
        in_valid <= 1; in_first <= (u == 0); x0 <= P[b][r]; x1 <= P[b][r+N/2];
        @(posedge clk);
      end
    in_valid <= 0; in_first <= 0;
  end
  int u = 0, b = -1;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_first && t_in < 0) t_in = cyc;
    if (out_valid && out_first) begin
      b++; u = 0;
      if (b == 0) begin checks++; if (cyc - t_in != int'(unit_latency(N))) begin failures++; $display("latency %0d", cyc - t_in); end end
    end
    if (b >= 0 && u < N/2 && out_valid) begin
      checks += 2;
      if (y0 !== R[b][u])     begin failures++; if (failures < 5) $display("b%0d u%0d y0 %0d exp %0d", b, u, y0, R[b][u]); end
      if (y1 !== R[b][u+N/2]) failures++;
      u++;
      if (u == N/2 && b == NB-1) begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    end
  end
endmodule
