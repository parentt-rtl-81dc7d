// tb_ntt_unit: streams two random blocks through a 32-point NTT unit and
// compares each output pair with the direct transform
// A~_k = sum_j a_j psi^((2k+1) j) mod q, in the order (A~_r, A~_{r+n/2}),
// r = bitrev_{m-1}(u); also checks the latency unit_latency(n).
module tb_ntt_unit;
  import parentt_pkg::*;
  localparam int N = 32, LOGN = 5, NB = 2;
  localparam modulus_t M = MODULI[5];
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0;
  coef_t x0 = 0, x1 = 0, y0, y1;
  logic out_valid, out_first;
  int checks = 0, failures = 0, cyc = 0;
  ntt_unit #(.N(N), .M(M)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  coef_t A [NB][N], R [NB][N];
  int t_in = -1;
  initial begin
    coef_t psi;
    psi = psi_for(M, N);
    for (int b = 0; b < NB; b++) begin
      for (int j = 0; j < N; j++) A[b][j] = coef_t'($urandom % M.q);
      for (int k = 0; k < N; k++) begin
        R[b][k] = 0;
        for (int j = 0; j < N; j++)
          R[b][k] = add_mod(R[b][k], mul_mod_c(A[b][j], pow_mod_c(psi, (2*k+1)*j, M.q), M.q), M.q);
      end
    end
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int b = 0; b < NB; b++)
      for (int j = 0; j < N/2; j++) begin
        in_valid <= 1; in_first <= (j == 0); x0 <= A[b][j]; x1 <= A[b][j+N/2];
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
      int r;
      r = bitrev(u, LOGN - 1);
      checks += 2;
      if (y0 !== R[b][r])       begin failures++; if (failures < 5) $display("b%0d u%0d y0 %0d exp %0d", b, u, y0, R[b][r]); end
      if (y1 !== R[b][r+N/2])   failures++;
      u++;
      if (u == N/2 && b == NB-1) begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    end
  end
endmodule
