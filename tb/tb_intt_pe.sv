// tb_intt_pe: checks one iNTT butterfly PE (n = 16, stage 1) over two
// blocks: y0 = (x0 + x1) * 2^-1 and y1 = (x0 - x1) * 2^-1 * psi^(-2^s (2j+1))
// mod q, where the u-th pair of a block is node bitrev_3(u) and j its index
// inside its group; 2^-1 = (q+1)/2 is applied as a multiplication here.
module tb_intt_pe;
  import parentt_pkg::*;
  localparam int N = 16, S = 1, LOGN = 4;
  localparam modulus_t M = MODULI[4];
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0;
  coef_t x0 = 0, x1 = 0, y0, y1;
  logic out_valid, out_first;
  int checks = 0, failures = 0, cyc = 0;
  intt_pe #(.N(N), .STAGE(S), .M(M)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin repeat (1000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  coef_t X0 [N], X1 [N];
  int t_in = -1;
  initial begin
    for (int i = 0; i < N; i++) begin X0[i] = coef_t'($urandom % M.q); X1[i] = coef_t'($urandom % M.q); end
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int i = 0; i < N; i++) begin
      in_valid <= 1; in_first <= (i % (N/2) == 0); x0 <= X0[i]; x1 <= X1[i];
      @(posedge clk);
    end
    in_valid <= 0; in_first <= 0;
  end
  int k = -1;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_first && t_in < 0) t_in = cyc;
    if (out_valid && out_first && k < 0) begin
      k = 0; checks++;
      if (cyc - t_in != int'(PE_LAT)) begin failures++; $display("latency %0d", cyc - t_in); end
    end
    if (k >= 0 && k < N) begin
      int node, j;
      coef_t w, inv2, e0, e1;
      node = bitrev(k % (N/2), LOGN - 1);
      j    = node % (N >> (S + 1));
      w    = pow_mod_c(psi_for(M, N), 2*N - (1 << S) * (2*j + 1), M.q);
      inv2 = coef_t'((M.q + 1) / 2);
      e0 = mul_mod_c(add_mod(X0[k], X1[k], M.q), inv2, M.q);
      e1 = mul_mod_c(mul_mod_c(sub_mod(X0[k], X1[k], M.q), inv2, M.q), w, M.q);
      checks += 2;
      if (y0 !== e0) failures++;
      if (y1 !== e1) failures++;
      k++;
      if (k == N) begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    end
  end
endmodule
