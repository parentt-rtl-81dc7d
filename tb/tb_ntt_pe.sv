// tb_ntt_pe: checks one forward-NTT butterfly PE (n = 16, stage 1) over two
// blocks: y0 = x0 + w*x1, y1 = x0 - w*x1 mod q with the twiddle of the
// butterfly group taken from the textbook table psi^bitrev_m(2^s + g), and a
// latency of PE_LAT cycles.
module tb_ntt_pe;
  import parentt_pkg::*;
  localparam int N = 16, S = 1, LOGN = 4;
  localparam modulus_t M = MODULI[2];
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0;
  coef_t x0 = 0, x1 = 0, y0, y1;
  logic out_valid, out_first;
  int checks = 0, failures = 0, cyc = 0;
  ntt_pe #(.N(N), .STAGE(S), .M(M)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin repeat (1000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  coef_t X0 [2*N/2], X1 [2*N/2];
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
      int u, g;
      coef_t w, m;
      u = k % (N/2);
      g = u >> (LOGN - 1 - S);
      w = pow_mod_c(psi_for(M, N), bitrev((1 << S) + g, LOGN), M.q);
      m = mul_mod_c(X1[k], w, M.q);
      checks += 2;
      if (y0 !== add_mod(X0[k], m, M.q)) failures++;
      if (y1 !== sub_mod(X0[k], m, M.q)) failures++;
      k++;
      if (k == N) begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    end
  end
endmodule
