// tb_poly_mult: self-checking test of one residue polynomial multiplier.
//
// Streams NF random polynomial pairs back to back into poly_mult (n = 16 and
// modulus q_1 by default) and compares every output coefficient with a
// schoolbook negacyclic product computed in the testbench. Also checks the
// latency (polymult_latency) and that consecutive products leave n/2 cycles
// apart.
module tb_poly_mult;
  import parentt_pkg::*;
  localparam int unsigned N  = 16;
  localparam int unsigned NF = 3;
  localparam modulus_t    M  = MODULI[1];

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0;
  coef_t a0 = 0, a1 = 0, b0 = 0, b1 = 0;
  logic out_valid, out_first;
  coef_t p0, p1;
  int checks = 0, failures = 0;

  poly_mult #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  coef_t A [NF][N], B [NF][N], R [NF][N];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference
  initial begin
    for (int f = 0; f < NF; f++) begin
      for (int j = 0; j < N; j++) begin
        A[f][j] = coef_t'($urandom % M.q);
        B[f][j] = coef_t'($urandom % M.q);
      end
      for (int k = 0; k < N; k++) R[f][k] = 0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          coef_t pr;
          pr = mul_mod_c(A[f][i], B[f][j], M.q);
          if (i + j < N) R[f][i+j]   = add_mod(R[f][i+j], pr, M.q);
          else           R[f][i+j-N] = sub_mod(R[f][i+j-N], pr, M.q);
        end
    end
  end

  int t_in0, t_firsts [NF];
  int nf_out = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int f = 0; f < NF; f++)
      for (int j = 0; j < N/2; j++) begin
        in_valid <= 1; in_first <= (j == 0);
        a0 <= A[f][j]; a1 <= A[f][j+N/2];
        b0 <= B[f][j]; b1 <= B[f][j+N/2];
        @(posedge clk);
      end
    in_valid <= 0; in_first <= 0;
  end

  int u = 0, f_idx = -1;
  bit seen_in = 0;
  always @(posedge clk) if (rst_n && in_valid && in_first && !seen_in) begin seen_in = 1; t_in0 = cyc; end
  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_first) begin
      f_idx++; u = 0;
      t_firsts[f_idx] = cyc;
    end
    if (f_idx >= 0 && f_idx < NF) begin
      checks += 2;
      if (p0 !== R[f_idx][u])       begin failures++; if (failures < 10) $display("f%0d p[%0d]=%0d exp %0d", f_idx, u, p0, R[f_idx][u]); end
      if (p1 !== R[f_idx][u+N/2])   begin failures++; if (failures < 10) $display("f%0d p[%0d]=%0d exp %0d", f_idx, u+N/2, p1, R[f_idx][u+N/2]); end
      u++;
      if (u == N/2 && f_idx == NF-1) begin
        checks++;
        if (t_firsts[0] - t_in0 != int'(polymult_latency(N))) begin
          failures++; $display("latency %0d expected %0d", t_firsts[0] - t_in0, polymult_latency(N));
        end
        for (int f = 1; f < NF; f++) begin
          checks++;
          if (t_firsts[f] - t_firsts[f-1] != N/2) failures++;
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
