// tb_parentt_top_full: full-size test at the default configuration
// (n = 4096, six 30-bit primes, 180-bit coefficients). Two frames of random
// operands below Q are streamed back to back. For each prime a schoolbook
// negacyclic product of the residues is computed, and every output
// coefficient must be below Q and agree with it modulo each prime (by the
// CRT this pins down the 180-bit result uniquely). The frame spacing of n/2
// cycles and the fixed latency are checked as well.
module tb_parentt_top_full;
  import parentt_pkg::*;
  localparam int N = NMAX, NF = 2;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0;
  wide_t a_lo = '0, a_hi = '0, b_lo = '0, b_hi = '0, p_lo, p_hi;
  logic out_valid, out_first;
  int checks = 0, failures = 0, cyc = 0;
  parentt_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin repeat (40000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  wide_t A [NF][N], B [NF][N];
  coef_t C [NF][T][N];
  initial begin
    for (int f = 0; f < NF; f++)
      for (int j = 0; j < N; j++) begin
        A[f][j] = wide_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom}) % Q;
        B[f][j] = wide_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom}) % Q;
      end
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < T; i++) begin
        coef_t ar [N], br [N];
        logic [63:0] qq;
        qq = 64'(MODULI[i].q);
        for (int j = 0; j < N; j++) begin
          ar[j] = coef_t'(A[f][j] % wide_t'(qq));
          br[j] = coef_t'(B[f][j] % wide_t'(qq));
          C[f][i][j] = 0;
        end
        for (int k = 0; k < N; k++) begin
          logic [63:0] acc;
          acc = 0;
          for (int j = 0; j <= k; j++)     acc = (acc + 64'(ar[j]) * 64'(br[k-j])) % qq;
          for (int j = k + 1; j < N; j++)  acc = (acc + qq * qq - 64'(ar[j]) * 64'(br[N+k-j])) % qq;
          C[f][i][k] = coef_t'(acc);
        end
      end
    $display("reference done");
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int f = 0; f < NF; f++)
      for (int u = 0; u < N/2; u++) begin
        in_valid <= 1; in_first <= (u == 0);
        a_lo <= A[f][u]; a_hi <= A[f][u+N/2]; b_lo <= B[f][u]; b_hi <= B[f][u+N/2];
        @(posedge clk);
      end
    in_valid <= 0; in_first <= 0;
  end

  int t_first [$];
  always @(posedge clk) if (rst_n && in_valid && in_first) t_first.push_back(cyc);

  int f = -1, u = 0, t_out0 = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_first) begin
      f++; u = 0;
      checks++;
      if (cyc - t_first[f] != int'(RES_LAT + polymult_latency(N) + ICRT_LAT)) begin
        failures++; $display("frame %0d latency %0d", f, cyc - t_first[f]);
      end
      if (f == 0) t_out0 = cyc;
      else begin checks++; if (cyc - t_out0 != N/2) begin failures++; $display("spacing %0d", cyc - t_out0); end end
    end
    if (f >= 0 && u < N/2 && out_valid) begin
      for (int i = 0; i < T; i++) begin
        checks += 2;
        if (coef_t'(p_lo % wide_t'(MODULI[i].q)) !== C[f][i][u])     begin failures++; if (failures < 5) $display("f%0d u%0d lo q%0d", f, u, i); end
        if (coef_t'(p_hi % wide_t'(MODULI[i].q)) !== C[f][i][u+N/2]) begin failures++; if (failures < 5) $display("f%0d u%0d hi q%0d", f, u, i); end
      end
      checks += 2;
      if (p_lo >= Q) failures++;
      if (p_hi >= Q) failures++;
      u++;
      if (u == N/2 && f == NF-1) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
