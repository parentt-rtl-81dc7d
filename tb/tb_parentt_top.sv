// tb_parentt_top: end-to-end test of the multiplier at n = 16. Three frames of
// random 180-bit operands (< Q) are streamed back to back; every output
// coefficient is compared with a schoolbook negacyclic product computed
// directly modulo Q. The bench also counts the mechanisms the datapath relies
// on and fails if any of them never occurred: back-to-back frames, DSD pass and
// swap cycles, odd and even halving in the iNTT, Barrett's final correction,
// and the fixed input-to-output latency.
module tb_parentt_top;
  import parentt_pkg::*;
  localparam int N = 16, NF = 3;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0;
  wide_t a_lo = '0, a_hi = '0, b_lo = '0, b_hi = '0, p_lo, p_hi;
  logic out_valid, out_first;
  int checks = 0, failures = 0, cyc = 0;
  parentt_top #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin repeat (3000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  wide_t A [NF][N], B [NF][N], C [NF][N];
  initial begin
    for (int f = 0; f < NF; f++) begin
      for (int j = 0; j < N; j++) begin
        A[f][j] = wide_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom}) % Q;
        B[f][j] = wide_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom}) % Q;
      end
      if (f == 0) begin A[f][0] = Q - 1; B[f][N-1] = Q - 1; end
      for (int k = 0; k < N; k++) begin
        logic [2*QW:0] acc;
        acc = '0;
        for (int i = 0; i < N; i++) begin
          logic [2*QW:0] pr;
          int j;
          j  = (k - i + N) % N;
          pr = ({(QW+1)'(0), A[f][i]} * {(QW+1)'(0), B[f][j]}) % {(QW+1)'(0), Q};
          if (i + j >= N) acc = (acc + {(QW+1)'(0), Q} - pr) % {(QW+1)'(0), Q};
          else            acc = (acc + pr) % {(QW+1)'(0), Q};
        end
        C[f][k] = wide_t'(acc);
      end
    end
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int f = 0; f < NF; f++)
      for (int u = 0; u < N/2; u++) begin
        in_valid <= 1; in_first <= (u == 0);
        a_lo <= A[f][u]; a_hi <= A[f][u+N/2]; b_lo <= B[f][u]; b_hi <= B[f][u+N/2];
        @(posedge clk);
      end
    in_valid <= 0; in_first <= 0;
  end

  // mechanism counters
  int n_b2b = 0, n_pass = 0, n_swap = 0, n_odd = 0, n_even = 0, n_corr = 0, n_lat = 0;
  int t_first [$];
  logic last_in_v = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_first) begin
      t_first.push_back(cyc);
      if (last_in_v) n_b2b++;
    end
    last_in_v <= in_valid;
    if (dut.g_prime[0].u_pm.u_ntt_a.g_stage[0].g_dsd.u_dsd.in_valid) begin
      if (dut.g_prime[0].u_pm.u_ntt_a.g_stage[0].g_dsd.u_dsd.sel) n_swap++; else n_pass++;
    end
    if (dut.g_prime[0].u_pm.u_intt.g_stage[0].u_pe.v_sr[1]) begin
      if (dut.g_prime[0].u_pm.u_intt.g_stage[0].u_pe.s_r2[0]) n_odd++; else n_even++;
    end
  end

  for (genvar i = 0; i < T; i++) begin : g_cnt
    always @(posedge clk) if (rst_n) begin
      if (dut.g_prime[i].u_pm.u_pw0.u_red.rem >= (V+2)'(MODULI[i].q)) n_corr++;
      if (dut.g_prime[i].u_pm.u_pw1.u_red.rem >= (V+2)'(MODULI[i].q)) n_corr++;
    end
  end

  int f = -1, u = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_first) begin
      f++; u = 0;
      checks++;
      if (cyc - t_first[f] != int'(RES_LAT + polymult_latency(N) + ICRT_LAT)) begin
        failures++; $display("frame %0d latency %0d", f, cyc - t_first[f]);
      end else n_lat++;
    end
    if (f >= 0 && u < N/2 && out_valid) begin
      checks += 2;
      if (p_lo !== C[f][u])     begin failures++; if (failures < 5) $display("f%0d u%0d lo %0h exp %0h", f, u, p_lo, C[f][u]); end
      if (p_hi !== C[f][u+N/2]) begin failures++; if (failures < 5) $display("f%0d u%0d hi %0h exp %0h", f, u, p_hi, C[f][u+N/2]); end
      u++;
      if (u == N/2 && f == NF-1) begin
        $display("mechanisms: back_to_back=%0d dsd_pass=%0d dsd_swap=%0d half_odd=%0d half_even=%0d barrett_corr=%0d latency_ok=%0d",
                 n_b2b, n_pass, n_swap, n_odd, n_even, n_corr, n_lat);
        checks += 7;
        if (n_corr == 0) failures++;
        if (n_b2b  == 0) failures++;
        if (n_pass == 0) failures++;
        if (n_swap == 0) failures++;
        if (n_odd  == 0) failures++;
        if (n_even == 0) failures++;
        if (n_lat  != NF) failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
