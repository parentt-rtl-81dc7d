// tb_sau: checks that the shift-add unit multiplies by beta_i exactly
// (no reduction) for chained input widths, for primes with either sign of
// the 2^v2 term.
module tb_sau;
  import parentt_pkg::*;
  localparam modulus_t MA = MODULI[1];   // beta = 2^v1 + 2^v2 - 1
  localparam modulus_t MB = MODULI[0];   // beta = 2^v1 - 2^v2 - 1
  localparam int WA = V + MA.v1 + 1;
  localparam int WB2 = 2*V;
  logic [V-1:0] xa;
  logic [WA-1:0] ya;
  logic [WB2-1:0] xb;
  logic [WB2+MB.v1:0] yb;
  int checks = 0, failures = 0;
  sau #(.W_IN(V),   .M(MA)) dut_a (.x(xa), .y(ya));
  sau #(.W_IN(WB2), .M(MB)) dut_b (.x(xb), .y(yb));
  initial begin
    for (int n = 0; n < 2000; n++) begin
      xa = (n == 0) ? '1 : V'($urandom);
      xb = (n == 0) ? '1 : {$urandom, $urandom};
      #1;
      checks += 2;
      if (128'(ya) != 128'(xa) * 128'(beta_of(MA))) failures++;
      if (128'(yb) != 128'(xb) * 128'(beta_of(MB))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
