// tb_mod_mult: checks a*b mod q for random residues and the largest ones,
// for every prime of the modulus set.
module tb_mod_mult;
  import parentt_pkg::*;
  coef_t a [T], b [T], p [T];
  int checks = 0, failures = 0;
  for (genvar i = 0; i < T; i++) begin : g
    mod_mult #(.M(MODULI[i])) dut (.a(a[i]), .b(b[i]), .p(p[i]));
  end
  initial begin
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < T; i++) begin
        a[i] = (n == 0) ? MODULI[i].q - 1 : coef_t'($urandom % MODULI[i].q);
        b[i] = (n == 0) ? MODULI[i].q - 1 : coef_t'($urandom % MODULI[i].q);
      end
      #1;
      for (int i = 0; i < T; i++) begin
        logic [63:0] e;
        e = (64'(a[i]) * 64'(b[i])) % 64'(MODULI[i].q);
        checks++;
        if (64'(p[i]) != e) begin failures++; if (failures < 5) $display("q%0d %0d*%0d=%0d exp %0d", i, a[i], b[i], p[i], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
