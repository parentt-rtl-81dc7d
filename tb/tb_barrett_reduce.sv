// tb_barrett_reduce: checks barrett_reduce against the % operator for
// random and corner-case inputs, for a 2V-bit and a 75-bit input width and
// two different primes.
module tb_barrett_reduce;
  import parentt_pkg::*;
  localparam modulus_t M0 = MODULI[0];
  localparam modulus_t M3 = MODULI[3];
  logic [2*V-1:0] x0;
  logic [MU-1:0]  x1;
  coef_t r0, r1;
  int checks = 0, failures = 0;

  barrett_reduce #(.W(2*V), .M(M0)) dut0 (.x(x0), .r(r0));
  barrett_reduce #(.W(MU),  .M(M3)) dut1 (.x(x1), .r(r1));

  initial begin
    for (int i = 0; i < 4000; i++) begin
      case (i)
        0: begin x0 = '1; x1 = '1; end
        1: begin x0 = (2*V)'(M0.q); x1 = MU'(M3.q); end
        2: begin x0 = (2*V)'(M0.q) - 1; x1 = MU'(M3.q) * 3 - 1; end
        3: begin x0 = (2*V)'(M0.q-1) * (M0.q-1); x1 = '0; end
        default: begin
          x0 = {$urandom, $urandom};
          x1 = {$urandom, $urandom, $urandom};
        end
      endcase
      #1;
      checks += 2;
      if (r0 !== coef_t'(x0 % (2*V)'(M0.q))) begin failures++; $display("W=60 x=%0d r=%0d", x0, r0); end
      if (r1 !== coef_t'(x1 % MU'(M3.q)))    begin failures++; $display("W=75 x=%0d r=%0d", x1, r1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
