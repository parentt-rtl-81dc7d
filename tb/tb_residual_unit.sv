// tb_residual_unit: applies random 180-bit coefficients (and all-ones) to one
// residual unit per prime and checks a mod q_i against the % operator,
// RES_LAT cycles later, one coefficient per cycle.
module tb_residual_unit;
  import parentt_pkg::*;
  localparam int NV = 300;
  logic clk = 0;
  wide_t a = '0;
  coef_t r [T];
  int checks = 0, failures = 0, cyc = 0;
  for (genvar i = 0; i < T; i++) begin : g
    residual_unit #(.M(MODULI[i])) dut (.clk, .a(a), .r(r[i]));
  end
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  wide_t hist [NV];
  initial begin
    for (int n = 0; n < NV; n++) hist[n] = (n == 0) ? '1 : (n == 1) ? Q - 1 :
        {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    for (int n = 0; n < NV + int'(RES_LAT); n++) begin
      if (n < NV) a <= hist[n];
      @(posedge clk);
      #1;
      if (n >= int'(RES_LAT) - 1 && n - (int'(RES_LAT) - 1) < NV) begin
        for (int i = 0; i < T; i++) begin
          checks++;
          if (r[i] !== coef_t'(hist[n - (int'(RES_LAT) - 1)] % wide_t'(MODULI[i].q))) begin
            failures++; if (failures < 5) $display("n%0d q%0d r=%0d", n, i, r[i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
