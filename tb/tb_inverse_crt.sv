// tb_inverse_crt: takes random x < q (and q-1, 0), feeds the residues
// x mod q_i to the inverse CRT unit and checks that x itself comes back
// ICRT_LAT cycles later.
module tb_inverse_crt;
  import parentt_pkg::*;
  localparam int NV = 300;
  logic clk = 0;
  coef_t p [T];
  wide_t y;
  int checks = 0, failures = 0;
  inverse_crt dut (.clk, .p(p), .y(y));
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  wide_t hist [NV];
  initial begin
    for (int n = 0; n < NV; n++) hist[n] = (n == 0) ? Q - 1 : (n == 1) ? '0 :
        wide_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom}) % Q;
    for (int n = 0; n < NV + int'(ICRT_LAT); n++) begin
      if (n < NV) for (int i = 0; i < T; i++) p[i] <= coef_t'(hist[n] % wide_t'(MODULI[i].q));
      @(posedge clk);
      #1;
      if (n >= int'(ICRT_LAT) - 1 && n - (int'(ICRT_LAT) - 1) < NV) begin
        checks++;
        if (y !== hist[n - (int'(ICRT_LAT) - 1)]) begin failures++; if (failures < 5) $display("n%0d y=%0h", n, y); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
