// sau: Shift Add Unit, multiplies its input by beta_i = 2^v1 +/- 2^v2 - 1,
// which equals 2^V mod q_i for the special prime q_i.
//
// Two left shifters (by v1 and v2), one subtraction of the input and one
// final adder, exactly as the unit is drawn in the paper; the output is
// W_IN + v1 + 1 bits wide, enough for any input (no reduction is done here).
// Combinational.
module sau
  import parentt_pkg::*;
#(
  parameter int unsigned W_IN = V,
  parameter modulus_t    M    = MODULI[0],
  localparam int unsigned W_OUT = W_IN + int'(M.v1) + 1
) (
  input  logic [W_IN-1:0]  x,
  output logic [W_OUT-1:0] y
);
  logic [W_OUT-1:0] xs1, xs2, xw;
  always_comb begin
    xw  = W_OUT'(x);
    xs1 = xw << M.v1;
    xs2 = xw << M.v2;
    // (x << v2) -/+ x first, then add (x << v1), as in the figure.
    if (M.v2_neg) y = xs1 - (xs2 + xw);
    else          y = xs1 + (xs2 - xw);
  end
endmodule
