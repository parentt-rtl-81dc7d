// intt_pe: processing element of stage s of the inverse NTT.
//
// Decimation-in-frequency butterfly with the 1/2 scaling of every stage
// merged in: y0 = (x0 + x1)/2 and y1 = ((x0 - x1)/2) * w mod q. Halving
// modulo the odd q is a right shift plus, when the value was odd, an addition
// of (q+1)/2, selected by a multiplexer on the value's LSB.
//
// Scheduling follows the bit-reversed folding set of the iNTT: the u-th pair
// after in_first is butterfly node y = bitrev_{m-1}(u). With h = n/2^(s+1),
// node y pairs positions (2h*(y/h) + j, 2h*(y/h) + j + h), j = y mod h, and
// uses twiddle psi^(-2^s * (2j+1)); the h distinct twiddles sit in a ROM
// filled at elaboration. This order is what lets the iNTT consume the NTT
// output stream directly, without a reordering buffer.
//
// Timing: three register stages (inputs, sum/difference, halved and
// multiplied outputs), matching the paper's three cut sets; in_valid and
// in_first travel with the data.
module intt_pe
  import parentt_pkg::*;
#(
  parameter int unsigned N     = NMAX,
  parameter int unsigned STAGE = 0,
  parameter modulus_t    M     = MODULI[0]
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  coef_t x0,
  input  coef_t x1,
  output logic  out_valid,
  output logic  out_first,
  output coef_t y0,
  output coef_t y1
);
  localparam int unsigned LOGN = clog2(N);
  localparam int unsigned CW   = LOGN - 1;
  localparam int unsigned RS   = N >> (STAGE + 1);   // h distinct twiddles

  typedef logic [RS-1:0][V-1:0] rom_t;

  function automatic rom_t gen_rom();
    rom_t  r;
    coef_t psi_inv, w, step, val;
    psi_inv = pow_mod_c(psi_for(M, N), 2*N - 1, M.q);
    w    = pow_mod_c(psi_inv, 1 << STAGE, M.q);
    step = mul_mod_c(w, w, M.q);
    val  = w;
    for (int unsigned j = 0; j < RS; j++) begin
      r[j] = val;
      val  = mul_mod_c(val, step, M.q);
    end
    return r;
  endfunction

  localparam rom_t ROM = gen_rom();

  logic [CW-1:0] cnt, u_now;
  int unsigned   node, j;
  coef_t         tw;

  always_comb begin
    u_now = in_first ? '0 : cnt;
    node  = bitrev(int'(u_now), CW);
    j     = node & (RS - 1);
    tw    = ROM[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else        cnt <= u_now + 1'b1;
  end

  coef_t a_r1, b_r1, w_r1, s_r2, d_r2, w_r2, prod;
  logic [2:0] v_sr, f_sr;

  mod_mult #(.M(M)) u_mul (.a(half_mod(d_r2, M.q)), .b(w_r2), .p(prod));

  always_ff @(posedge clk) begin
    a_r1 <= x0;
    b_r1 <= x1;
    w_r1 <= tw;
    s_r2 <= add_mod(a_r1, b_r1, M.q);
    d_r2 <= sub_mod(a_r1, b_r1, M.q);
    w_r2 <= w_r1;
    y0   <= half_mod(s_r2, M.q);
    y1   <= prod;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_sr <= '0;
      f_sr <= '0;
    end else begin
      v_sr <= {v_sr[1:0], in_valid};
      f_sr <= {f_sr[1:0], in_first};
    end
  end
  assign out_valid = v_sr[2];
  assign out_first = f_sr[2];

endmodule
