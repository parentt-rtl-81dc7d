// ntt_pe: processing element of stage s of the forward NTT.
//
// Each cycle it takes one butterfly pair (x0 = a_j, x1 = a_{j+h}, with
// h = n/2^(s+1)), multiplies x1 by the twiddle factor and outputs
// y0 = x0 + w*x1 and y1 = x0 - w*x1 mod q (the decimation-in-time butterfly
// of the low-complexity negative-wrapped NTT, with the psi weighting merged
// into the twiddles). Nodes are executed in natural order: the u-th pair
// after in_first belongs to butterfly group g = u >> (m-1-s), whose twiddle
// is psi^((n/2^(s+1)) * (2*bitrev_s(g) + 1)). The PE stores the 2^s distinct
// twiddles of its stage in a ROM filled at elaboration.
//
// Timing: three register stages (inputs, product, sum/difference), as the
// three cut sets of the paper's NTT PE; in_valid/in_first travel with the
// data. in_first marks the first pair of a block of n/2 pairs; a free-running
// counter restarts on it, so blocks may follow each other back to back.
module ntt_pe
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
  localparam int unsigned CW   = LOGN - 1;          // counter over n/2 pairs
  localparam int unsigned RS   = 1 << STAGE;        // distinct twiddles

  typedef logic [RS-1:0][V-1:0] rom_t;

  function automatic rom_t gen_rom();
    rom_t  r;
    coef_t psi, w, step, val;
    psi  = psi_for(M, N);
    w    = pow_mod_c(psi, N >> (STAGE + 1), M.q);
    step = mul_mod_c(w, w, M.q);
    val  = w;
    for (int unsigned k = 0; k < RS; k++) begin
      r[bitrev(k, STAGE)] = val;
      val = mul_mod_c(val, step, M.q);
    end
    return r;
  endfunction

  localparam rom_t ROM = gen_rom();

  logic [CW-1:0] cnt, u_now;
  int unsigned   g;
  coef_t         tw;

  always_comb begin
    u_now = in_first ? '0 : cnt;
    g     = int'(u_now) >> (CW - STAGE);
    tw    = ROM[g];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else        cnt <= u_now + 1'b1;
  end

  // pipeline
  coef_t a_r1, b_r1, w_r1, a_r2, m_r2;
  logic [2:0] v_sr, f_sr;

  coef_t prod;
  mod_mult #(.M(M)) u_mul (.a(b_r1), .b(w_r1), .p(prod));

  always_ff @(posedge clk) begin
    a_r1 <= x0;
    b_r1 <= x1;
    w_r1 <= tw;
    a_r2 <= a_r1;
    m_r2 <= prod;
    y0   <= add_mod(a_r2, m_r2, M.q);
    y1   <= sub_mod(a_r2, m_r2, M.q);
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
