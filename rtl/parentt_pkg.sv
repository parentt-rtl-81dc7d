// parentt_pkg: types, modulus set and constant functions shared by the
// PaReNTT polynomial multiplier.
//
// The design works on a 180-bit ciphertext modulus q split by the Chinese
// remainder theorem into T = 6 co-prime factors q_i of V = 30 bits. Every q_i
// has the special form q_i = 2^V - beta_i with beta_i = 2^v1 +/- 2^v2 - 1
// (four signed power-of-two terms), is NTT-compatible (q_i = 1 mod 2*4096),
// and keeps the shift-add chains of the residual unit inside the MU = 2V+15
// = 75-bit Barrett input (V + 2*(v1+1) + 2 <= 75, i.e. v1 <= 21). The six
// primes below are the only ones of that form meeting these rules; each
// psi is g^((q_i-1)/8192) for the smallest generator g of Z_{q_i}^*, a
// primitive 8192-th root of unity. The modulus form, T, V, MU and the search
// rules follow the paper; the concrete primes and roots are this design's.
//
// Everything else (Q, q*_i, q~_i, beta_i^k, Barrett constants, roots of
// unity for smaller n) is derived from this table by constant functions.
package parentt_pkg;

  localparam int unsigned V    = 30;          // word length of each q_i
  localparam int unsigned T    = 6;           // number of co-prime factors
  localparam int unsigned TP   = 3;           // t' : moduli per SAU block
  localparam int unsigned DBLK = 2;           // d  : blocks, T = DBLK*TP
  localparam int unsigned MU   = 2*V + 15;    // Barrett input width of the residual unit
  localparam int unsigned QW   = T*V;         // width of q (180 bits)
  localparam int unsigned NMAX = 4096;        // length the roots psi are given for

  typedef logic [V-1:0]  coef_t;              // residue coefficient
  typedef logic [QW-1:0] wide_t;              // coefficient modulo q

  // One special prime q = 2^V - (2^v1 + s*2^v2 - 1), s = -1 when v2_neg.
  typedef struct packed {
    logic [V-1:0] q;
    logic [V-1:0] psi;      // primitive 2*NMAX-th root of unity mod q
    logic [7:0]   v1;
    logic [7:0]   v2;
    logic         v2_neg;
  } modulus_t;

  localparam modulus_t MODULI [T] = '{
    '{q: 30'd1073479681, psi: 30'd371836615,  v1: 8'd19, v2: 8'd18, v2_neg: 1'b1},
    '{q: 30'd1073184769, psi: 30'd587512727,  v1: 8'd19, v2: 8'd15, v2_neg: 1'b0},
    '{q: 30'd1073233921, psi: 30'd424392583,  v1: 8'd19, v2: 8'd14, v2_neg: 1'b1},
    '{q: 30'd1073643521, psi: 30'd521398294,  v1: 8'd17, v2: 8'd15, v2_neg: 1'b1},
    '{q: 30'd1073692673, psi: 30'd510015274,  v1: 8'd16, v2: 8'd14, v2_neg: 1'b1},
    '{q: 30'd1073668097, psi: 30'd1047115509, v1: 8'd16, v2: 8'd13, v2_neg: 1'b0}
  };

  // ---------------- small modular helpers (constants and datapath) -------
  function automatic coef_t add_mod(coef_t a, coef_t b, coef_t q);
    logic [V:0] s;
    s = {1'b0, a} + {1'b0, b};
    return (s >= {1'b0, q}) ? coef_t'(s - {1'b0, q}) : coef_t'(s);
  endfunction

  function automatic coef_t sub_mod(coef_t a, coef_t b, coef_t q);
    return (a >= b) ? coef_t'(a - b) : coef_t'(a + q - b);
  endfunction

  // x/2 mod q for odd q: shift right, add (q+1)/2 when x was odd.
  function automatic coef_t half_mod(coef_t x, coef_t q);
    coef_t h;
    h = x >> 1;
    return x[0] ? coef_t'(h + ((q + 1) >> 1)) : h;
  endfunction

  function automatic coef_t mul_mod_c(coef_t a, coef_t b, coef_t q);
    logic [2*V-1:0] p;
    p = (2*V)'(a) * (2*V)'(b);
    return coef_t'(p % (2*V)'(q));
  endfunction

  function automatic coef_t pow_mod_c(coef_t a, longint unsigned e, coef_t q);
    coef_t r, b;
    r = 1; b = a;
    while (e != 0) begin
      if (e[0]) r = mul_mod_c(r, b, q);
      b = mul_mod_c(b, b, q);
      e = e >> 1;
    end
    return r;
  endfunction

  // Primitive 2n-th root of unity for an n-point transform, n | NMAX.
  function automatic coef_t psi_for(modulus_t m, int unsigned n);
    return pow_mod_c(m.psi, NMAX / n, m.q);
  endfunction

  // Bit reversal of the low 'bits' bits of x.
  function automatic int unsigned bitrev(int unsigned x, int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned k = 0; k < bits; k++) r = (r << 1) | ((x >> k) & 1);
    return r;
  endfunction

  function automatic int unsigned clog2(longint unsigned x);
    int unsigned r;
    r = 0;
    while ((64'd1 << r) < x) r++;
    return r;
  endfunction

  // beta = 2^V mod q = 2^v1 +/- 2^v2 - 1.
  function automatic coef_t beta_of(modulus_t m);
    return m.v2_neg ? coef_t'((1 << m.v1) - (1 << m.v2) - 1)
                    : coef_t'((1 << m.v1) + (1 << m.v2) - 1);
  endfunction

  // ---------------- CRT constants ----------------------------------------
  function automatic wide_t q_total();
    logic [QW+V-1:0] acc;
    acc = 1;
    for (int i = 0; i < T; i++) acc = (QW+V)'(acc * MODULI[i].q);
    return wide_t'(acc);
  endfunction

  // q*_i = q / q_i, a (T-1)*V-bit integer.
  function automatic wide_t q_star(int i);
    logic [QW+V-1:0] acc;
    acc = 1;
    for (int k = 0; k < T; k++) if (k != i) acc = (QW+V)'(acc * MODULI[k].q);
    return wide_t'(acc);
  endfunction

  // q~_i = (q / q_i)^(-1) mod q_i (Fermat inverse).
  function automatic coef_t q_tilde(int i);
    coef_t r;
    r = coef_t'(q_star(i) % MODULI[i].q);
    return pow_mod_c(r, longint'(MODULI[i].q) - 2, MODULI[i].q);
  endfunction

  localparam wide_t Q = q_total();

  // ---------------- pipeline timing -------------------------------------
  localparam int unsigned PE_LAT  = 3;   // register stages in one butterfly PE
  localparam int unsigned PW_LAT  = 1;   // point-wise multiplier
  localparam int unsigned RES_LAT = 3;   // residual (pre-processing) unit
  // inverse CRT: 1 (q~ product + Barrett) + 1 (q* product) + adder-tree levels
  localparam int unsigned ICRT_LAT = 2 + clog2(T);

  // A DSD adds D cycles; NTT DSDs hold n/4, n/8, ..., 1 words, iNTT DSDs
  // 1, 2, ..., n/4, so each unit adds n/2 - 1 cycles of DSD delay.
  function automatic int unsigned unit_latency(int unsigned n);
    return PE_LAT * clog2(n) + n/2 - 1;
  endfunction

  function automatic int unsigned polymult_latency(int unsigned n);
    return 2 * unit_latency(n) + PW_LAT;
  endfunction

endpackage
