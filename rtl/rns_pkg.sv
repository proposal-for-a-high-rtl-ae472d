// rns_pkg -- number system shared by every block of the RNS tensor processor.
//
// A value is held as N_DIGITS residues, one 8-bit residue per pairwise-prime
// modulus. The moduli are the eighteen largest primes below 256, so every
// residue fits an 8-bit digit and every digit slice can reuse 8x8-bit
// multipliers. Eighteen digits and 8-bit digits follow the text; the choice of
// primes is this design's own.
//
// Fixed-point fractions: the first F_DIGITS moduli form the fractional range
// R_F = m0*m1*...*m6 (about 2^55). A real number x is stored as the integer
// X = x*R_F, so a sum of products of two such numbers carries a factor R_F^2
// and must be divided once by R_F ("normalized") after accumulation.
//
// Signed values: the dynamic range M = m0*...*m17 (about 2^138) is used
// symmetrically; X and X+M are the same word, and a word is negative when its
// value lies in the upper half. Sign detection and scaling use the offset
// H = R_F*Q with Q = (M/R_F + 1)/2, which maps the signed range onto [0, M).
//
// All tables below are elaboration-time constants computed by the functions
// in this package; nothing is read from a file.
package rns_pkg;

  localparam int unsigned N_DIGITS = 18;               // digit slices
  localparam int unsigned F_DIGITS = 7;                // fractional digits
  localparam int unsigned K_DIGITS = N_DIGITS - F_DIGITS;
  localparam int unsigned DW       = 8;                // bits per residue digit

  // Binary fixed-point format seen by the host: two's complement Q15.48.
  localparam int unsigned BIN_W  = 64;
  localparam int unsigned BIN_FB = 48;

  // Wide scratch width for elaboration-time big-integer constants.
  localparam int unsigned BIGW = 192;

  typedef logic [DW-1:0]                 residue_t;
  typedef residue_t [N_DIGITS-1:0]       rns_word_t;   // digit d at index d
  typedef logic [BIGW-1:0]               big_t;

  // Moduli, digit 0 first (largest prime first).
  localparam rns_word_t MODULI = {8'd157, 8'd163, 8'd167, 8'd173, 8'd179, 8'd181,
                                  8'd191, 8'd193, 8'd197, 8'd199, 8'd211, 8'd223,
                                  8'd227, 8'd229, 8'd233, 8'd239, 8'd241, 8'd251};

  // ---------------------------------------------------------------- modular ops
  // m is always a constant after loop unrolling, so each operator maps onto a
  // fixed-modulus circuit.
  function automatic residue_t mod_red(input logic [15:0] a, input int unsigned m);
    return residue_t'(32'(a) % m);
  endfunction

  function automatic residue_t mod_add(input residue_t a, input residue_t b, input int unsigned m);
    logic [8:0] s;
    s = {1'b0, a} + {1'b0, b};
    return (s >= 9'(m)) ? residue_t'(s - 9'(m)) : residue_t'(s);
  endfunction

  // a - b mod m, where a < m and b may be any 8-bit residue of a larger modulus.
  function automatic residue_t mod_sub(input residue_t a, input residue_t b, input int unsigned m);
    residue_t bb;
    bb = mod_red({8'd0, b}, m);
    return (a >= bb) ? residue_t'(a - bb) : residue_t'(9'(a) + 9'(m) - 9'(bb));
  endfunction

  function automatic residue_t mod_mul(input residue_t a, input residue_t b, input int unsigned m);
    logic [15:0] p;
    p = 16'(a) * 16'(b);
    return mod_red(p, m);
  endfunction

  // ------------------------------------------------- elaboration-time helpers
  function automatic int unsigned modulus(input int unsigned d);
    return int'(MODULI[d]);
  endfunction

  // Multiplicative inverse of a modulo m (extended Euclid), m prime.
  function automatic int unsigned mod_inv(input int unsigned a, input int unsigned m);
    int t, nt, r, nr, q, tmp;
    t = 0; nt = 1; r = int'(m); nr = int'(a % m);
    while (nr != 0) begin
      q = r / nr;
      tmp = t - q * nt; t = nt; nt = tmp;
      tmp = r - q * nr; r = nr; nr = tmp;
    end
    if (t < 0) t = t + int'(m);
    return int'(t);
  endfunction

  typedef logic [N_DIGITS-1:0][N_DIGITS-1:0][DW-1:0] inv_tab_t;

  // INV_TAB[i][j] = m_i^-1 mod m_j (i != j).
  function automatic inv_tab_t gen_inv_tab();
    inv_tab_t t;
    t = '0;
    for (int i = 0; i < int'(N_DIGITS); i++)
      for (int j = 0; j < int'(N_DIGITS); j++)
        if (i != j) t[i][j] = DW'(mod_inv(modulus(i), modulus(j)));
    return t;
  endfunction

  // Product of moduli lo..hi-1 as a big integer.
  function automatic big_t prod_range(input int unsigned lo, input int unsigned hi);
    big_t p;
    p = 1;
    for (int unsigned i = lo; i < hi; i++) p = p * big_t'(modulus(i));
    return p;
  endfunction

  function automatic rns_word_t big_to_rns(input big_t v);
    rns_word_t r;
    for (int d = 0; d < int'(N_DIGITS); d++) r[d] = DW'(v % big_t'(modulus(d)));
    return r;
  endfunction

  localparam inv_tab_t  INV_TAB = gen_inv_tab();
  localparam big_t      R_F_BIG = prod_range(0, F_DIGITS);
  localparam logic [63:0] R_F   = R_F_BIG[63:0];
  localparam big_t      P_HI    = prod_range(F_DIGITS, N_DIGITS);   // M / R_F
  localparam big_t      Q_BIG   = (P_HI + 1) >> 1;
  localparam big_t      H_BIG   = R_F_BIG * Q_BIG;                  // offset H = R_F*Q
  localparam rns_word_t Q_RES   = big_to_rns(Q_BIG);
  localparam rns_word_t H_RES   = big_to_rns(H_BIG);

  typedef logic [K_DIGITS-1:0][DW-1:0] mr_word_t;

  // Mixed-radix digits of Q over the integer moduli m_F .. m_{N-1}
  // (least significant first).
  function automatic mr_word_t gen_q_mr();
    mr_word_t r;
    big_t q;
    q = Q_BIG;
    for (int k = 0; k < int'(K_DIGITS); k++) begin
      r[k] = DW'(q % big_t'(modulus(F_DIGITS + k)));
      q    = q / big_t'(modulus(F_DIGITS + k));
    end
    return r;
  endfunction
  localparam mr_word_t Q_MR = gen_q_mr();

  // BE_W[k][i] = (m_F * ... * m_{F+k-1}) mod m_i, i < F: weights used to
  // extend the base from the integer moduli back to the fractional ones.
  typedef logic [K_DIGITS-1:0][F_DIGITS-1:0][DW-1:0] be_tab_t;
  function automatic be_tab_t gen_be_w();
    be_tab_t t;
    for (int k = 0; k < int'(K_DIGITS); k++)
      for (int i = 0; i < int'(F_DIGITS); i++)
        t[k][i] = DW'(prod_range(F_DIGITS, F_DIGITS + k) % big_t'(modulus(i)));
    return t;
  endfunction
  localparam be_tab_t BE_W = gen_be_w();

  // Forward conversion: CW[d][c] = 2^(8c) mod m_d for the 9 byte chunks of a
  // 72-bit magnitude.
  localparam int unsigned FWD_CHUNKS = 9;
  typedef logic [N_DIGITS-1:0][FWD_CHUNKS-1:0][DW-1:0] cw_tab_t;
  function automatic cw_tab_t gen_cw();
    cw_tab_t t;
    for (int d = 0; d < int'(N_DIGITS); d++)
      for (int c = 0; c < int'(FWD_CHUNKS); c++)
        t[d][c] = DW'((big_t'(1) << (8 * c)) % big_t'(modulus(d)));
    return t;
  endfunction
  localparam cw_tab_t CW = gen_cw();

  // Reverse conversion weights: mixed-radix place values.
  typedef logic [F_DIGITS-1:0][63:0]  frw_tab_t;   // m_0*..*m_{k-1}
  typedef logic [K_DIGITS-1:0][127:0] inw_tab_t;   // m_F*..*m_{F+k-1}
  function automatic frw_tab_t gen_frw();
    frw_tab_t t;
    for (int k = 0; k < int'(F_DIGITS); k++) t[k] = 64'(prod_range(0, k));
    return t;
  endfunction
  function automatic inw_tab_t gen_inw();
    inw_tab_t t;
    for (int k = 0; k < int'(K_DIGITS); k++) t[k] = 128'(prod_range(F_DIGITS, F_DIGITS + k));
    return t;
  endfunction
  localparam frw_tab_t FR_W  = gen_frw();
  localparam inw_tab_t INT_W = gen_inw();
  localparam logic [127:0] Q_BIN = Q_BIG[127:0];
  // floor(2^(BIN_FB+64) / R_F): fraction X_f/R_F becomes (X_f*RECIP) >> 64.
  localparam big_t RECIP_BIG = (big_t'(1) << (BIN_FB + 64)) / R_F_BIG;
  localparam logic [63:0] RECIP = RECIP_BIG[63:0];

  // Latencies of the pipelines, in clock cycles.
  localparam int unsigned NORM_LAT = N_DIGITS + 2;  // normalize pipeline
  localparam int unsigned FWD_LAT  = 4;             // binary -> RNS
  localparam int unsigned REV_LAT  = N_DIGITS + 4;  // RNS -> binary

  // ------------------------------------------------------------ instruction set
  typedef enum logic [1:0] {
    OP_NOP      = 2'd0,
    OP_LOAD_W   = 2'd1,   // shift one weight tile from the weight FIFOs into the arrays
    OP_MATMUL   = 2'd2,   // stream unified-buffer rows through the arrays into accumulators
    OP_ACTIVATE = 2'd3    // normalize + activate accumulator rows back into the unified buffer
  } opcode_e;

  typedef enum logic {
    ACT_NONE = 1'b0,
    ACT_RELU = 1'b1
  } act_func_e;

  typedef struct packed {
    opcode_e     op;
    logic        accumulate;   // MATMUL: add into accumulators instead of overwriting
    act_func_e   func;         // ACTIVATE: activation function
    logic [15:0] len;          // number of rows
    logic [15:0] acc_addr;     // first accumulator row
    logic [15:0] ub_addr;      // first unified-buffer row
  } instr_t;

  typedef enum logic [1:0] {
    HOST_PUSH_INSTR = 2'd0,    // data[51:0] is an instr_t
    HOST_WRITE_UB   = 2'd1,    // data is a Q15.48 value, written at (addr, lane)
    HOST_READ_UB    = 2'd2     // value at (addr, lane) comes back converted to Q15.48
  } host_cmd_e;

endpackage
