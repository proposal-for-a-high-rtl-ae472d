// rns_normalize_lane -- one lane of the normalize pipeline: divides a signed
// RNS integer by the fractional range R_F and reports its sign.
//
// Input A is an accumulated sum of products of two fixed-point values, so it
// carries the scale factor R_F twice. The output is floor(A / R_F) in RNS,
// which carries R_F once again, plus neg = (A < 0). The algorithm works on
// digits only, with one fixed-modulus multiply per digit and stage:
//
//  stage 0        add the offset H = R_F*Q, making the value A' non-negative;
//  stages 1..F    exact division by m_0, m_1, ... m_{F-1} in turn: subtract
//                 digit i from every higher digit, multiply by m_i^-1. After F
//                 stages digits F..N-1 hold floor(A'/R_F);
//  stages F+1..N  mixed-radix conversion of those K = N-F digits. Each
//                 mixed-radix digit, as it appears, is (a) added with its
//                 place value into digits 0..F-1 (base extension, giving the
//                 fractional-modulus digits back), and (b) compared with the
//                 same mixed-radix digit of Q, the most significant difference
//                 deciding whether floor(A'/R_F) < Q, i.e. whether A < 0;
//  stage N+1      subtract Q from all digits.
//
// Latency NORM_LAT = N+2 cycles, one value per cycle per lane. Valid range of
// A: -(M+R_F)/2 <= A < (M-R_F)/2; outside it the result wraps. The quotient is
// rounded toward minus infinity. The paper states that normalization is done
// once after product summation, is "slow" (about one clock per digit) and is
// easily pipelined; this particular scaling and sign-detection procedure is
// the standard mixed-radix method and is this design's choice.
module rns_normalize_lane
  import rns_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  rns_word_t in_word,
  output logic      out_valid,
  output rns_word_t out_word,
  output logic      out_neg
);
  localparam int N = int'(N_DIGITS);
  localparam int F = int'(F_DIGITS);
  localparam int K = int'(K_DIGITS);
  localparam int S = N + 2;          // pipeline registers

  typedef enum logic [1:0] {CMP_EQ, CMP_LT, CMP_GT} cmp_e;

  logic      v   [S];
  rns_word_t a   [S];   // digits being scaled / mixed-radix converted
  rns_word_t y   [S];   // floor(A'/R_F), digits F..N-1
  rns_word_t e   [S];   // base-extended digits 0..F-1
  cmp_e      cmp [S];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < S; s++) v[s] <= 1'b0;
    end else begin
      v[0] <= in_valid;
      for (int s = 1; s < S; s++) v[s] <= v[s-1];
    end

    // stage 0: offset
    for (int j = 0; j < N; j++) a[0][j] <= mod_add(in_word[j], H_RES[j], modulus(j));

    // stages 1..F: divide by m_i
    for (int i = 0; i < F; i++) begin
      for (int j = 0; j < N; j++) begin
        if (j > i)
          a[i+1][j] <= mod_mul(mod_sub(a[i][j], a[i][i], modulus(j)), INV_TAB[i][j], modulus(j));
        else
          a[i+1][j] <= a[i][j];
      end
    end

    // stages F+1..F+K: mixed-radix conversion, base extension, sign compare
    for (int k = 0; k < K; k++) begin
      automatic int s = F + k;           // reads register s, writes s+1
      automatic residue_t d = a[s][F+k]; // k-th mixed-radix digit
      for (int j = 0; j < N; j++) begin
        if (j > F + k)
          a[s+1][j] <= mod_mul(mod_sub(a[s][j], d, modulus(j)), INV_TAB[F+k][j], modulus(j));
        else
          a[s+1][j] <= a[s][j];
      end
      y[s+1] <= (k == 0) ? a[s] : y[s];
      for (int i = 0; i < N; i++) begin
        if (i < F) begin
          automatic residue_t prev = (k == 0) ? '0 : e[s][i];
          e[s+1][i] <= mod_add(prev, mod_mul(mod_red({8'd0, d}, modulus(i)), BE_W[k][i], modulus(i)),
                               modulus(i));
        end else begin
          e[s+1][i] <= '0;
        end
      end
      if (d < Q_MR[k])      cmp[s+1] <= CMP_LT;
      else if (d > Q_MR[k]) cmp[s+1] <= CMP_GT;
      else                  cmp[s+1] <= (k == 0) ? CMP_EQ : cmp[s];
    end

    // stage N+1: remove the offset Q
    for (int j = 0; j < N; j++)
      a[S-1][j] <= mod_sub((j < F) ? e[S-2][j] : y[S-2][j], Q_RES[j], modulus(j));
    cmp[S-1] <= cmp[S-2];
  end

  assign out_valid = v[S-1];
  assign out_word  = a[S-1];
  assign out_neg   = (cmp[S-1] == CMP_LT);
endmodule
