// rev_converter -- fractional RNS to binary fixed-point conversion pipeline.
//
// Input: an RNS word X (a fixed-point value x = X / R_F). Output: x as a two's
// complement Q15.48 number, truncated toward minus infinity, with ovf set
// (and the output saturated) when the integer part does not fit 16 bits.
//
//  stage 0        X' = X + H, H = R_F*Q, so X' is non-negative;
//  stages 1..N    mixed-radix conversion of X' over all N digits, fractional
//                 moduli first: X' = d0 + d1*m0 + ... ; one digit per stage;
//  stage N+1      X' mod R_F = sum_{k<F} d_k*(m0..m_{k-1}) (binary, 56 bits)
//                 and floor(X'/R_F) = sum_{k>=F} d_k*(m_F..m_{k-1}) (binary);
//  stage N+2      fraction bits = ((X' mod R_F) * floor(2^112/R_F)) >> 64,
//                 integer part = floor(X'/R_F) - Q;
//  stage N+3      saturate and pack.
//
// The fraction is exact to within one unit in the last place (the reciprocal
// is truncated). Latency REV_LAT = N_DIGITS+4 cycles, one value per cycle; a
// tag travels along. The paper gives only the block's function and that it is
// fully pipelined; the method is this design's choice.
module rev_converter
  import rns_pkg::*;
#(
  parameter int unsigned TAG_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        in_tag,
  input  rns_word_t               in_word,
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output logic signed [BIN_W-1:0] out_data,
  output logic                    out_ovf
);
  localparam int N  = int'(N_DIGITS);
  localparam int F  = int'(F_DIGITS);
  localparam int K  = int'(K_DIGITS);
  localparam int IW = int'(BIN_W - BIN_FB);   // integer bits incl. sign

  logic [REV_LAT-1:0] vpipe;
  logic [TAG_W-1:0]   tpipe [REV_LAT];

  rns_word_t x [N+1];   // x[s]: digits still to convert after s stages
  rns_word_t d [N+1];   // d[s]: mixed-radix digits found so far

  logic [63:0]         frac_int;   // stage N+1
  logic [127:0]        hi_int;
  logic [BIN_FB-1:0]   frac_bits;  // stage N+2
  logic signed [128:0] ival;

  always_ff @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[REV_LAT-2:0], in_valid};
    tpipe[0] <= in_tag;
    for (int k = 1; k < int'(REV_LAT); k++) tpipe[k] <= tpipe[k-1];

    for (int j = 0; j < N; j++) x[0][j] <= mod_add(in_word[j], H_RES[j], modulus(j));
    d[0] <= '0;

    for (int k = 0; k < N; k++) begin
      for (int j = 0; j < N; j++) begin
        if (j > k) x[k+1][j] <= mod_mul(mod_sub(x[k][j], x[k][k], modulus(j)), INV_TAB[k][j], modulus(j));
        else       x[k+1][j] <= x[k][j];
        if (j == k) d[k+1][j] <= x[k][k];
        else        d[k+1][j] <= d[k][j];
      end
    end

    begin
      automatic logic [63:0]  fsum = '0;
      automatic logic [127:0] isum = '0;
      for (int k = 0; k < F; k++) fsum = fsum + 64'(d[N][k]) * FR_W[k];
      for (int k = 0; k < K; k++) isum = isum + 128'(d[N][F+k]) * INT_W[k];
      frac_int <= fsum;
      hi_int   <= isum;
    end

    begin
      automatic logic [127:0] fp = 128'(frac_int) * 128'(RECIP);
      frac_bits <= fp[64 +: BIN_FB];
      ival      <= $signed({1'b0, hi_int}) - $signed({1'b0, Q_BIN});
    end

    begin
      automatic logic signed [128:0] imax = (129'sd1 <<< (IW - 1)) - 129'sd1;
      automatic logic signed [128:0] imin = -(129'sd1 <<< (IW - 1));
      if (ival > imax) begin
        out_data <= {1'b0, {(BIN_W-1){1'b1}}};
        out_ovf  <= 1'b1;
      end else if (ival < imin) begin
        out_data <= {1'b1, {(BIN_W-1){1'b0}}};
        out_ovf  <= 1'b1;
      end else begin
        out_data <= {ival[IW-1:0], frac_bits};
        out_ovf  <= 1'b0;
      end
    end
  end

  assign out_valid = vpipe[REV_LAT-1];
  assign out_tag   = tpipe[REV_LAT-1];
endmodule
