// fwd_converter -- binary fixed-point to fractional RNS conversion pipeline.
//
// Input: a two's complement Q15.48 number b (64 bits: sign, 15 integer bits,
// 48 fraction bits). Output: the RNS word of X = round(b * R_F / 2^48), the
// fixed-point integer the rest of the design works on.
//
//  stage 1  P = b * R_F (a binary multiply by a 56-bit constant)
//  stage 2  X = (P + 2^47) >> 48, rounded half up; split into sign and a
//           72-bit magnitude
//  stage 3  for every digit d and every byte c of the magnitude:
//           byte_c * (2^(8c) mod m_d) mod m_d -- 18 x 9 = 162 8x8-bit
//           modular multipliers, the count the paper estimates
//           (18^2/2 = 162) for a forward pipeline of 18-digit words
//  stage 4  per digit: add the nine partial residues mod m_d; negate
//           (m_d - r) if X < 0
//
// Latency FWD_LAT = 4 cycles, one value per cycle; a tag travels along. The
// paper gives the function ("binary FP to residue FP converter pipeline"),
// says it is fully pipelined and built from 8x8 multipliers, and gives the
// multiplier count; the binary input format and the stage split are this
// design's choice. "FP" is read as fixed point, the format the RNS side uses.
module fwd_converter
  import rns_pkg::*;
#(
  parameter int unsigned TAG_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic signed [BIN_W-1:0] in_data,
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output rns_word_t               out_word
);
  localparam int unsigned NC = FWD_CHUNKS;
  localparam int unsigned MW = 8 * NC;          // 72-bit magnitude

  logic [FWD_LAT-1:0] vpipe;
  logic [TAG_W-1:0]   tpipe [FWD_LAT];

  logic signed [BIN_W+64:0] prod;               // stage 1
  logic                     neg2;               // stage 2
  logic [MW-1:0]            mag2;
  logic                     neg3;               // stage 3
  residue_t                 part [N_DIGITS][NC];

  always_ff @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[FWD_LAT-2:0], in_valid};
    tpipe[0] <= in_tag;
    for (int k = 1; k < int'(FWD_LAT); k++) tpipe[k] <= tpipe[k-1];

    // stage 1
    prod <= (BIN_W+65)'(in_data) * $signed({1'b0, R_F});

    // stage 2
    begin
      automatic logic signed [BIN_W+64:0] half = (BIN_W+65)'(1) <<< (BIN_FB - 1);
      automatic logic signed [BIN_W+64:0] r    = (prod + half) >>> BIN_FB;
      neg2 <= r[BIN_W+64];
      mag2 <= r[BIN_W+64] ? MW'(-r) : MW'(r);
    end

    // stage 3
    neg3 <= neg2;
    for (int d = 0; d < int'(N_DIGITS); d++)
      for (int c = 0; c < int'(NC); c++)
        part[d][c] <= mod_mul(mag2[8*c +: 8], CW[d][c], modulus(d));

    // stage 4
    for (int d = 0; d < int'(N_DIGITS); d++) begin
      automatic residue_t s = '0;
      for (int c = 0; c < int'(NC); c++) s = mod_add(s, part[d][c], modulus(d));
      out_word[d] <= neg3 ? mod_sub('0, s, modulus(d)) : s;
    end
  end

  assign out_valid = vpipe[FWD_LAT-1];
  assign out_tag   = tpipe[FWD_LAT-1];
endmodule
