// mmu -- matrix multiply unit of one digit slice: a ROWS x COLS
// weight-stationary systolic array of modular multiply-accumulate cells.
//
// Every cell holds one weight residue w[r][c]. An activation residue enters
// row r at the left edge and moves one cell to the right per cycle; a partial
// sum enters column c at the top as zero and moves one cell down per cycle,
// each cell adding activation*weight to it modulo MODULUS. Because the digit
// is a residue, the modular reduction happens inside every cell and the
// partial sums stay DW bits wide: there is no carry out of the digit. This is
// one of the two placements of the "fixed MOD function" the paper offers
// (inside each 8x8 multiply-add rather than after the accumulators).
//
// Interface and timing:
//  * Weight load: while w_shift is high, w_row enters row 0 and every row
//    moves down one. After ROWS shifts the first row shifted in sits in row
//    ROWS-1, so a tile is shifted in last row first. Weights must not be
//    shifted while results are in flight.
//  * Compute: x_skew[r] must carry element r of input vector t during cycle
//    T+r, where T is the cycle x_valid/x_tag for that vector are high (see
//    systolic_setup). One vector per cycle, back to back.
//  * Result: y[c] = sum_r x[r]*w[r][c] mod MODULUS for all columns at once,
//    with y_valid/y_tag, during cycle T+ROWS+COLS-1. The bottom of each column
//    is delayed by COLS-1-c registers so the columns line up again.
//  * busy is high while any vector is inside the array.
// Throughput is ROWS*COLS modular multiply-adds per cycle (65,536 at the
// default 256x256, the "64K per cycle" of the original unit).
module mmu
  import rns_pkg::*;
#(
  parameter int unsigned ROWS    = 256,
  parameter int unsigned COLS    = 256,
  parameter int unsigned MODULUS = 251,
  parameter int unsigned TAG_W   = 17
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      w_shift,
  input  logic [COLS-1:0][DW-1:0]   w_row,
  input  logic                      x_valid,
  input  logic [TAG_W-1:0]          x_tag,
  input  logic [ROWS-1:0][DW-1:0]   x_skew,
  output logic                      y_valid,
  output logic [TAG_W-1:0]          y_tag,
  output logic [COLS-1:0][DW-1:0]   y,
  output logic                      busy
);
  localparam int unsigned LAT = ROWS + COLS - 1;

  residue_t w     [ROWS][COLS];
  residue_t a_reg [ROWS][COLS];   // activation leaving cell (r,c) to the right
  residue_t p_reg [ROWS][COLS];   // partial sum leaving cell (r,c) downwards

  always_ff @(posedge clk) begin
    if (w_shift) begin
      for (int c = 0; c < int'(COLS); c++) w[0][c] <= w_row[c];
      for (int r = 1; r < int'(ROWS); r++) w[r] <= w[r-1];
    end
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < int'(ROWS); r++) begin
      for (int c = 0; c < int'(COLS); c++) begin
        automatic residue_t ain = (c == 0) ? x_skew[r] : a_reg[r][c-1];
        automatic residue_t pin = (r == 0) ? '0 : p_reg[r-1][c];
        a_reg[r][c] <= ain;
        p_reg[r][c] <= mod_add(pin, mod_mul(ain, w[r][c], MODULUS), MODULUS);
      end
    end
  end

  // De-skew: column c leaves the array c cycles after column 0.
  for (genvar c = 0; c < COLS; c++) begin : g_deskew
    localparam int unsigned D = COLS - 1 - c;
    if (D == 0) begin : g_direct
      assign y[c] = p_reg[ROWS-1][c];
    end else begin : g_delay
      residue_t sr [D];
      always_ff @(posedge clk) begin
        sr[0] <= p_reg[ROWS-1][c];
        for (int k = 1; k < int'(D); k++) sr[k] <= sr[k-1];
      end
      assign y[c] = sr[D-1];
    end
  end

  // valid and tag travel alongside.
  logic [LAT-1:0]   vpipe;
  logic [TAG_W-1:0] tpipe [LAT];
  always_ff @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], x_valid};
    tpipe[0] <= x_tag;
    for (int k = 1; k < int'(LAT); k++) tpipe[k] <= tpipe[k-1];
  end
  assign y_valid = vpipe[LAT-1];
  assign y_tag   = tpipe[LAT-1];
  assign busy    = x_valid || (|vpipe);

  a_no_shift_in_flight: assert property (@(posedge clk) disable iff (!rst_n) w_shift |-> !busy)
    else $error("mmu: weights shifted while vectors are in flight");
endmodule
