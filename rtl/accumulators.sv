// accumulators -- accumulator memory of one digit slice.
//
// DEPTH rows of COLS residues. Each result row from the matrix multiply unit
// is either written into the addressed row (wr_accum low) or added to it
// modulo MODULUS (wr_accum high), so dot products longer than the array
// height are summed here across several passes. As in the array itself, the
// sum stays a DW-bit residue: accumulating never overflows a digit, and the
// single normalization needed for the whole product sum comes later.
//
// Timing: the write (or read-modify-write) completes at the clock edge that
// ends the cycle wr_valid is high. A read request (rd_en, rd_addr) returns
// rd_data one cycle later; it sees the old contents if the same row is being
// written in the request cycle. Memory contents are not reset.
//
// The paper shows the accumulators per digit and states that the product
// summation is a sequence of single-cycle modular operations; depth, ports
// and timing are this design's choice (the depth follows the original unit's
// 4096 accumulator rows).
module accumulators
  import rns_pkg::*;
#(
  parameter int unsigned COLS    = 256,
  parameter int unsigned DEPTH   = 4096,
  parameter int unsigned MODULUS = 251,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      wr_valid,
  input  logic                      wr_accum,
  input  logic [AW-1:0]             wr_addr,
  input  logic [COLS-1:0][DW-1:0]   wr_data,
  input  logic                      rd_en,
  input  logic [AW-1:0]             rd_addr,
  output logic [COLS-1:0][DW-1:0]   rd_data
);
  logic [COLS-1:0][DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      for (int c = 0; c < int'(COLS); c++)
        mem[wr_addr][c] <= wr_accum ? mod_add(mem[wr_addr][c], wr_data[c], MODULUS)
                                    : wr_data[c];
    end
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
