// systolic_setup -- turns one unified-buffer row per cycle into the diagonal
// wavefront a weight-stationary systolic array needs.
//
// Element r of a row that enters at cycle T leaves on x_skew[r] during cycle
// T+1+r: a chain of r+1 registers per lane. valid and tag leave during T+1,
// aligned with lane 0, and the array delays them further itself. Rows may
// enter back to back, one per cycle, with no gaps needed.
//
// The paper only names this block ("Systolic Data Setup", one per digit
// slice); the skew-by-lane construction is the usual one for the
// weight-stationary array of the original tensor processing unit and is this
// design's choice. Reset (synchronous, active low) clears only valid; data
// registers carry don't-care values while valid is low.
module systolic_setup
  import rns_pkg::*;
#(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned TAG_W = 17
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [TAG_W-1:0]          in_tag,
  input  logic [ROWS-1:0][DW-1:0]   in_row,
  output logic                      out_valid,
  output logic [TAG_W-1:0]          out_tag,
  output logic [ROWS-1:0][DW-1:0]   x_skew
);
  // Lane r has r+1 stages; stage s of lane r is dly[r][s]. Stages beyond a
  // lane's depth are never read.
  for (genvar r = 0; r < ROWS; r++) begin : g_lane
    logic [DW-1:0] sr [r+1];
    always_ff @(posedge clk) begin
      sr[0] <= in_row[r];
      for (int s = 1; s <= r; s++) sr[s] <= sr[s-1];
    end
    assign x_skew[r] = sr[r];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    out_tag <= in_tag;
  end
endmodule
