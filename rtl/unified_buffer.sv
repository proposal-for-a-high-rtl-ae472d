// unified_buffer -- local activation storage of one digit slice.
//
// DEPTH rows of LANES residues, one residue per lane. Every digit slice has
// its own buffer holding its own digit of each stored value, so a full RNS
// value is spread over the eighteen slices at the same (row, lane).
//
// One read port and one write port:
//  * rd_en/rd_addr: the whole row appears on rd_data in the next cycle (used
//    to feed the systolic array and, one lane at a time, the host).
//  * wr_en/wr_addr/wr_mask/wr_data: lanes whose mask bit is set are written
//    at the clock edge. The normalize pipeline writes whole rows; the host
//    path writes single lanes.
// Contents are not reset.
//
// The paper names the block and notes that each digit may live in its own
// memory subsystem; its size and port structure are not given and are this
// design's choice.
module unified_buffer
  import rns_pkg::*;
#(
  parameter int unsigned LANES = 256,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      rd_en,
  input  logic [AW-1:0]             rd_addr,
  output logic [LANES-1:0][DW-1:0]  rd_data,
  input  logic                      wr_en,
  input  logic [AW-1:0]             wr_addr,
  input  logic [LANES-1:0]          wr_mask,
  input  logic [LANES-1:0][DW-1:0]  wr_data
);
  logic [LANES-1:0][DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < int'(LANES); l++)
        if (wr_mask[l]) mem[wr_addr][l] <= wr_data[l];
    end
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
