// sync_fifo -- single-clock first-in first-out buffer, used as the per-digit
// weight FIFO (one entry = one row of weight residues for the systolic array)
// and as the instruction FIFO of the controller.
//
// Circular buffer of DEPTH entries with read and write pointers one bit wider
// than the address, so full and empty are told apart without a counter. The
// head entry is visible on pop_data while empty is low (first-word
// fall-through), so a pop and the use of the data happen in the same cycle.
// A push and a pop may happen together. Reset is synchronous and active low. Pushing while full or popping while
// empty is a protocol error, flagged by assertions; the data path ignores it.
//
// The paper names the weight FIFO and the instruction FIFO but gives neither
// depth nor protocol: both are this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] push_data,
  output logic             full,
  input  logic             pop,
  output logic [WIDTH-1:0] pop_data,
  output logic             empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wr_ptr, rd_ptr;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  assign empty    = (wr_ptr == rd_ptr);
  assign full     = (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]) && (wr_ptr[AW] != rd_ptr[AW]);
  assign count    = ($clog2(DEPTH)+1)'(wr_ptr - rd_ptr);
  assign pop_data = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr[AW-1:0]] <= push_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  // DEPTH must be a power of two for the pointer arithmetic above.
  initial assert ((DEPTH & (DEPTH - 1)) == 0 && DEPTH >= 2)
    else $error("sync_fifo: DEPTH must be a power of two >= 2");

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("sync_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("sync_fifo: pop while empty");
endmodule
