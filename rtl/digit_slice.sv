// digit_slice -- one residue digit's copy of the tensor-unit datapath.
//
// Everything in a slice works modulo a single modulus, MODULI[DIGIT], on DW-bit
// residues, and never exchanges data with other slices: multiplication and
// accumulation are digit-parallel ("PAC") operations in a residue number
// system. The slice holds, for its digit:
//   weight FIFO (sync_fifo)  <- rows of weight residues from external memory
//   unified buffer           <- activations; read rows feed the array
//   systolic_setup -> mmu    ROWS x COLS modular multiply-accumulate array
//   accumulators             results, written or added per row
// The digits of the accumulator rows leave the slice to meet the other
// slices' digits in the shared normalize pipeline, and the normalized digits
// come back through the unified-buffer write port.
//
// Control comes from tpu_controller (broadcast to all slices):
//  * w_load pops one weight row and shifts it into the array;
//  * ub_rd_en with mm_issue reads a unified-buffer row into the array, its
//    result row going to accumulator row mm_acc_addr (added if mm_accum);
//    ub_rd_en without mm_issue is a plain read (host path): ub_rd_data is
//    valid one cycle later;
//  * acc_rd_en/acc_rd_addr: acc_rd_data valid one cycle later.
// From ub_rd_en to the accumulator write is ROWS+COLS+1 cycles. busy is high
// from the cycle after an issue until its result is written.
//
// The paper describes the slice as a copy of the original tensor unit minus
// normalization and activation, one per residue digit; the internal
// partitioning and timing are this design's choice.
module digit_slice
  import rns_pkg::*;
#(
  parameter int unsigned DIGIT       = 0,
  parameter int unsigned ROWS        = 256,
  parameter int unsigned COLS        = 256,
  parameter int unsigned UB_DEPTH    = 4096,
  parameter int unsigned ACC_DEPTH   = 4096,
  parameter int unsigned WF_DEPTH    = 1024,
  localparam int unsigned UB_AW      = $clog2(UB_DEPTH),
  localparam int unsigned ACC_AW     = $clog2(ACC_DEPTH),
  localparam int unsigned MODULUS    = int'(MODULI[DIGIT])
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // weight FIFO fill (from the external-memory interface of this digit)
  input  logic                      wf_push,
  input  logic [COLS-1:0][DW-1:0]   wf_data,
  output logic                      wf_full,
  output logic                      wf_empty,
  // control
  input  logic                      w_load,
  input  logic                      ub_rd_en,
  input  logic [UB_AW-1:0]          ub_rd_addr,
  input  logic                      mm_issue,
  input  logic                      mm_accum,
  input  logic [ACC_AW-1:0]         mm_acc_addr,
  output logic                      busy,
  // unified buffer
  output logic [ROWS-1:0][DW-1:0]   ub_rd_data,
  input  logic                      ub_wr_en,
  input  logic [UB_AW-1:0]          ub_wr_addr,
  input  logic [ROWS-1:0]           ub_wr_mask,
  input  logic [ROWS-1:0][DW-1:0]   ub_wr_data,
  // accumulators
  input  logic                      acc_rd_en,
  input  logic [ACC_AW-1:0]         acc_rd_addr,
  output logic [COLS-1:0][DW-1:0]   acc_rd_data
);
  localparam int unsigned TAG_W = ACC_AW + 1;

  logic [COLS-1:0][DW-1:0] w_head;
  logic                    mmu_busy;

  sync_fifo #(.WIDTH(COLS*DW), .DEPTH(WF_DEPTH)) u_weight_fifo (
    .clk      (clk),
    .rst_n    (rst_n),
    .push     (wf_push),
    .push_data(wf_data),
    .full     (wf_full),
    .pop      (w_load),
    .pop_data (w_head),
    .empty    (wf_empty),
    .count    ()
  );

  unified_buffer #(.LANES(ROWS), .DEPTH(UB_DEPTH)) u_ub (
    .clk    (clk),
    .rd_en  (ub_rd_en),
    .rd_addr(ub_rd_addr),
    .rd_data(ub_rd_data),
    .wr_en  (ub_wr_en),
    .wr_addr(ub_wr_addr),
    .wr_mask(ub_wr_mask),
    .wr_data(ub_wr_data)
  );

  // The buffer row arrives one cycle after the read; its tag waits for it.
  logic             mm_pending;
  logic [TAG_W-1:0] mm_tag;
  always_ff @(posedge clk) begin
    if (!rst_n) mm_pending <= 1'b0;
    else        mm_pending <= ub_rd_en && mm_issue;
    mm_tag <= {mm_accum, mm_acc_addr};
  end

  logic                    sk_valid;
  logic [TAG_W-1:0]        sk_tag;
  logic [ROWS-1:0][DW-1:0] x_skew;

  systolic_setup #(.ROWS(ROWS), .TAG_W(TAG_W)) u_setup (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (mm_pending),
    .in_tag   (mm_tag),
    .in_row   (ub_rd_data),
    .out_valid(sk_valid),
    .out_tag  (sk_tag),
    .x_skew   (x_skew)
  );

  logic                    y_valid;
  logic [TAG_W-1:0]        y_tag;
  logic [COLS-1:0][DW-1:0] y;

  mmu #(.ROWS(ROWS), .COLS(COLS), .MODULUS(MODULUS), .TAG_W(TAG_W)) u_mmu (
    .clk    (clk),
    .rst_n  (rst_n),
    .w_shift(w_load),
    .w_row  (w_head),
    .x_valid(sk_valid),
    .x_tag  (sk_tag),
    .x_skew (x_skew),
    .y_valid(y_valid),
    .y_tag  (y_tag),
    .y      (y),
    .busy   (mmu_busy)
  );

  accumulators #(.COLS(COLS), .DEPTH(ACC_DEPTH), .MODULUS(MODULUS)) u_acc (
    .clk     (clk),
    .wr_valid(y_valid),
    .wr_accum(y_tag[TAG_W-1]),
    .wr_addr (y_tag[ACC_AW-1:0]),
    .wr_data (y),
    .rd_en   (acc_rd_en),
    .rd_addr (acc_rd_addr),
    .rd_data (acc_rd_data)
  );

  assign busy = mm_pending || mmu_busy;
endmodule
