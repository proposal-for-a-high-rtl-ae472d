// rns_tpu -- top level of the residue-number-system tensor processing unit.
//
// The unit multiplies matrices of wide fixed-point numbers (about 55 fraction
// bits) at the rate of an 8-bit tensor unit. Each number is split into
// N_DIGITS = 18 residues of 8 bits. Every residue digit gets its own copy of
// an 8-bit-style datapath, a digit slice (weight FIFO, unified buffer,
// systolic setup, DIM x DIM modular multiply-accumulate array,
// accumulators). Because residue addition and multiplication have no carry
// between digits, the slices run fully in parallel and never talk to each
// other during a product summation. Only after accumulation do the 18 digits
// of each sum come together, in the normalize pipeline, which divides by the
// fixed-point scale once per sum, and the activation unit (ReLU or none).
// The normalized digits go back to their slices' unified buffers.
//
// Around the core, a forward conversion pipeline turns the host's binary
// Q15.48 numbers into RNS words, a reverse pipeline turns them back, a host
// interface decodes requests, and a controller with an instruction FIFO
// sequences weight loads, matrix multiplies and activations (see
// tpu_controller for the instruction set).
//
// Ports: the host request/response port stands where the PCIe interface
// would connect; the per-digit weight FIFO fill ports (wf_*) stand where the
// per-digit DDR3 memory interfaces would connect. Neither off-chip interface
// is part of this RTL. Clock: single clock; reset synchronous, active low.
//
// Following the paper: the digit-slice organization, one copy of the
// 256x256 array per digit, 8-bit digits with modular reduction inside the
// multiply-add, a shared pipelined normalize/activation stage, pipelined
// conversion between binary and RNS at the host side. This design's own
// choices: the moduli, the fixed-point format, buffer depths, the
// instruction set and all handshakes.
module rns_tpu
  import rns_pkg::*;
#(
  parameter int unsigned DIM         = 256,    // systolic array rows = columns
  parameter int unsigned UB_DEPTH    = 4096,   // unified-buffer rows per digit
  parameter int unsigned ACC_DEPTH   = 4096,   // accumulator rows per digit
  parameter int unsigned WF_DEPTH    = 1024,   // weight FIFO rows per digit
  parameter int unsigned IFIFO_DEPTH = 16,     // instruction FIFO entries
  localparam int unsigned N          = N_DIGITS,
  localparam int unsigned UB_AW      = $clog2(UB_DEPTH),
  localparam int unsigned ACC_AW     = $clog2(ACC_DEPTH)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // host (PCIe side)
  input  logic                             host_req_valid,
  output logic                             host_req_ready,
  input  host_cmd_e                        host_req_cmd,
  input  logic [15:0]                      host_req_addr,
  input  logic [15:0]                      host_req_lane,
  input  logic [BIN_W-1:0]                 host_req_data,
  output logic                             host_rsp_valid,
  output logic [BIN_W-1:0]                 host_rsp_data,
  output logic                             host_rsp_ovf,
  // weight rows from the per-digit external memory interfaces
  input  logic [N-1:0]                     wf_push,
  input  logic [N-1:0][DIM-1:0][DW-1:0]    wf_data,
  output logic [N-1:0]                     wf_full,
  // status
  output logic                             idle,
  output logic [31:0]                      weight_stall_cycles
);
  // ------------------------------------------------------------- controller
  logic              instr_push, instr_full, host_busy;
  instr_t            instr_data;
  logic              w_load, ctl_ub_rd_en, mm_accum, mmu_busy;
  logic [UB_AW-1:0]  ctl_ub_rd_addr;
  logic [ACC_AW-1:0] mm_acc_addr, acc_rd_addr;
  logic              acc_rd_en, norm_in_valid, norm_busy;
  logic [UB_AW-1:0]  norm_in_tag;
  act_func_e         norm_in_func;
  logic [N-1:0]      wf_empty, slice_busy;

  tpu_controller #(
    .ROWS(DIM), .UB_DEPTH(UB_DEPTH), .ACC_DEPTH(ACC_DEPTH), .IFIFO_DEPTH(IFIFO_DEPTH)
  ) u_ctrl (
    .clk            (clk),
    .rst_n          (rst_n),
    .instr_push     (instr_push),
    .instr_data     (instr_data),
    .instr_full     (instr_full),
    .host_busy      (host_busy),
    .idle           (idle),
    .stall_cycles   (weight_stall_cycles),
    .wf_all_nonempty(~|wf_empty),
    .w_load         (w_load),
    .ub_rd_en       (ctl_ub_rd_en),
    .ub_rd_addr     (ctl_ub_rd_addr),
    .mm_accum       (mm_accum),
    .mm_acc_addr    (mm_acc_addr),
    .mmu_busy       (mmu_busy),
    .acc_rd_en      (acc_rd_en),
    .acc_rd_addr    (acc_rd_addr),
    .norm_valid     (norm_in_valid),
    .norm_ub_addr   (norm_in_tag),
    .norm_func      (norm_in_func),
    .norm_busy      (norm_busy)
  );
  assign mmu_busy = |slice_busy;

  // ---------------------------------------------------- host and converters
  localparam int unsigned HTAG_W = UB_AW + $clog2(DIM);

  logic              fwd_in_valid, fwd_out_valid, rev_in_valid, rev_out_valid, rev_out_ovf;
  logic [HTAG_W-1:0] fwd_in_tag, fwd_out_tag;
  logic [BIN_W-1:0]  fwd_in_data, rev_out_data;
  rns_word_t         fwd_out_word, rev_in_word, host_ub_wr_word;
  logic              host_ub_wr_en, host_ub_rd_en;
  logic [UB_AW-1:0]  host_ub_wr_addr, host_ub_rd_addr;
  logic [DIM-1:0]    host_ub_wr_mask;
  logic [N-1:0][DIM-1:0][DW-1:0] ub_rd_rows;

  host_interface #(.LANES(DIM), .UB_DEPTH(UB_DEPTH)) u_host (
    .clk           (clk),
    .rst_n         (rst_n),
    .host_req_valid(host_req_valid),
    .host_req_ready(host_req_ready),
    .host_req_cmd  (host_req_cmd),
    .host_req_addr (host_req_addr),
    .host_req_lane (host_req_lane),
    .host_req_data (host_req_data),
    .host_rsp_valid(host_rsp_valid),
    .host_rsp_data (host_rsp_data),
    .host_rsp_ovf  (host_rsp_ovf),
    .ctrl_idle     (idle),
    .busy          (host_busy),
    .instr_push    (instr_push),
    .instr_data    (instr_data),
    .instr_full    (instr_full),
    .fwd_in_valid  (fwd_in_valid),
    .fwd_in_tag    (fwd_in_tag),
    .fwd_in_data   (fwd_in_data),
    .fwd_out_valid (fwd_out_valid),
    .fwd_out_tag   (fwd_out_tag),
    .fwd_out_word  (fwd_out_word),
    .ub_wr_en      (host_ub_wr_en),
    .ub_wr_addr    (host_ub_wr_addr),
    .ub_wr_mask    (host_ub_wr_mask),
    .ub_wr_word    (host_ub_wr_word),
    .ub_rd_en      (host_ub_rd_en),
    .ub_rd_addr    (host_ub_rd_addr),
    .ub_rd_rows    (ub_rd_rows),
    .rev_in_valid  (rev_in_valid),
    .rev_in_word   (rev_in_word),
    .rev_out_valid (rev_out_valid),
    .rev_out_data  (rev_out_data),
    .rev_out_ovf   (rev_out_ovf)
  );

  fwd_converter #(.TAG_W(HTAG_W)) u_fwd (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (fwd_in_valid),
    .in_tag   (fwd_in_tag),
    .in_data  (fwd_in_data),
    .out_valid(fwd_out_valid),
    .out_tag  (fwd_out_tag),
    .out_word (fwd_out_word)
  );

  rev_converter #(.TAG_W(1)) u_rev (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (rev_in_valid),
    .in_tag   (1'b0),
    .in_word  (rev_in_word),
    .out_valid(rev_out_valid),
    .out_tag  (),
    .out_data (rev_out_data),
    .out_ovf  (rev_out_ovf)
  );

  // -------------------------------------------- normalization and activation
  rns_word_t [DIM-1:0] norm_in_words, norm_out_words, act_out_words;
  logic [DIM-1:0]      norm_out_neg;
  logic                norm_out_valid, act_out_valid, norm_pipe_busy, act_busy;
  logic [UB_AW-1:0]    norm_out_tag, act_out_tag;
  act_func_e           norm_out_func;
  logic [N-1:0][DIM-1:0][DW-1:0] acc_rd_data;

  // Digits come together: lane l of every slice forms one RNS word.
  always_comb
    for (int l = 0; l < int'(DIM); l++)
      for (int d = 0; d < int'(N); d++) norm_in_words[l][d] = acc_rd_data[d][l];

  normalize_pipeline #(.LANES(DIM), .TAG_W(UB_AW)) u_norm (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (norm_in_valid),
    .in_tag   (norm_in_tag),
    .in_func  (norm_in_func),
    .in_words (norm_in_words),
    .out_valid(norm_out_valid),
    .out_tag  (norm_out_tag),
    .out_func (norm_out_func),
    .out_words(norm_out_words),
    .out_neg  (norm_out_neg),
    .busy     (norm_pipe_busy)
  );

  activation_unit #(.LANES(DIM), .TAG_W(UB_AW)) u_act (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (norm_out_valid),
    .in_tag   (norm_out_tag),
    .in_func  (norm_out_func),
    .in_words (norm_out_words),
    .in_neg   (norm_out_neg),
    .out_valid(act_out_valid),
    .out_tag  (act_out_tag),
    .out_words(act_out_words),
    .busy     (act_busy)
  );
  assign norm_busy = norm_pipe_busy || act_busy;

  // ------------------------------------------------------------ digit slices
  logic              ub_rd_en, ub_wr_en;
  logic [UB_AW-1:0]  ub_rd_addr, ub_wr_addr;
  logic [DIM-1:0]    ub_wr_mask;

  // Host accesses only happen while the controller is idle.
  assign ub_rd_en   = ctl_ub_rd_en || host_ub_rd_en;
  assign ub_rd_addr = host_ub_rd_en ? host_ub_rd_addr : ctl_ub_rd_addr;
  assign ub_wr_en   = act_out_valid || host_ub_wr_en;
  assign ub_wr_addr = act_out_valid ? act_out_tag : host_ub_wr_addr;
  assign ub_wr_mask = act_out_valid ? '1 : host_ub_wr_mask;

  for (genvar d = 0; d < N; d++) begin : g_slice
    logic [DIM-1:0][DW-1:0] ub_wr_data;
    always_comb
      for (int l = 0; l < int'(DIM); l++)
        ub_wr_data[l] = act_out_valid ? act_out_words[l][d] : host_ub_wr_word[d];

    digit_slice #(
      .DIGIT(d), .ROWS(DIM), .COLS(DIM),
      .UB_DEPTH(UB_DEPTH), .ACC_DEPTH(ACC_DEPTH), .WF_DEPTH(WF_DEPTH)
    ) u_slice (
      .clk        (clk),
      .rst_n      (rst_n),
      .wf_push    (wf_push[d]),
      .wf_data    (wf_data[d]),
      .wf_full    (wf_full[d]),
      .wf_empty   (wf_empty[d]),
      .w_load     (w_load),
      .ub_rd_en   (ub_rd_en),
      .ub_rd_addr (ub_rd_addr),
      .mm_issue   (ctl_ub_rd_en),
      .mm_accum   (mm_accum),
      .mm_acc_addr(mm_acc_addr),
      .busy       (slice_busy[d]),
      .ub_rd_data (ub_rd_rows[d]),
      .ub_wr_en   (ub_wr_en),
      .ub_wr_addr (ub_wr_addr),
      .ub_wr_mask (ub_wr_mask),
      .ub_wr_data (ub_wr_data),
      .acc_rd_en  (acc_rd_en),
      .acc_rd_addr(acc_rd_addr),
      .acc_rd_data(acc_rd_data[d])
    );
  end

  a_no_ub_write_clash: assert property (@(posedge clk) disable iff (!rst_n)
      !(act_out_valid && host_ub_wr_en))
    else $error("rns_tpu: unified-buffer write clash");
endmodule
