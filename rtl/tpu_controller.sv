// tpu_controller -- instruction FIFO and sequencer for all digit slices.
//
// The host pushes instr_t words into an IFIFO_DEPTH-entry FIFO. The
// sequencer executes them one at a time; every control signal it drives is
// broadcast to all digit slices, which work in lock step:
//
//  OP_LOAD_W    pops ROWS weight rows from the weight FIFOs into the arrays
//               (w_load), one per cycle; it stalls any cycle in which some
//               digit's weight FIFO is empty (counted in stall_cycles).
//  OP_MATMUL    reads unified-buffer rows ub_addr .. ub_addr+len-1, one per
//               cycle, into the arrays; row i's result goes to accumulator
//               row acc_addr+i, written or added (accumulate bit). It then
//               waits until the arrays are empty.
//  OP_ACTIVATE  reads accumulator rows acc_addr .. +len-1, one per cycle,
//               and one cycle later hands each row (with destination
//               unified-buffer row ub_addr+i and the activation function)
//               to the normalize pipeline. It then waits until the
//               normalize and activation pipelines are empty.
//  OP_NOP       does nothing.
//
// Waiting for each instruction to drain removes every read-after-write
// hazard between instructions at the cost of one pipeline fill per
// instruction. A new instruction is also held back while the host path has
// conversions in flight (host_busy). idle is high when the FIFO is empty and
// nothing executes. Reset is synchronous, active low.
//
// The paper only names "Control and Instruction FIFO"; the instruction set,
// its encoding and this sequencing are this design's choice, modelled on the
// instruction classes of the original unit (read weights, matrix multiply,
// activate).
module tpu_controller
  import rns_pkg::*;
#(
  parameter int unsigned ROWS        = 256,
  parameter int unsigned UB_DEPTH    = 4096,
  parameter int unsigned ACC_DEPTH   = 4096,
  parameter int unsigned IFIFO_DEPTH = 16,
  localparam int unsigned UB_AW      = $clog2(UB_DEPTH),
  localparam int unsigned ACC_AW     = $clog2(ACC_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction FIFO write side (from the host interface)
  input  logic              instr_push,
  input  instr_t            instr_data,
  output logic              instr_full,
  // status
  input  logic              host_busy,
  output logic              idle,
  output logic [31:0]       stall_cycles,
  // weight load
  input  logic              wf_all_nonempty,
  output logic              w_load,
  // matrix multiply
  output logic              ub_rd_en,
  output logic [UB_AW-1:0]  ub_rd_addr,
  output logic              mm_accum,
  output logic [ACC_AW-1:0] mm_acc_addr,
  input  logic              mmu_busy,
  // activate
  output logic              acc_rd_en,
  output logic [ACC_AW-1:0] acc_rd_addr,
  output logic              norm_valid,
  output logic [UB_AW-1:0]  norm_ub_addr,
  output act_func_e         norm_func,
  input  logic              norm_busy
);
  typedef enum logic [2:0] {S_IDLE, S_LOADW, S_MM, S_MM_DRAIN, S_ACT, S_ACT_DRAIN} state_e;

  state_e      state;
  instr_t      cur;
  logic [15:0] cnt;
  logic        fifo_empty;
  instr_t      fifo_head;
  logic        pop;

  sync_fifo #(.WIDTH($bits(instr_t)), .DEPTH(IFIFO_DEPTH)) u_ififo (
    .clk      (clk),
    .rst_n    (rst_n),
    .push     (instr_push),
    .push_data(instr_data),
    .full     (instr_full),
    .pop      (pop),
    .pop_data (fifo_head),
    .empty    (fifo_empty),
    .count    ()
  );

  assign pop  = (state == S_IDLE) && !fifo_empty && !host_busy;
  assign idle = (state == S_IDLE) && fifo_empty;

  // Combinational issue signals.
  always_comb begin
    w_load      = (state == S_LOADW) && wf_all_nonempty;
    ub_rd_en    = (state == S_MM);
    ub_rd_addr  = UB_AW'(cur.ub_addr + cnt);
    mm_accum    = cur.accumulate;
    mm_acc_addr = ACC_AW'(cur.acc_addr + cnt);
    acc_rd_en   = (state == S_ACT);
    acc_rd_addr = ACC_AW'(cur.acc_addr + cnt);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cnt          <= '0;
      cur          <= '0;
      stall_cycles <= '0;
      norm_valid   <= 1'b0;
    end else begin
      // accumulator data arrives one cycle after the read
      norm_valid   <= acc_rd_en;
      norm_ub_addr <= UB_AW'(cur.ub_addr + cnt);
      norm_func    <= cur.func;
      unique case (state)
        S_IDLE: if (pop) begin
          cur <= fifo_head;
          cnt <= '0;
          unique case (fifo_head.op)
            OP_LOAD_W:   state <= S_LOADW;
            OP_MATMUL:   state <= (fifo_head.len == 0) ? S_IDLE : S_MM;
            OP_ACTIVATE: state <= (fifo_head.len == 0) ? S_IDLE : S_ACT;
            default:     state <= S_IDLE;
          endcase
        end
        S_LOADW: begin
          if (wf_all_nonempty) begin
            cnt <= cnt + 1'b1;
            if (cnt == 16'(ROWS - 1)) state <= S_IDLE;
          end else begin
            stall_cycles <= stall_cycles + 1'b1;
          end
        end
        S_MM: begin
          cnt <= cnt + 1'b1;
          if (cnt == cur.len - 1'b1) state <= S_MM_DRAIN;
        end
        S_MM_DRAIN: if (!mmu_busy) state <= S_IDLE;
        S_ACT: begin
          cnt <= cnt + 1'b1;
          if (cnt == cur.len - 1'b1) state <= S_ACT_DRAIN;
        end
        S_ACT_DRAIN: if (!norm_busy && !norm_valid) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
