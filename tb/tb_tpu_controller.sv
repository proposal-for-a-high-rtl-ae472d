// tb_tpu_controller -- self-checking test of the controller and instruction
// FIFO. Drives instructions and the status inputs, and checks the broadcast
// control signals cycle by cycle:
//  * LOAD_W: ROWS w_load pulses, stalled while a weight FIFO is empty, with
//    the stall cycles counted;
//  * MATMUL: len consecutive buffer reads with incrementing buffer and
//    accumulator addresses and the accumulate bit, then no new instruction
//    until the arrays report empty;
//  * ACTIVATE: len accumulator reads, each followed one cycle later by a
//    normalize request with the destination row and function;
//  * back-pressure: while host_busy holds execution, the FIFO fills and
//    reports full.
module tb_tpu_controller;
  import rns_pkg::*;
  localparam int R = 4, UBD = 64, ACD = 32, IFD = 4;
  logic clk = 0, rst_n = 0;
  logic instr_push = 0, instr_full, host_busy = 0, idle;
  instr_t instr_data = '0;
  logic [31:0] stall_cycles;
  logic wf_all_nonempty = 1, w_load;
  logic ub_rd_en, mm_accum, mmu_busy = 0, acc_rd_en, norm_valid, norm_busy = 0;
  logic [5:0] ub_rd_addr, norm_ub_addr;
  logic [4:0] mm_acc_addr, acc_rd_addr;
  act_func_e norm_func;
  int cyc = 0, checks = 0, failures = 0;

  tpu_controller #(.ROWS(R), .UB_DEPTH(UBD), .ACC_DEPTH(ACD), .IFIFO_DEPTH(IFD)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  function automatic instr_t mk(opcode_e op, int ub, int acc, int len, bit accum, act_func_e f);
    instr_t i;
    i.op = op; i.ub_addr = 16'(ub); i.acc_addr = 16'(acc); i.len = 16'(len);
    i.accumulate = accum; i.func = f;
    return i;
  endfunction

  task automatic push(input instr_t i);
    @(negedge clk);
    instr_push = 1; instr_data = i;
    @(negedge clk);
    instr_push = 0;
  endtask

  initial begin
    int n;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    check(idle, "idle after reset");

    // ---- LOAD_W with 4 stall cycles
    wf_all_nonempty = 0;
    push(mk(OP_LOAD_W, 0, 0, 0, 0, ACT_NONE));   // now in the pop cycle
    @(negedge clk);                                // LOADW, stalled
    repeat (4) begin check(!w_load, "no load while empty"); @(negedge clk); end
    wf_all_nonempty = 1;
    #1;
    for (int r = 0; r < R; r++) begin
      check(w_load, "w_load pulse");
      @(negedge clk);
    end
    check(!w_load, "exactly ROWS loads");
    check(stall_cycles == 4, "stall count");
    check(idle, "idle after load");

    // ---- MATMUL
    push(mk(OP_MATMUL, 5, 9, 3, 1, ACT_NONE));
    @(negedge clk);
    for (int i = 0; i < 3; i++) begin
      check(ub_rd_en && ub_rd_addr == 6'(5 + i) && mm_acc_addr == 5'(9 + i) && mm_accum, "matmul issue");
      @(negedge clk);
    end
    check(!ub_rd_en, "matmul issue count");
    mmu_busy = 1;
    repeat (6) begin check(!idle, "waits for arrays"); @(negedge clk); end
    mmu_busy = 0;
    @(negedge clk);
    check(idle, "idle after matmul drain");

    // ---- ACTIVATE
    push(mk(OP_ACTIVATE, 20, 2, 2, 0, ACT_RELU));
    @(negedge clk);
    for (int i = 0; i < 2; i++) begin
      check(acc_rd_en && acc_rd_addr == 5'(2 + i), "activate read");
      if (i > 0) check(norm_valid && norm_ub_addr == 6'(20 + i - 1) && norm_func == ACT_RELU, "normalize request");
      @(negedge clk);
    end
    check(norm_valid && norm_ub_addr == 6'(21), "last normalize request");
    norm_busy = 1;
    repeat (5) begin check(!idle, "waits for normalize"); @(negedge clk); end
    norm_busy = 0;
    repeat (2) @(negedge clk);
    check(idle, "idle after activate");

    // ---- back-pressure while the host path is busy
    host_busy = 1;
    for (int i = 0; i < IFD; i++) push(mk(OP_NOP, 0, 0, 0, 0, ACT_NONE));
    check(instr_full, "fifo full");
    check(!idle, "not idle with queued instructions");
    host_busy = 0;
    n = 0;
    while (!idle && n < 50) begin @(negedge clk); n++; end
    check(idle && !instr_full, "fifo drains");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
