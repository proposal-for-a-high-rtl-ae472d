// tb_rns_tpu -- end-to-end test of the RNS tensor processing unit.
//
// Flow, all through the chip's own ports:
//  1. the host writes two input vectors of DIM binary Q15.48 values into
//     unified-buffer rows 0 and 1 (forward conversion on the way in);
//  2. the host queues LOAD_W, then enough NOPs to fill the instruction FIFO
//     (back-pressure), then MATMUL (overwrite), MATMUL (accumulate) and two
//     ACTIVATE instructions (ReLU into rows 4-5, none into rows 6-7);
//  3. weight rows for all eighteen digits arrive late and with gaps, so the
//     weight load stalls;
//  4. the host reads rows 4..7 back (reverse conversion).
// Expected values are computed here with wide integers from the same
// inputs: X = round(x*R_F/2^48), A = 2*sum_r X_r*W_rc, Y = floor(A/R_F),
// ReLU or not, then floor(Y*2^48/R_F) (one unit in the last place of slack).
// Mechanisms counted, each must occur: weight-FIFO stall, instruction-FIFO
// back-pressure, overwrite and accumulate passes, ReLU zeroing, negative
// values passed by the identity function, host writes and reads.
// Also checks that the matrix pass streams one vector per cycle.
module tb_rns_tpu;
  import rns_pkg::*;
  localparam int DIM = 4;
  localparam int NV  = 2;
  localparam int NNOP = 20;
  typedef logic signed [255:0] sbig_t;

  logic clk = 0, rst_n = 0;
  logic host_req_valid = 0, host_req_ready, host_rsp_valid, host_rsp_ovf, idle;
  host_cmd_e host_req_cmd = HOST_PUSH_INSTR;
  logic [15:0] host_req_addr = '0, host_req_lane = '0;
  logic [63:0] host_req_data = '0, host_rsp_data;
  logic [N_DIGITS-1:0] wf_push = '0, wf_full;
  logic [N_DIGITS-1:0][DIM-1:0][DW-1:0] wf_data = '0;
  logic [31:0] weight_stall_cycles;

  rns_tpu #(.DIM(DIM), .UB_DEPTH(16), .ACC_DEPTH(8), .WF_DEPTH(8), .IFIFO_DEPTH(4)) u_dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_stall = 0, n_backpressure = 0, n_overwrite = 0, n_accum = 0, n_relu_zero = 0;
  int n_neg_pass = 0, n_writes = 0, n_reads = 0, run_len = 0;
  int runs [$];
  sbig_t rf;
  logic signed [63:0] xin [NV][DIM];
  sbig_t xi [NV][DIM];
  sbig_t wv [DIM][DIM];
  logic signed [63:0] expq [$];
  bit weights_go = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic sbig_t floordiv(input sbig_t a, input sbig_t b);
    automatic sbig_t q = a / b;
    if ((a % b != 0) && (a < 0)) q = q - 1;
    return q;
  endfunction

  function automatic residue_t res(input sbig_t v, input int d);
    automatic sbig_t m = sbig_t'(MODULI[d]);
    automatic sbig_t x = v % m;
    if (x < 0) x = x + m;
    return DW'(x);
  endfunction

  function automatic logic [63:0] mk(opcode_e op, int ub, int acc, int len, bit accum, act_func_e f);
    instr_t i;
    i.op = op; i.ub_addr = 16'(ub); i.acc_addr = 16'(acc); i.len = 16'(len);
    i.accumulate = accum; i.func = f;
    return 64'(i);
  endfunction

  // One request per cycle when the chip is ready.
  task automatic req(input host_cmd_e cmd, input int addr, input int lane, input logic [63:0] data);
    host_req_valid = 1; host_req_cmd = cmd; host_req_addr = 16'(addr);
    host_req_lane = 16'(lane); host_req_data = data;
    #1;
    while (!host_req_ready) begin
      if (cmd == HOST_PUSH_INSTR) n_backpressure++;
      @(negedge clk); #1;
    end
    @(negedge clk);
    host_req_valid = 0;
  endtask

  // mechanism monitors
  always @(negedge clk) if (rst_n) begin
    if (u_dut.u_ctrl.ub_rd_en) begin
      if (u_dut.u_ctrl.mm_accum) n_accum++; else n_overwrite++;
      run_len++;
    end else if (run_len > 0) begin
      runs.push_back(run_len);
      run_len = 0;
    end
    if (u_dut.u_act.in_valid)
      for (int l = 0; l < DIM; l++)
        if (u_dut.u_act.in_neg[l]) begin
          if (u_dut.u_act.in_func == ACT_RELU) n_relu_zero++; else n_neg_pass++;
        end
    if (host_rsp_valid) begin
      automatic logic signed [63:0] e = expq.pop_front();
      automatic logic signed [63:0] g = host_rsp_data;
      n_reads++;
      check(!host_rsp_ovf && (g == e || g == e - 1), $sformatf("result got %h exp %h", g, e));
    end
  end

  // weights: late, with gaps, last row first, all digits together
  initial begin
    wait (weights_go);
    repeat (30) @(negedge clk);
    for (int r = DIM-1; r >= 0; r--) begin
      wf_push = '1;
      for (int d = 0; d < int'(N_DIGITS); d++)
        for (int c = 0; c < DIM; c++) wf_data[d][c] = res(wv[r][c], d);
      @(negedge clk);
      wf_push = '0;
      @(negedge clk);
    end
  end

  initial begin
    rf = 1;
    for (int d = 0; d < int'(F_DIGITS); d++) rf = rf * sbig_t'(MODULI[d]);
    for (int v = 0; v < NV; v++)
      for (int r = 0; r < DIM; r++) begin
        xin[v][r] = $signed({$urandom, $urandom}) >>> 14;          // |x| < 2
        xi[v][r]  = (sbig_t'(xin[v][r]) * rf + (sbig_t'(1) <<< 47)) >>> 48;
      end
    for (int r = 0; r < DIM; r++)
      for (int c = 0; c < DIM; c++) begin
        wv[r][c] = (sbig_t'($urandom) << 24) ^ sbig_t'($urandom);  // |w| < 2
        if ($urandom_range(0, 1) == 1) wv[r][c] = -wv[r][c];
      end

    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    @(negedge clk);

    // 1. inputs
    for (int v = 0; v < NV; v++)
      for (int l = 0; l < DIM; l++) begin
        req(HOST_WRITE_UB, v, l, xin[v][l]);
        n_writes++;
      end
    // 2. program
    req(HOST_PUSH_INSTR, 0, 0, mk(OP_LOAD_W, 0, 0, 0, 0, ACT_NONE));
    weights_go = 1;
    for (int i = 0; i < NNOP; i++) req(HOST_PUSH_INSTR, 0, 0, mk(OP_NOP, 0, 0, 0, 0, ACT_NONE));
    req(HOST_PUSH_INSTR, 0, 0, mk(OP_MATMUL,   0, 0, NV, 0, ACT_NONE));
    req(HOST_PUSH_INSTR, 0, 0, mk(OP_MATMUL,   0, 0, NV, 1, ACT_NONE));
    req(HOST_PUSH_INSTR, 0, 0, mk(OP_ACTIVATE, 4, 0, NV, 0, ACT_RELU));
    req(HOST_PUSH_INSTR, 0, 0, mk(OP_ACTIVATE, 6, 0, NV, 0, ACT_NONE));
    @(negedge clk); #1;
    while (!idle) @(negedge clk);

    // 4. read back
    for (int f = 0; f < 2; f++)
      for (int v = 0; v < NV; v++)
        for (int c = 0; c < DIM; c++) begin
          automatic sbig_t s = 0;
          automatic sbig_t y;
          for (int r = 0; r < DIM; r++) s = s + xi[v][r] * wv[r][c];
          y = floordiv(2 * s, rf);
          if (f == 0 && y < 0) y = 0;
          expq.push_back(64'(floordiv(y <<< 48, rf)));
          req(HOST_READ_UB, 4 + 2 * f + v, c, '0);
        end
    repeat (int'(REV_LAT) + 5) @(negedge clk);

    n_stall = int'(weight_stall_cycles);
    check(expq.size() == 0 && n_reads == 2 * NV * DIM, "all results read");
    check(n_stall > 0, "weight stall happened");
    check(n_backpressure > 0, "instruction FIFO back-pressure happened");
    check(n_overwrite == NV && n_accum == NV, "overwrite and accumulate passes");
    // each MATMUL streams its NV vectors in NV consecutive cycles
    check(runs.size() == 2 && runs[0] == NV && runs[1] == NV, "one vector per cycle into the arrays");
    check(n_relu_zero > 0, "ReLU zeroed a negative value");
    check(n_neg_pass > 0, "identity passed a negative value");
    check(n_writes == NV * DIM, "host writes");
    $display("mechanisms: stall_cycles=%0d backpressure=%0d overwrite_rows=%0d accumulate_rows=%0d relu_zeroed=%0d neg_passed=%0d writes=%0d reads=%0d",
             n_stall, n_backpressure, n_overwrite, n_accum, n_relu_zero, n_neg_pass, n_writes, n_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
