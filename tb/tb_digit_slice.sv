// tb_digit_slice -- self-checking test of one digit slice (digit 5, modulus
// MODULI[5]) at a reduced 4x4 array. Pushes a weight tile into the weight
// FIFO, writes buffer rows, loads the tile into the array, runs a matrix
// multiply that overwrites accumulator rows and a second one that adds into
// them, and checks the accumulators against modular products computed here.
// Also checks the buffer read-back path, the full flag of the weight FIFO
// and that the slice reports busy for ROWS+COLS+1 cycles per pass.
module tb_digit_slice;
  import rns_pkg::*;
  localparam int R = 4, UBD = 16, ACD = 8, WFD = 4, DG = 5;
  localparam int M = int'(MODULI[DG]);
  logic clk = 0, rst_n = 0;
  logic wf_push = 0, wf_full, wf_empty, w_load = 0;
  logic [R-1:0][DW-1:0] wf_data = '0, ub_rd_data, ub_wr_data = '0, acc_rd_data;
  logic ub_rd_en = 0, mm_issue = 0, mm_accum = 0, busy, ub_wr_en = 0, acc_rd_en = 0;
  logic [3:0] ub_rd_addr = '0, ub_wr_addr = '0;
  logic [2:0] mm_acc_addr = '0, acc_rd_addr = '0;
  logic [R-1:0] ub_wr_mask = '0;
  int W [R][R];
  int X [3][R];
  int checks = 0, failures = 0;

  digit_slice #(.DIGIT(DG), .ROWS(R), .COLS(R), .UB_DEPTH(UBD), .ACC_DEPTH(ACD), .WF_DEPTH(WFD)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic matmul(input bit accum);
    int busy_cycles = 0;
    for (int v = 0; v < 3; v++) begin
      @(negedge clk);
      ub_rd_en = 1; mm_issue = 1; ub_rd_addr = 4'(v); mm_acc_addr = 3'(v + 1); mm_accum = accum;
    end
    @(negedge clk);
    ub_rd_en = 0; mm_issue = 0;
    while (busy) begin busy_cycles++; @(negedge clk); end
    // last issue cycle to last accumulator write: ROWS+COLS+1 cycles
    check(busy_cycles == R + R + 1, $sformatf("busy cycles %0d", busy_cycles));
  endtask

  initial begin
    for (int r = 0; r < R; r++) for (int c = 0; c < R; c++) W[r][c] = $urandom_range(0, M-1);
    for (int v = 0; v < 3; v++) for (int r = 0; r < R; r++) X[v][r] = $urandom_range(0, M-1);
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    check(wf_empty, "weight fifo empty after reset");
    for (int r = R-1; r >= 0; r--) begin
      @(negedge clk);
      wf_push = 1;
      for (int c = 0; c < R; c++) wf_data[c] = DW'(W[r][c]);
    end
    @(negedge clk); wf_push = 0;
    check(wf_full, "weight fifo full");
    for (int v = 0; v < 3; v++) begin
      ub_wr_en = 1; ub_wr_addr = 4'(v); ub_wr_mask = '1;
      for (int r = 0; r < R; r++) ub_wr_data[r] = DW'(X[v][r]);
      @(negedge clk);
    end
    ub_wr_en = 0;
    // buffer read-back
    ub_rd_en = 1; ub_rd_addr = 4'd1;
    @(negedge clk);
    ub_rd_en = 0;
    for (int r = 0; r < R; r++) check(int'(ub_rd_data[r]) == X[1][r], "buffer read-back");
    // load the tile
    w_load = 1;
    repeat (R) @(negedge clk);
    w_load = 0;
    check(wf_empty, "weight fifo drained");

    matmul(0);
    matmul(1);

    for (int v = 0; v < 3; v++) begin
      acc_rd_en = 1; acc_rd_addr = 3'(v + 1);
      @(negedge clk);
      for (int c = 0; c < R; c++) begin
        automatic int s = 0;
        for (int r = 0; r < R; r++) s = (s + X[v][r] * W[r][c]) % M;
        s = (2 * s) % M;
        check(int'(acc_rd_data[c]) == s, $sformatf("acc row %0d col %0d got %0d exp %0d", v+1, c, acc_rd_data[c], s));
      end
    end
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
