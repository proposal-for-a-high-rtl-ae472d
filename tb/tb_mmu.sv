// tb_mmu -- self-checking test of the systolic matrix multiply unit.
// A random weight tile (modulus 223) is shifted in last row first; then
// random vectors are fed back to back on a diagonal wavefront built by the
// testbench itself. Every result row must equal the modular matrix-vector
// product computed here with plain integers, and must appear exactly
// ROWS+COLS-1 cycles after its vector, one row per cycle (full throughput).
// A second tile is then loaded and used, to check reloading.
module tb_mmu;
  import rns_pkg::*;
  localparam int R = 5, C = 4, M = 223, TW = 6, NV = 20;
  logic clk = 0, rst_n = 0;
  logic w_shift = 0, x_valid = 0, y_valid, busy;
  logic [C-1:0][DW-1:0] w_row = '0, y;
  logic [R-1:0][DW-1:0] x_skew;
  logic [TW-1:0] x_tag = '0, y_tag;
  int W [R][C];
  int X [NV][R];
  int cyc = 0, start = -1000, checks = 0, failures = 0, got = 0;

  mmu #(.ROWS(R), .COLS(C), .MODULUS(M), .TAG_W(TW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // Diagonal wavefront: lane r carries X[cyc-start-r][r].
  always_comb
    for (int r = 0; r < R; r++) begin
      automatic int t = cyc - start - r;
      x_skew[r] = (t >= 0 && t < NV) ? DW'(X[t][r]) : DW'($urandom);
    end

  task automatic load_weights();
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) W[r][c] = $urandom_range(0, M-1);
    for (int r = R-1; r >= 0; r--) begin
      @(negedge clk);
      w_shift = 1;
      for (int c = 0; c < C; c++) w_row[c] = DW'(W[r][c]);
    end
    @(negedge clk); w_shift = 0;
  endtask

  task automatic run_vectors();
    for (int t = 0; t < NV; t++) for (int r = 0; r < R; r++) X[t][r] = $urandom_range(0, M-1);
    got = 0;
    @(negedge clk);
    start = cyc;
    for (int t = 0; t < NV; t++) begin
      x_valid = 1; x_tag = TW'(t);
      @(negedge clk);
    end
    x_valid = 0;
    repeat (R + C + 3) @(negedge clk);
    checks++;
    if (got != NV) begin failures++; $display("FAIL got %0d results", got); end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after drain"); end
  endtask

  always @(negedge clk) if (rst_n && y_valid) begin
    automatic int t = int'(y_tag);
    got++;
    checks++;
    if (cyc != start + t + R + C - 1) begin
      failures++; $display("FAIL latency vec %0d at %0d", t, cyc - start);
    end
    for (int c = 0; c < C; c++) begin
      automatic int s = 0;
      for (int r = 0; r < R; r++) s = (s + X[t][r] * W[r][c]) % M;
      checks++;
      if (int'(y[c]) != s) begin failures++; $display("FAIL vec %0d col %0d got %0d exp %0d", t, c, y[c], s); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    load_weights();
    run_vectors();
    load_weights();
    run_vectors();
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
