// tb_accumulators -- self-checking test of accumulators: random overwrite
// and accumulate writes (modulo 239) against a model computed with plain
// integer arithmetic, and reads one cycle after the request.
module tb_accumulators;
  import rns_pkg::*;
  localparam int C = 5, D = 16, M = 239;
  logic clk = 0;
  logic wr_valid = 0, wr_accum = 0, rd_en = 0;
  logic [$clog2(D)-1:0] wr_addr = '0, rd_addr = '0;
  logic [C-1:0][DW-1:0] wr_data = '0, rd_data;
  int model [D][C];
  int checks = 0, failures = 0, n_accum = 0;

  accumulators #(.COLS(C), .DEPTH(D), .MODULUS(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_valid = 1; wr_accum = 0; wr_addr = a[$clog2(D)-1:0];
      for (int c = 0; c < C; c++) begin
        wr_data[c] = DW'($urandom_range(0, M-1)); model[a][c] = int'(wr_data[c]);
      end
    end
    for (int i = 0; i < 800; i++) begin
      @(negedge clk);
      wr_valid = $urandom_range(0, 3) != 0;
      wr_accum = $urandom_range(0, 3) != 0;
      wr_addr = $clog2(D)'($urandom);
      for (int c = 0; c < C; c++) wr_data[c] = DW'($urandom_range(0, M-1));
      if (wr_valid) begin
        if (wr_accum) n_accum++;
        for (int c = 0; c < C; c++)
          model[wr_addr][c] = wr_accum ? (model[wr_addr][c] + int'(wr_data[c])) % M : int'(wr_data[c]);
      end
      rd_en = 1; rd_addr = $clog2(D)'($urandom);
      while (rd_addr == wr_addr) rd_addr = $clog2(D)'($urandom);
      @(posedge clk); #1;
      for (int c = 0; c < C; c++) begin
        checks++;
        if (int'(rd_data[c]) != model[rd_addr][c]) begin
          failures++; $display("FAIL row %0d col %0d got %0d exp %0d", rd_addr, c, rd_data[c], model[rd_addr][c]);
        end
      end
    end
    checks++; if (n_accum == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
