// tb_unified_buffer -- self-checking test of unified_buffer: random masked
// lane writes and row reads against an array model; the read data must
// appear exactly one cycle after the read request.
module tb_unified_buffer;
  import rns_pkg::*;
  localparam int L = 6, D = 16;
  logic clk = 0;
  logic rd_en = 0, wr_en = 0;
  logic [$clog2(D)-1:0] rd_addr = '0, wr_addr = '0;
  logic [L-1:0][DW-1:0] rd_data, wr_data = '0;
  logic [L-1:0] wr_mask = '0;
  logic [L-1:0][DW-1:0] model [D];
  logic [L-1:0][DW-1:0] exp_row;
  int checks = 0, failures = 0;

  unified_buffer #(.LANES(L), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    // fill every row fully first
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = a[$clog2(D)-1:0]; wr_mask = '1;
      for (int l = 0; l < L; l++) wr_data[l] = DW'($urandom);
      model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      wr_en = $urandom_range(0, 1) == 1;
      wr_addr = $clog2(D)'($urandom); wr_mask = L'($urandom);
      for (int l = 0; l < L; l++) wr_data[l] = DW'($urandom);
      rd_en = 1; rd_addr = $clog2(D)'($urandom);
      exp_row = model[rd_addr];              // read sees the old contents
      if (wr_en) for (int l = 0; l < L; l++) if (wr_mask[l]) model[wr_addr][l] = wr_data[l];
      @(posedge clk); #1;
      checks++;
      if (rd_data !== exp_row) begin failures++; $display("FAIL row %0d", rd_addr); end
    end
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
