// tb_systolic_setup -- self-checking test of systolic_setup: rows enter back
// to back; element r of the row entering at cycle T must appear on x_skew[r]
// at cycle T+1+r, and valid/tag at T+1.
module tb_systolic_setup;
  import rns_pkg::*;
  localparam int R = 6, TW = 5, NV = 40;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic [TW-1:0] in_tag = '0, out_tag;
  logic [R-1:0][DW-1:0] in_row = '0, x_skew;
  logic [R-1:0][DW-1:0] rows [NV];
  int cyc = 0, checks = 0, failures = 0, nvalid = 0;

  systolic_setup #(.ROWS(R), .TAG_W(TW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // rows[t] enters during cycle 10+t
  initial begin
    for (int t = 0; t < NV; t++) for (int r = 0; r < R; r++) rows[t][r] = DW'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (cyc == 10);
    for (int t = 0; t < NV; t++) begin
      @(negedge clk);
      in_valid = 1; in_tag = TW'(t); in_row = rows[t];
    end
    @(negedge clk); in_valid = 0;
  end

  always @(negedge clk) if (rst_n) begin
    // during cycle cyc, lane r carries rows[cyc-11-r]
    for (int r = 0; r < R; r++) begin
      automatic int t = cyc - 11 - r;
      if (t >= 0 && t < NV) begin
        checks++;
        if (x_skew[r] !== rows[t][r]) begin failures++; $display("FAIL lane %0d vec %0d", r, t); end
      end
    end
    begin
      automatic int t = cyc - 11;
      checks++;
      if (out_valid !== (t >= 0 && t < NV)) begin failures++; $display("FAIL valid at %0d", cyc); end
      if (out_valid) begin
        nvalid++;
        checks++;
        if (out_tag !== TW'(t)) begin failures++; $display("FAIL tag"); end
      end
    end
    if (cyc == 11 + NV + R + 2) begin
      checks++; if (nvalid != NV) failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
