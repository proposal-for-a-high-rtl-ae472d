// tb_activation_unit -- self-checking test of activation_unit: random words
// and sign bits under both functions; ReLU must zero exactly the negative
// lanes, ACT_NONE must pass everything, one cycle later.
module tb_activation_unit;
  import rns_pkg::*;
  localparam int L = 4, TW = 5;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid, busy;
  logic [TW-1:0] in_tag = '0, out_tag;
  act_func_e in_func = ACT_NONE;
  rns_word_t [L-1:0] in_words = '0, out_words, exp_words;
  logic [L-1:0] in_neg = '0;
  int checks = 0, failures = 0, n_zeroed = 0;

  activation_unit #(.LANES(L), .TAG_W(TW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      in_valid = 1; in_tag = TW'(i); in_func = act_func_e'($urandom_range(0, 1));
      in_neg = L'($urandom);
      for (int l = 0; l < L; l++) for (int d = 0; d < int'(N_DIGITS); d++) in_words[l][d] = DW'($urandom_range(1, 150));
      for (int l = 0; l < L; l++) begin
        exp_words[l] = (in_func == ACT_RELU && in_neg[l]) ? '0 : in_words[l];
        if (in_func == ACT_RELU && in_neg[l]) n_zeroed++;
      end
      @(posedge clk); #1;
      checks += 3;
      if (!out_valid) failures++;
      if (out_tag !== TW'(i)) failures++;
      if (out_words !== exp_words) begin failures++; $display("FAIL step %0d", i); end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    checks++; if (out_valid) failures++;
    checks++; if (n_zeroed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
