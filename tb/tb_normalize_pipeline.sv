// tb_normalize_pipeline -- self-checking test of the normalize pipeline.
// Each input is built as A = R_F*a + b with a random signed a (up to about
// +-2^80) and 0 <= b < R_F, so floor(A/R_F) = a is known without running the
// algorithm. Residues are computed here with wide signed integers. Checks the
// quotient's digits, the sign bit, the tag and function side band, and the
// latency of N_DIGITS+2 cycles at one row per cycle. Edge cases a = 0, -1
// and b = 0 are included.
module tb_normalize_pipeline;
  import rns_pkg::*;
  localparam int L = 3, TW = 7, NV = 60;
  typedef logic signed [255:0] sbig_t;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid, busy;
  logic [TW-1:0] in_tag = '0, out_tag;
  act_func_e in_func = ACT_NONE, out_func;
  rns_word_t [L-1:0] in_words, out_words;
  logic [L-1:0] out_neg;
  sbig_t qa [NV][L];
  int cyc = 0, start = 0, checks = 0, failures = 0, got = 0, n_neg = 0;
  sbig_t rf;

  normalize_pipeline #(.LANES(L), .TAG_W(TW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic rns_word_t to_rns(input sbig_t v);
    rns_word_t r;
    for (int d = 0; d < int'(N_DIGITS); d++) begin
      automatic sbig_t m = sbig_t'(MODULI[d]);
      automatic sbig_t x = v % m;
      if (x < 0) x = x + m;
      r[d] = DW'(x);
    end
    return r;
  endfunction

  function automatic sbig_t rnd(input int bits);
    sbig_t v = 0;
    for (int i = 0; i < 9; i++) v = (v << 32) | sbig_t'($urandom);
    v = v & ((sbig_t'(1) <<< bits) - 1);
    return ($urandom_range(0, 1) == 1) ? -v : v;
  endfunction

  initial begin
    rf = 1;
    for (int d = 0; d < int'(F_DIGITS); d++) rf = rf * sbig_t'(MODULI[d]);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = cyc;
    for (int t = 0; t < NV; t++) begin
      for (int l = 0; l < L; l++) begin
        automatic sbig_t a = (t == 0) ? 0 : (t == 1) ? -1 : rnd($urandom_range(1, 80));
        automatic sbig_t b = (t < 3) ? 0 : rnd(54);
        if (b < 0) b = -b;
        qa[t][l] = a;
        in_words[l] = to_rns(rf * a + b);
      end
      in_valid = 1; in_tag = TW'(t); in_func = act_func_e'(t % 2);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (int'(NORM_LAT) + 3) @(negedge clk);
    checks++; if (got != NV) begin failures++; $display("FAIL got %0d", got); end
    checks++; if (busy) failures++;
    checks++; if (n_neg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    automatic int t = int'(out_tag);
    got++;
    checks++;
    if (cyc != start + t + int'(NORM_LAT)) begin failures++; $display("FAIL latency %0d", cyc - start - t); end
    checks++;
    if (out_func != act_func_e'(t % 2)) failures++;
    for (int l = 0; l < L; l++) begin
      checks += 2;
      if (out_words[l] !== to_rns(qa[t][l])) begin failures++; $display("FAIL value vec %0d lane %0d", t, l); end
      if (out_neg[l] !== (qa[t][l] < 0)) begin failures++; $display("FAIL sign vec %0d lane %0d", t, l); end
      if (qa[t][l] < 0) n_neg++;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
