// tb_fwd_converter -- self-checking test of the binary-to-RNS pipeline.
// Random Q15.48 inputs over the whole 64-bit range plus edge values; the
// expected RNS word is round(b*R_F/2^48) reduced digit by digit with wide
// signed integers here. Checks values, tags, and the 4-cycle latency at one
// value per cycle.
module tb_fwd_converter;
  import rns_pkg::*;
  localparam int TW = 8, NV = 200;
  typedef logic signed [255:0] sbig_t;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic [TW-1:0] in_tag = '0, out_tag;
  logic signed [63:0] in_data = '0;
  rns_word_t out_word;
  logic signed [63:0] vals [NV];
  int cyc = 0, start = 0, checks = 0, failures = 0, got = 0;
  sbig_t rf;

  fwd_converter #(.TAG_W(TW)) dut (.*);
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

  function automatic sbig_t expect_x(input logic signed [63:0] b);
    // floor((b*R_F + 2^47) / 2^48)
    automatic sbig_t p = sbig_t'(b) * rf + (sbig_t'(1) <<< 47);
    return p >>> 48;
  endfunction

  initial begin
    rf = 1;
    for (int d = 0; d < int'(F_DIGITS); d++) rf = rf * sbig_t'(MODULI[d]);
    for (int t = 0; t < NV; t++) vals[t] = $signed({$urandom, $urandom}) >>> $urandom_range(0, 60);
    vals[0] = 0; vals[1] = 64'sd1 <<< 48; vals[2] = -(64'sd1 <<< 48);
    vals[3] = 64'h7fff_ffff_ffff_ffff; vals[4] = 64'sh8000_0000_0000_0000; vals[5] = -1; vals[6] = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = cyc;
    for (int t = 0; t < NV; t++) begin
      in_valid = 1; in_tag = TW'(t); in_data = vals[t];
      @(negedge clk);
    end
    in_valid = 0;
    repeat (8) @(negedge clk);
    checks++; if (got != NV) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    automatic int t = int'(out_tag);
    got++;
    checks += 2;
    if (cyc != start + t + int'(FWD_LAT)) begin failures++; $display("FAIL latency"); end
    if (out_word !== to_rns(expect_x(vals[t]))) begin failures++; $display("FAIL value %0d: %h", t, vals[t]); end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
