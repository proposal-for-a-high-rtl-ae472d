// tb_rev_converter -- self-checking test of the RNS-to-binary pipeline.
// Random signed fixed-point integers X (up to about +-2^72, so both in-range
// and overflowing values occur) are turned into residues here; the expected
// Q15.48 output is floor(X*2^48/R_F), computed with wide integers, or a
// saturated value with ovf when the integer part exceeds 16 bits. The
// pipeline may be one unit in the last place low (truncated reciprocal).
// Checks value, ovf, tag and the N_DIGITS+4-cycle latency.
module tb_rev_converter;
  import rns_pkg::*;
  localparam int TW = 8, NV = 200;
  typedef logic signed [255:0] sbig_t;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid, out_ovf;
  logic [TW-1:0] in_tag = '0, out_tag;
  rns_word_t in_word = '0;
  logic signed [63:0] out_data;
  sbig_t xs [NV];
  int cyc = 0, start = 0, checks = 0, failures = 0, got = 0, n_ovf = 0;
  sbig_t rf;

  rev_converter #(.TAG_W(TW)) dut (.*);
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

  function automatic sbig_t floordiv(input sbig_t a, input sbig_t b);
    automatic sbig_t q = a / b;
    if ((a % b != 0) && (a < 0)) q = q - 1;
    return q;
  endfunction

  initial begin
    rf = 1;
    for (int d = 0; d < int'(F_DIGITS); d++) rf = rf * sbig_t'(MODULI[d]);
    for (int t = 0; t < NV; t++) begin
      automatic sbig_t v = (sbig_t'($urandom) << 64) | (sbig_t'($urandom) << 32) | sbig_t'($urandom);
      v = v >> $urandom_range(24, 95);
      xs[t] = ($urandom_range(0, 1) == 1) ? -v : v;
    end
    xs[0] = 0; xs[1] = rf; xs[2] = -rf; xs[3] = -1; xs[4] = 1; xs[5] = rf * 32767; xs[6] = -rf * 32768;
    xs[7] = rf * 32768;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = cyc;
    for (int t = 0; t < NV; t++) begin
      in_valid = 1; in_tag = TW'(t); in_word = to_rns(xs[t]);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (int'(REV_LAT) + 4) @(negedge clk);
    checks++; if (got != NV) failures++;
    checks++; if (n_ovf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    automatic int t = int'(out_tag);
    automatic sbig_t e = floordiv(xs[t] <<< 48, rf);
    automatic bit ovf = (e > ((sbig_t'(1) <<< 63) - 1)) || (e < -(sbig_t'(1) <<< 63));
    got++;
    checks += 2;
    if (cyc != start + t + int'(REV_LAT)) begin failures++; $display("FAIL latency"); end
    if (out_ovf !== ovf) begin failures++; $display("FAIL ovf %0d", t); end
    if (ovf) begin
      n_ovf++;
      checks++;
      if (out_data !== (e < 0 ? 64'sh8000_0000_0000_0000 : 64'sh7fff_ffff_ffff_ffff)) failures++;
    end else begin
      automatic sbig_t g = sbig_t'(out_data);
      checks++;
      if (!(g == e || g == e - 1)) begin failures++; $display("FAIL value %0d got %0d exp %0d", t, out_data, e); end
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
