// tb_host_interface -- self-checking test of the host interface together
// with the two conversion pipelines it drives, around a behavioural model of
// the eighteen unified buffers (one-cycle read latency, lane-masked write).
// Checks: instruction pushes and FIFO back-pressure; that a written value
// lands in the right (row, lane) of every digit's buffer with the residues of
// round(b*R_F/2^48) computed here; that writes and reads are refused while
// the controller is busy; and that reads return the written values in order
// (round trip through both converters, within two units in the last place).
module tb_host_interface;
  import rns_pkg::*;
  localparam int L = 4, UBD = 16, NW = 24;
  localparam int LW = $clog2(L), AW = $clog2(UBD), TW = AW + LW;
  typedef logic signed [255:0] sbig_t;
  logic clk = 0, rst_n = 0;
  logic host_req_valid = 0, host_req_ready, host_rsp_valid, host_rsp_ovf;
  host_cmd_e host_req_cmd = HOST_PUSH_INSTR;
  logic [15:0] host_req_addr = '0, host_req_lane = '0;
  logic [63:0] host_req_data = '0, host_rsp_data;
  logic ctrl_idle = 1, busy, instr_push, instr_full = 0;
  instr_t instr_data;
  logic fwd_in_valid, fwd_out_valid, rev_in_valid, rev_out_valid, rev_out_ovf;
  logic [TW-1:0] fwd_in_tag, fwd_out_tag;
  logic [63:0] fwd_in_data, rev_out_data;
  rns_word_t fwd_out_word, ub_wr_word, rev_in_word;
  logic ub_wr_en, ub_rd_en;
  logic [AW-1:0] ub_wr_addr, ub_rd_addr;
  logic [L-1:0] ub_wr_mask;
  logic [N_DIGITS-1:0][L-1:0][DW-1:0] ub_rd_rows;
  rns_word_t ub [UBD][L];
  int checks = 0, failures = 0, n_instr = 0;
  sbig_t rf;
  logic signed [63:0] vals [NW];
  int addrs [NW], lanes [NW];
  logic signed [63:0] expq [$];

  host_interface #(.LANES(L), .UB_DEPTH(UBD)) dut (.*);
  fwd_converter #(.TAG_W(TW)) u_fwd (.clk, .rst_n, .in_valid(fwd_in_valid), .in_tag(fwd_in_tag),
    .in_data(fwd_in_data), .out_valid(fwd_out_valid), .out_tag(fwd_out_tag), .out_word(fwd_out_word));
  rev_converter #(.TAG_W(1)) u_rev (.clk, .rst_n, .in_valid(rev_in_valid), .in_tag(1'b0),
    .in_word(rev_in_word), .out_valid(rev_out_valid), .out_tag(), .out_data(rev_out_data), .out_ovf(rev_out_ovf));

  // unified buffers model
  always @(posedge clk) begin
    if (ub_wr_en) for (int l = 0; l < L; l++) if (ub_wr_mask[l]) ub[ub_wr_addr][l] <= ub_wr_word;
    if (ub_rd_en) for (int d = 0; d < int'(N_DIGITS); d++) for (int l = 0; l < L; l++)
      ub_rd_rows[d][l] <= ub[ub_rd_addr][l][d];
  end

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

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

  task automatic req(input host_cmd_e cmd, input int addr, input int lane, input logic [63:0] data);
    @(negedge clk);
    host_req_valid = 1; host_req_cmd = cmd; host_req_addr = 16'(addr);
    host_req_lane = 16'(lane); host_req_data = data;
    #1;
    while (!host_req_ready) begin @(negedge clk); #1; end
    if (cmd == HOST_PUSH_INSTR) begin
      check(instr_push && instr_data == instr_t'(data[$bits(instr_t)-1:0]), "instruction push");
      n_instr++;
    end
    @(posedge clk);
    @(negedge clk);
    host_req_valid = 0;
  endtask

  always @(negedge clk) if (rst_n && host_rsp_valid) begin
    automatic logic signed [63:0] e = expq.pop_front();
    automatic logic signed [63:0] g = host_rsp_data;
    check(!host_rsp_ovf && g <= e && g >= e - 2, $sformatf("read-back got %h exp %h", g, e));
  end

  initial begin
    rf = 1;
    for (int d = 0; d < int'(F_DIGITS); d++) rf = rf * sbig_t'(MODULI[d]);
    for (int i = 0; i < NW; i++) begin
      vals[i] = $signed({$urandom, $urandom}) >>> $urandom_range(2, 40);
      addrs[i] = i / L; lanes[i] = i % L;
    end
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;

    // instructions and back-pressure
    req(HOST_PUSH_INSTR, 0, 0, 64'h0000_0002_0003_0004);
    instr_full = 1;
    @(negedge clk);
    host_req_valid = 1; host_req_cmd = HOST_PUSH_INSTR; #1;
    check(!host_req_ready, "refused while instruction FIFO full");
    host_req_valid = 0; instr_full = 0;

    // buffer access refused while the controller works
    ctrl_idle = 0;
    host_req_valid = 1; host_req_cmd = HOST_WRITE_UB; #1;
    check(!host_req_ready, "write refused while busy");
    host_req_cmd = HOST_READ_UB; #1;
    check(!host_req_ready, "read refused while busy");
    host_req_valid = 0; ctrl_idle = 1;

    // writes
    for (int i = 0; i < NW; i++) req(HOST_WRITE_UB, addrs[i], lanes[i], vals[i]);
    while (busy) @(negedge clk);
    for (int i = 0; i < NW; i++) begin
      automatic sbig_t x = (sbig_t'(vals[i]) * rf + (sbig_t'(1) <<< 47)) >>> 48;
      check(ub[addrs[i]][lanes[i]] == to_rns(x), $sformatf("buffer word %0d", i));
    end
    // reads, back to back
    for (int i = 0; i < NW; i++) begin
      expq.push_back(vals[i]);
      req(HOST_READ_UB, addrs[i], lanes[i], '0);
    end
    while (busy) @(negedge clk);
    @(negedge clk);
    check(expq.size() == 0, "all reads answered");
    check(n_instr == 1, "instruction count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
