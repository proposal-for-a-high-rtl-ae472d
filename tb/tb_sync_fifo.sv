// tb_sync_fifo -- self-checking test of sync_fifo (used as weight FIFO).
// Random pushes and pops against a queue model; checks data order, full,
// empty and count every cycle, including push and pop in the same cycle.
module tb_sync_fifo;
  localparam int W = 24, D = 8;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0, full, empty;
  logic [W-1:0] push_data = '0, pop_data;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == D), "full");
      check(count == model.size(), "count");
      if (model.size() > 0) check(pop_data == model[0], "head data");
      push = ($urandom_range(0, 99) < (i < 1000 ? 60 : 40)) && !full;
      pop  = ($urandom_range(0, 99) < (i < 1000 ? 40 : 60)) && !empty;
      push_data = W'($urandom);
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(push_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
