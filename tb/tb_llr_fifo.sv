// tb_llr_fifo: self-checking testbench of llr_fifo (depth 3, 8-bit entries).
// Random pushes and pops are compared with a queue model: head data, empty,
// full, count, overflow, the one-cycle write-to-read delay and the rule that
// a full FIFO accepts a push only together with a pop.
module tb_llr_fifo;
  localparam int unsigned DEPTH = 3;
  localparam int unsigned WIDTH = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic push = 1'b0, pop = 1'b0;
  logic [WIDTH-1:0] push_data = '0, pop_data;
  logic empty, full, overflow;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [WIDTH-1:0] model [$];
  int checks = 0, failures = 0;
  int n_full_push = 0, n_ovf = 0;

  always #5 clk = ~clk;

  llr_fifo #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(empty && !full && count == 0, "empty after reset");
    for (int it = 0; it < 3000; it++) begin
      bit exp_ovf;
      push      = ($urandom % 3) != 0;
      push_data = WIDTH'($urandom);
      pop       = (model.size() > 0) && (($urandom % 3) == 0);
      #1;
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == DEPTH), "full flag");
      check(count == model.size(), "count");
      if (model.size() > 0) check(pop_data == model[0], "head data");
      exp_ovf = push && model.size() == DEPTH && !pop;
      check(overflow == exp_ovf, "overflow flag");
      if (push && model.size() == DEPTH && pop) n_full_push++;
      if (exp_ovf) n_ovf++;
      @(negedge clk);
      if (pop) void'(model.pop_front());
      if (push && !exp_ovf) model.push_back(push_data);
    end
    check(n_full_push > 0 && n_ovf > 0, "push-on-full and overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
