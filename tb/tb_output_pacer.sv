// tb_output_pacer: self-checking testbench of output_pacer (F + R = 8).
// For each P in 1..8, after a reset, arrivals come at random intervals; the
// first P arrivals must raise no output request and every later arrival
// exactly one, in the same cycle, so the k-th output coincides with arrival
// k+P.
module tb_output_pacer;
  localparam int unsigned MAX_P = 8;
  localparam int unsigned PW = 4;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_req, primed;
  logic [PW-1:0] cfg_p = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  output_pacer #(.MAX_P(MAX_P)) u_dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #500_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 1; p <= MAX_P; p++) begin
      int arrivals;
      @(negedge clk);
      rst_n = 1'b0;
      cfg_p = PW'(p);
      @(negedge clk);
      rst_n = 1'b1;
      arrivals = 0;
      for (int c = 0; c < 200; c++) begin
        in_valid = ($urandom % 3) == 0;
        #1;
        check(out_req == (in_valid && arrivals >= p), $sformatf("P=%0d arrival %0d", p, arrivals));
        check(primed == (arrivals >= p), "primed");
        @(negedge clk);
        if (in_valid) arrivals++;
      end
      in_valid = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
