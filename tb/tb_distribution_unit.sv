// tb_distribution_unit: self-checking testbench of distribution_unit with
// D = 3 decoders. For every pattern of free decoders and dispatch request
// (plus random LLR data) the chosen decoder must be the lowest-numbered free
// one, start must go to it only on dispatch, and the LLR block must reach
// the decoders unchanged.
module tb_distribution_unit;
  localparam int unsigned D = 3;
  localparam int unsigned WIDTH = 12;

  logic [D-1:0] free, target, dec_start;
  logic dispatch, any_free;
  logic [WIDTH-1:0] fifo_data, dec_llr;
  int checks = 0, failures = 0;

  distribution_unit #(.D(D), .WIDTH(WIDTH)) u_dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s free=%b", what, free); end
  endtask

  initial begin
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 64; it++) begin
      logic [D-1:0] exp_t;
      free      = D'(it % 8);
      dispatch  = (it / 8) % 2 == 1;
      fifo_data = WIDTH'($urandom);
      #1;
      exp_t = '0;
      for (int i = 0; i < D; i++) if (free[i] && exp_t == '0) exp_t[i] = 1'b1;
      check(target == exp_t, "lowest free decoder chosen");
      check(any_free == (free != '0), "any_free");
      check(dec_start == (dispatch ? exp_t : '0), "start only on dispatch");
      check(dec_llr == fifo_data, "LLR block delivered");
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
