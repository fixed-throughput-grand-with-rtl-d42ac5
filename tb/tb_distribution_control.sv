// tb_distribution_control: self-checking testbench of distribution_control
// (D = 3, R = 4). Random FIFO/booking/collect conditions are applied; the
// dispatch decision, the free vector and the busy/tag table are compared with
// a model, including a decoder restarted in the cycle its result is taken.
module tb_distribution_control;
  localparam int unsigned D = 3;
  localparam int unsigned R = 4;
  localparam int unsigned TW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic fifo_empty = 1'b1, can_book = 1'b0, any_free = 1'b0, dispatch;
  logic [TW-1:0] book_slot = '0;
  logic [D-1:0] target = '0, collect = '0, free, busy;
  logic [D-1:0][TW-1:0] tags;
  bit m_busy [D];
  int m_tag [D];
  int checks = 0, failures = 0, n_restart = 0, n_disp = 0;

  always #5 clk = ~clk;

  distribution_control #(.D(D), .R(R)) u_dut (.*);

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
    for (int it = 0; it < 3000; it++) begin
      logic [D-1:0] m_free;
      bit exp_disp;
      fifo_empty = ($urandom % 4) == 0;
      can_book   = ($urandom % 4) != 0;
      book_slot  = TW'($urandom);
      collect    = '0;
      for (int i = 0; i < D; i++) if (m_busy[i] && ($urandom % 3) == 0) collect[i] = 1'b1;
      for (int i = 0; i < D; i++) m_free[i] = !m_busy[i] || collect[i];
      any_free = m_free != '0;
      target   = '0;
      for (int i = 0; i < D; i++) if (m_free[i] && target == '0) target[i] = 1'b1;
      #1;
      exp_disp = !fifo_empty && can_book && any_free;
      check(dispatch == exp_disp, "dispatch decision");
      check(free == m_free, "free vector");
      for (int i = 0; i < D; i++) begin
        check(busy[i] == m_busy[i], "busy flag");
        if (m_busy[i]) check(tags[i] == TW'(m_tag[i]), "tag table");
      end
      @(negedge clk);
      for (int i = 0; i < D; i++) begin
        if (exp_disp && target[i]) begin
          if (collect[i]) n_restart++;
          m_busy[i] = 1; m_tag[i] = book_slot; n_disp++;
        end else if (collect[i]) m_busy[i] = 0;
      end
    end
    check(n_restart > 0 && n_disp > 0, "dispatch and same-cycle restart exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
