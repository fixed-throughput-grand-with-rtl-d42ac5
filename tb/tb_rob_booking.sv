// tb_rob_booking: self-checking testbench of rob_booking (R = 3).
// Slots must be handed out in circular order 0,1,2,0,..., only while the
// tail slot is free or is released in the same cycle; releases come in
// booking order, as the ROB head does. Checked against a flag-array model.
module tb_rob_booking;
  localparam int unsigned R = 3;
  localparam int unsigned TW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic book = 1'b0, release_en = 1'b0;
  logic [TW-1:0] release_slot = '0, slot;
  logic can_book;
  logic [R-1:0] booked;
  bit m_booked [R];
  int m_tail = 0, m_head = 0, n_same = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rob_booking #(.R(R)) u_dut (.*);

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
      bit exp_can;
      release_en   = m_booked[m_head] && (($urandom % 3) == 0);
      release_slot = TW'(m_head);
      #1;
      exp_can = !m_booked[m_tail] || (release_en && m_head == m_tail);
      check(slot == TW'(m_tail), "tail slot in circular order");
      check(can_book == exp_can, "can_book");
      for (int s = 0; s < R; s++) check(booked[s] == m_booked[s], "booked flag");
      book = exp_can && (($urandom % 2) == 0);
      if (book && m_booked[m_tail]) n_same++;
      @(negedge clk);
      if (release_en) begin m_booked[m_head] = 0; m_head = (m_head + 1) % R; end
      if (book) begin m_booked[m_tail] = 1; m_tail = (m_tail + 1) % R; end
      book = 1'b0;
    end
    check(n_same > 0, "booking of a slot released in the same cycle exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
