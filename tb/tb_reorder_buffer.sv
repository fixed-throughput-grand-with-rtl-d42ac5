// tb_reorder_buffer: self-checking testbench of reorder_buffer (R = 4,
// 16-bit codewords). Codewords are given increasing sequence numbers, their
// slots are filled in random order, and the head is requested whenever its
// codeword is stored or written in that same cycle. Every output must appear
// one cycle after its request, in sequence order, and the same-cycle forward
// path and out-of-order writes must both occur.
module tb_reorder_buffer;
  localparam int unsigned R = 4;
  localparam int unsigned W = 16;
  localparam int unsigned TW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, rd_req = 1'b0;
  logic [TW-1:0] wr_slot = '0, head;
  logic [W-1:0] wr_data = '0, out_data;
  logic head_stored, head_ready, out_valid, out_miss;
  int checks = 0, failures = 0;
  // model: slot s holds sequence number seq_of[s] once written
  bit   m_written [R];
  int   issued = 0, next_out = 0, m_head = 0;
  int   pending [$];   // sequence numbers booked but not written
  int   n_fwd = 0, n_ooo = 0;
  bit   exp_valid = 0;
  int   exp_seq = 0;

  always #5 clk = ~clk;

  reorder_buffer #(.R(R), .W(W)) u_dut (.*);

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
    for (int it = 0; it < 4000; it++) begin
      int pick;
      // keep up to R codewords in flight (booked in order)
      while (issued - next_out < R) begin pending.push_back(issued); issued++; end
      wr_en = 1'b0;
      if (pending.size() > 0 && ($urandom % 2)) begin
        pick    = $urandom % pending.size();
        wr_en   = 1'b1;
        wr_slot = TW'(pending[pick] % R);
        wr_data = W'(pending[pick] * 7 + 3);
      end
      #1;
      check(head == TW'(m_head), "head pointer");
      check(head_stored == m_written[m_head], "head_stored");
      check(head_ready == (m_written[m_head] || (wr_en && wr_slot == TW'(m_head))), "head_ready");
      check(out_valid == exp_valid, "out_valid one cycle after request");
      if (exp_valid) check(out_data == W'(exp_seq * 7 + 3) && !out_miss, "output order and data");
      rd_req = head_ready && ($urandom % 3 != 0);
      if (rd_req && !m_written[m_head]) n_fwd++;
      if (wr_en && wr_slot != TW'(m_head)) n_ooo++;
      @(negedge clk);
      if (wr_en) begin
        m_written[wr_slot] = 1;
        pending.delete(pick);
      end
      exp_valid = rd_req;
      if (rd_req) begin
        exp_seq = next_out;
        m_written[m_head] = 0;
        m_head = (m_head + 1) % R;
        next_out++;
      end
      rd_req = 1'b0;
    end
    check(n_fwd > 0 && n_ooo > 0, "forward and out-of-order writes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
