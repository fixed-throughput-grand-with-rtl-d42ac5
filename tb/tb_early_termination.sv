// tb_early_termination: self-checking testbench of early_termination (D = 3,
// R = 4). Random conditions are compared with the condition network
//   E.T. = new input AND ((output request AND no decoded head codeword)
//                         OR (FIFO full AND all decoders occupied))
// and the terminated decoder must be the busy one with the oldest ROB slot.
module tb_early_termination;
  import fifo_sched_pkg::*;
  localparam int unsigned D = 3;
  localparam int unsigned R = 4;
  localparam int unsigned TW = 2;

  logic in_valid, out_req, fifo_full, rob_head_stored, et;
  logic [TW-1:0] rob_head;
  logic [D-1:0] busy, done, terminate;
  logic [D-1:0][TW-1:0] tags;
  et_cause_e cause;
  int checks = 0, failures = 0, n_rob = 0, n_fifo = 0, n_both = 0;

  early_termination #(.D(D), .R(R)) u_dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 4000; it++) begin
      bit head_done, not_ready, occupied, c_rob, c_fifo, exp_et;
      logic [D-1:0] exp_t;
      int perm [R];
      int best;
      for (int s = 0; s < R; s++) perm[s] = s;
      perm.shuffle();
      in_valid  = ($urandom % 4) != 0;
      out_req   = in_valid && ($urandom % 2);
      fifo_full = $urandom % 2;
      rob_head_stored = ($urandom % 3) == 0;
      rob_head  = TW'($urandom);
      for (int i = 0; i < D; i++) begin
        tags[i] = TW'(perm[i]);
        busy[i] = ($urandom % 5) != 0;
        done[i] = ($urandom % 4) == 0;
      end
      #1;
      head_done = 0;
      for (int i = 0; i < D; i++) if (busy[i] && done[i] && tags[i] == rob_head) head_done = 1;
      not_ready = !rob_head_stored && !head_done;
      occupied  = 1;
      for (int i = 0; i < D; i++) if (!busy[i] || done[i]) occupied = 0;
      c_rob  = out_req && not_ready;
      c_fifo = fifo_full && occupied;
      exp_et = in_valid && (c_rob || c_fifo);
      exp_t = '0;
      best = R;
      if (exp_et)
        for (int i = 0; i < D; i++)
          if (busy[i] && ((int'(tags[i]) - int'(rob_head) + R) % R) < best) begin
            best = (int'(tags[i]) - int'(rob_head) + R) % R;
            exp_t = '0; exp_t[i] = 1'b1;
          end
      check(et == exp_et, "E.T. condition");
      check(terminate == exp_t, "longest-running decoder terminated");
      check(cause == (!exp_et ? ET_NONE : (c_rob && c_fifo) ? ET_BOTH : c_rob ? ET_ROB : ET_FIFO), "cause");
      if (exp_et && c_rob && !c_fifo) n_rob++;
      if (exp_et && c_fifo && !c_rob) n_fifo++;
      if (exp_et && c_fifo && c_rob) n_both++;
      #1;
    end
    check(n_rob > 0 && n_fifo > 0 && n_both > 0, "all causes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
