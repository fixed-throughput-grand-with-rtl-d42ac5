// tb_collection_unit: self-checking testbench of collection_unit (D = 3,
// R = 4, 8-bit codewords). Random busy/done/terminate patterns with distinct
// ROB tags: a terminated decoder must win; otherwise the finished decoder
// whose slot is nearest the ROB head (oldest codeword); its codeword must be
// written to its own slot and it alone acknowledged.
module tb_collection_unit;
  localparam int unsigned D = 3;
  localparam int unsigned R = 4;
  localparam int unsigned W = 8;
  localparam int unsigned TW = 2;

  logic [D-1:0] terminate, busy, done, collect;
  logic [D-1:0][W-1:0] dec_cw;
  logic [D-1:0][TW-1:0] tags;
  logic [TW-1:0] rob_head, rob_wr_slot;
  logic rob_wr_en;
  logic [W-1:0] rob_wr_data;
  int checks = 0, failures = 0, n_oldest_not_lowest = 0;

  collection_unit #(.D(D), .R(R), .W(W)) u_dut (.*);

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
    for (int it = 0; it < 2000; it++) begin
      logic [D-1:0] exp_c;
      int best, first;
      int perm [R];
      for (int s = 0; s < R; s++) perm[s] = s;
      perm.shuffle();
      rob_head = TW'($urandom);
      for (int i = 0; i < D; i++) begin
        tags[i]   = TW'(perm[i]);
        busy[i]   = ($urandom % 4) != 0;
        done[i]   = ($urandom % 2) == 0;
        dec_cw[i] = W'($urandom);
      end
      terminate = '0;
      if (($urandom % 4) == 0) terminate[$urandom % D] = 1'b1;
      #1;
      exp_c = '0;
      if (terminate != '0) exp_c = terminate;
      else begin
        best = R; first = -1;
        for (int i = 0; i < D; i++)
          if (busy[i] && done[i]) begin
            int age;
            age = (int'(tags[i]) - int'(rob_head) + R) % R;
            if (first < 0) first = i;
            if (age < best) begin best = age; exp_c = '0; exp_c[i] = 1'b1; end
          end
        if (first >= 0 && !exp_c[first]) n_oldest_not_lowest++;
      end
      check(collect == exp_c, "collected decoder");
      check(rob_wr_en == (exp_c != '0), "ROB write enable");
      for (int i = 0; i < D; i++)
        if (exp_c[i]) check(rob_wr_slot == tags[i] && rob_wr_data == dec_cw[i], "slot and data");
      #1;
    end
    check(n_oldest_not_lowest > 0, "oldest-first preference exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
