// tb_fifo_sched_full: end-to-end testbench of fifo_sched_top with every parameter at its
// default: n = 256, 6-bit LLRs, F = R = 4, one decoder.
//
// D behavioural decoder cores with random runtime are attached to the
// decoder ports. Several phases, each after a reset, stream codewords at a
// fixed interval I with a data parallelism P and check, for every codeword:
//   - it leaves exactly P*I cycles after it entered (constant latency, one
//     output every I cycles),
//   - it leaves in arrival order with the right content (hard decisions),
//   - its bit 0 tells correctly whether its decoding finished or was
//     terminated early (the decoders invert bit 0 on completion).
// It also counts how often each mechanism of the scheduler happens (early
// termination for a missing ROB head and for a full FIFO, same-cycle
// forwarding from a terminated decoder to the output, out-of-order decoder
// completion, a push into a full FIFO, a decoder restarted in the cycle its
// result is taken, all decoders busy at once) and fails if one never does.
// The decoder activity factor used for the dynamic power estimate is printed
// per phase.
module tb_fifo_sched_full;
  import fifo_sched_pkg::*;

  localparam int unsigned N  = CODE_N;
  localparam int unsigned QW = LLR_W;
  localparam int unsigned F  = FIFO_F;
  localparam int unsigned R  = ROB_R;
  localparam int unsigned D  = DEC_D;
  localparam int unsigned PW   = $clog2(F + R + 1);
  localparam int unsigned SEQW = (N - 1 > 20) ? 20 : N - 1;
  localparam int unsigned MAXC = 1 << SEQW;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [PW-1:0] cfg_p = '0;
  logic in_valid = 1'b0;
  logic [N*QW-1:0] in_llr = '0;
  logic out_valid, out_miss, in_overflow, et, out_active;
  logic [N-1:0] out_cw;
  logic [D-1:0] dec_start, dec_abort, dec_ack, dec_done, running;
  logic [N*QW-1:0] dec_llr;
  logic [D-1:0][N-1:0] dec_cw, dec_hd;
  et_cause_e et_cause;
  logic [$clog2(F+1)-1:0] fifo_count;
  longint unsigned active [D];
  int unsigned rt_short = 1, rt_long = 1;

  always #5 clk = ~clk;

  fifo_sched_top u_dut (
    .clk, .rst_n, .cfg_p, .in_valid, .in_llr, .out_valid, .out_cw,
    .dec_start, .dec_llr, .dec_abort, .dec_ack, .dec_done, .dec_cw,
    .et, .et_cause, .in_overflow, .out_miss, .out_active, .fifo_count
  );

  for (genvar g = 0; g < D; g++) begin : g_dec
    orbgrand_model #(.N(N), .QW(QW)) u_dec (
      .clk, .rst_n,
      .start     (dec_start[g]),
      .llr       (dec_llr),
      .terminate (dec_abort[g]),
      .ack       (dec_ack[g]),
      .rt_short, .rt_long,
      .done      (dec_done[g]),
      .cw        (dec_cw[g]),
      .hd        (dec_hd[g]),
      .running   (running[g]),
      .active    (active[g])
    );
  end

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // per-phase reference data
  logic [N-1:0]    exp_hd [MAXC];
  longint unsigned t_in   [MAXC];
  bit              term   [MAXC];
  int unsigned     n_in, n_out, cur_p, cur_i;
  bit              phase_on = 1'b0;

  // mechanism counters (whole run)
  int unsigned n_et_rob, n_et_fifo, n_fwd, n_ooo, n_push_full, n_restart,
               n_all_busy, n_done_out, n_term_out, n_abort, n_et;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL t=%0d: %s", cyc, what);
    end
  endtask

  // Sample everything at the falling edge, when the DUT is stable.
  always @(negedge clk) if (phase_on) begin
    if (in_valid) t_in[n_in % MAXC] = cyc + 1;
    if (et) begin
      n_et++;
      if (et_cause == ET_ROB || et_cause == ET_BOTH) n_et_rob++;
      if (et_cause == ET_FIFO || et_cause == ET_BOTH) n_et_fifo++;
    end
    n_abort += $countones(dec_abort);
    for (int d = 0; d < D; d++)
      if (dec_abort[d]) term[dec_hd[d][SEQW:1]] = 1'b1;
    if (u_dut.out_req && !u_dut.rob_head_stored && u_dut.rob_wr_en &&
        u_dut.rob_wr_slot == u_dut.rob_head && et) n_fwd++;
    if (u_dut.rob_wr_en && u_dut.rob_wr_slot != u_dut.rob_head && !u_dut.rob_head_stored) n_ooo++;
    if (in_valid && u_dut.fifo_full) n_push_full++;
    if ((dec_ack & dec_start) != '0) n_restart++;
    if (&running) n_all_busy++;
    check(!in_overflow, "input FIFO overflow");
    if (out_valid) begin
      int unsigned k;
      k = n_out;
      check(!out_miss, "ROB expelled an empty slot");
      check(out_active, "output before P arrivals");
      check(cyc == t_in[k % MAXC] + longint'(cur_p) * cur_i,
            $sformatf("codeword %0d left at %0d, entered %0d, P*I=%0d", k, cyc, t_in[k % MAXC], cur_p * cur_i));
      check(out_cw[N-1:1] == exp_hd[k % MAXC][N-1:1],
            $sformatf("codeword %0d content/order wrong", k));
      check(out_cw[0] == !term[k % MAXC],
            $sformatf("codeword %0d: finished flag %0b, terminated %0b", k, out_cw[0], term[k % MAXC]));
      if (out_cw[0]) n_done_out++; else n_term_out++;
      n_out++;
    end
  end

  task automatic run_phase(input int unsigned p, input int unsigned ii, input int unsigned ncw,
                           input int unsigned sh, input int unsigned lg);
    longint unsigned act0, act_tot;
    int unsigned et0, ab0;
    @(negedge clk);
    rst_n = 1'b0;
    in_valid = 1'b0;
    cfg_p = PW'(p);
    rt_short = sh;
    rt_long = lg;
    repeat (2) @(negedge clk);
    for (int k = 0; k < MAXC; k++) term[k] = 1'b0;
    n_in = 0; n_out = 0; cur_p = p; cur_i = ii;
    rst_n = 1'b1;
    @(negedge clk);
    phase_on = 1'b1;
    et0 = n_et; ab0 = n_abort;
    // ncw + p arrivals release exactly ncw codewords
    for (int unsigned j = 0; j < ncw + p; j++) begin
      logic [N-1:0] hd;
      for (int b = 0; b < N; b++) hd[b] = 1'($urandom % 2);
      hd[SEQW:1] = SEQW'(j);
      hd[0] = 1'b0;
      exp_hd[j % MAXC] = hd;
      for (int b = 0; b < N; b++) begin
        logic [QW-1:0] mag;
        mag = QW'(1 + ($urandom % ((1 << (QW - 1)) - 1)));
        in_llr[b*QW +: QW] = hd[b] ? (~mag + 1'b1) : mag;
      end
      in_valid = 1'b1;
      @(negedge clk);
      n_in++;
      in_valid = 1'b0;
      repeat (ii - 1) @(negedge clk);
    end
    @(negedge clk);
    phase_on = 1'b0;
    act_tot = 0;
    for (int d = 0; d < D; d++) act_tot += active[d];
    check(n_out == ncw, $sformatf("phase P=%0d I=%0d: %0d outputs, expected %0d", p, ii, n_out, ncw));
    check(n_abort - ab0 == n_et - et0, "one decoder terminated per early termination");
    $display("phase P=%0d I=%0d D=%0d: %0d codewords, %0d early terminations, activity %0.3f",
             p, ii, D, n_out, n_et - et0,
             real'(act_tot) / real'(p * ii + ii * (ncw + p - 1)));
  endtask

  initial begin
    #1_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run_phase(4, 10, 5000, 8, 60);
    run_phase(4, 4, 2000, 6, 30);
    run_phase(8, 2, 5000, 4, 40);
    run_phase(2, 1, 2000, 3, 10);
    check(n_et_rob > 0, "early termination for a missing ROB head never happened");
    check(n_et_fifo > 0, "early termination for a full FIFO never happened");
    check(n_fwd > 0, "terminated result forwarded to the output never happened");
    check(n_push_full > 0, "push into a full FIFO never happened");
    check(n_restart > 0, "decoder restarted in its collect cycle never happened");
    check(n_done_out > 0 && n_term_out > 0, "finished and terminated outputs both occur");
    if (D > 1) begin
      check(n_ooo > 0, "out-of-order completion never happened");
      check(n_all_busy > 0, "all decoders busy never happened");
    end
    $display("mechanisms: et_rob=%0d et_fifo=%0d forward=%0d out_of_order=%0d push_on_full=%0d restart=%0d all_busy=%0d finished=%0d terminated=%0d",
             n_et_rob, n_et_fifo, n_fwd, n_ooo, n_push_full, n_restart, n_all_busy, n_done_out, n_term_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
