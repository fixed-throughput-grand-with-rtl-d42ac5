// tb_fifo_sched_configs: runs the scheduler configurations (F = R = P, D)
// = (1,1), (2,1), (2,2), (4,1) and (4,2) side by side, 100,000 codewords
// per configuration and arrival interval, each at arrival
// intervals I = 1 and I = 10 (the (1,1) case only at I = 10, since P*I must
// be at least 2), with n = 256 and 6-bit LLRs. Every configuration checks
// latency, order and content of every codeword (see sched_harness); this
// bench adds up the results and prints, per configuration, the share of
// codewords whose decoding was cut short by an early termination, the
// quantity that drives the error-rate differences between configurations.
// The decoders are behavioural models with a random runtime, so the shares
// are illustrative, not error rates.
module tb_fifo_sched_configs;
  localparam int unsigned NCW = 100_000;
  localparam int unsigned NC  = 5;

  bit          fin   [NC];
  int          chk   [NC];
  int          fail  [NC];
  int unsigned net   [NC];
  int unsigned nterm [NC];
  int unsigned ndone [NC];
  int checks = 0, failures = 0;

  sched_harness #(.F(1), .R(1), .D(1), .P(1), .NCW(NCW)) u_c11 (fin[0], chk[0], fail[0], net[0], nterm[0], ndone[0]);
  sched_harness #(.F(2), .R(2), .D(1), .P(2), .NCW(NCW)) u_c21 (fin[1], chk[1], fail[1], net[1], nterm[1], ndone[1]);
  sched_harness #(.F(2), .R(2), .D(2), .P(2), .NCW(NCW)) u_c22 (fin[2], chk[2], fail[2], net[2], nterm[2], ndone[2]);
  sched_harness #(.F(4), .R(4), .D(1), .P(4), .NCW(NCW)) u_c41 (fin[3], chk[3], fail[3], net[3], nterm[3], ndone[3]);
  sched_harness #(.F(4), .R(4), .D(2), .P(4), .NCW(NCW)) u_c42 (fin[4], chk[4], fail[4], net[4], nterm[4], ndone[4]);

  initial begin
    #2_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string names [NC] = '{"(1,1)", "(2,1)", "(2,2)", "(4,1)", "(4,2)"};
    bit all_done;
    do begin
      #1000;
      all_done = 1'b1;
      for (int c = 0; c < NC; c++) all_done &= fin[c];
    end while (!all_done);
    for (int c = 0; c < NC; c++) begin
      checks   += chk[c] + 1;
      failures += fail[c];
      // every configuration must see some early terminations and some
      // completed decodings
      if (net[c] == 0 || ndone[c] == 0) failures++;
      $display("config %s: %0d codewords, %0d early terminations, %0.1f %% terminated",
               names[c], nterm[c] + ndone[c], net[c],
               100.0 * real'(nterm[c]) / real'(nterm[c] + ndone[c]));
    end
    // more buffering and more decoders must not terminate more codewords
    checks++;
    if (nterm[3] > nterm[1]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
