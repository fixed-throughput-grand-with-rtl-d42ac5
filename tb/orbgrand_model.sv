// orbgrand_model: behavioural stand-in for one GRAND-type decoder core, used
// only by the testbenches. It does not decode: it reproduces the interface
// behaviour the scheduler relies on, with a random runtime.
//
// On start it captures the hard decisions of the LLR block (bit = 1 for a
// negative LLR) and draws a runtime: with probability 3/4 uniformly in
// 1..rt_short cycles, otherwise uniformly in 1..rt_long cycles, a crude
// model of the heavy-tailed number of noise guesses. When the runtime is
// over it raises done (registered) and holds its result until ack. Its
// codeword estimate cw is the hard decision, with bit 0 inverted once the
// decoding has finished, so a testbench can tell a finished result from one
// taken by early termination (terminate together with ack). active counts
// the cycles the core spends decoding.
module orbgrand_model #(
  parameter int unsigned N  = 256,
  parameter int unsigned QW = 6
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [N*QW-1:0] llr,
  input  logic            terminate,
  input  logic            ack,
  input  int unsigned     rt_short,
  input  int unsigned     rt_long,
  output logic            done,
  output logic [N-1:0]    cw,
  output logic [N-1:0]    hd,
  output logic            running,
  output longint unsigned active
);
  int unsigned remain;

  function automatic int unsigned draw();
    if (($urandom % 4) != 0) return 1 + ($urandom % rt_short);
    return 1 + ($urandom % rt_long);
  endfunction

  assign cw = done ? (hd ^ N'(1)) : hd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done    <= 1'b0;
      running <= 1'b0;
      hd      <= '0;
      remain  <= 0;
      active  <= 0;
    end else begin
      if (running && !done) active <= active + 1;
      if (start) begin
        for (int unsigned b = 0; b < N; b++) hd[b] <= llr[b*QW + QW - 1];
        remain  <= draw();
        running <= 1'b1;
        done    <= 1'b0;
      end else if (ack) begin
        running <= 1'b0;
        done    <= 1'b0;
      end else if (running && !done) begin
        if (remain <= 1) done <= 1'b1;
        else remain <= remain - 1;
      end
    end
  end

  // A result is taken only from a running core, and terminate comes with ack.
  a_ack_running: assert property (@(posedge clk) disable iff (!rst_n) ack |-> running);
  a_term_ack:    assert property (@(posedge clk) disable iff (!rst_n) terminate |-> ack);

endmodule
