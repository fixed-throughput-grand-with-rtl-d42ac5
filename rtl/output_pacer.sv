// output_pacer: enforces the constant input-output latency of P arrival
// intervals.
//
// The system first accumulates P codewords. From the (P+1)-th arrival on,
// every arrival is paired with an output request in the same cycle, so the
// codeword that arrived P arrivals earlier leaves the ROB exactly P*I cycles
// after it entered, and outputs follow each other every I cycles like the
// inputs. The pacer counts arrivals up to cfg_p (saturating) and raises
// out_req together with in_valid once the count has reached cfg_p. cfg_p is
// the data parallelism P, 1 <= P <= F+R, and must stay constant after reset.
// out_req is combinational. Tying the output request to the input arrival
// (rather than to a separate timer) is this design's choice.
module output_pacer #(
  parameter int unsigned MAX_P = fifo_sched_pkg::FIFO_F + fifo_sched_pkg::ROB_R,
  localparam int unsigned PW = $clog2(MAX_P + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [PW-1:0] cfg_p,
  input  logic          in_valid,
  output logic          out_req,
  output logic          primed
);
  logic [PW-1:0] cnt;

  assign primed  = (cnt >= cfg_p);
  assign out_req = in_valid && primed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (in_valid && !primed) cnt <= cnt + 1'b1;
  end

endmodule
