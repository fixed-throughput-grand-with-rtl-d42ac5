// distribution_unit: hands the LLR block at the head of the input FIFO to an
// available decoder.
//
// A decoder is available when it is idle or hands over its result in this
// cycle (free). The unit picks the lowest-numbered available decoder, and
// when distribution control signals a dispatch it raises that decoder's
// start for one cycle. The LLR block is broadcast on dec_llr; only the
// started decoder captures it. Purely combinational. The lowest-index
// choice is this design's; the description only asks for "an available
// decoder".
module distribution_unit #(
  parameter int unsigned D = fifo_sched_pkg::DEC_D,
  parameter int unsigned WIDTH = fifo_sched_pkg::CODE_N * fifo_sched_pkg::LLR_W
) (
  input  logic [D-1:0]     free,
  input  logic             dispatch,
  input  logic [WIDTH-1:0] fifo_data,
  output logic [D-1:0]     target,
  output logic             any_free,
  output logic [D-1:0]     dec_start,
  output logic [WIDTH-1:0] dec_llr
);
  always_comb begin
    target = '0;
    for (int i = D - 1; i >= 0; i--)
      if (free[i]) begin
        target    = '0;
        target[i] = 1'b1;
      end
  end

  assign any_free  = |free;
  assign dec_start = dispatch ? target : '0;
  assign dec_llr   = fifo_data;

endmodule
