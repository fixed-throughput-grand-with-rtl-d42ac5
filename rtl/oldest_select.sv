// oldest_select: among the decoders flagged in mask, pick the one whose
// codeword is oldest, i.e. whose booked ROB slot is closest to the ROB head.
//
// Because LLR blocks leave the FIFO in order and book ROB slots in order,
// the age of a decoding process is given by the distance
// (tag - head) mod R of its ROB slot from the head: the smallest distance is
// the process that started first and has run longest. The result is one-hot
// (all zero when mask is empty). Purely combinational. Used by the early
// termination (to pick the longest-running process) and by the collection
// unit (to prefer the oldest finished decoder). Using the ROB slot as the
// age is this design's choice.
module oldest_select #(
  parameter int unsigned D = fifo_sched_pkg::DEC_D,
  parameter int unsigned R = fifo_sched_pkg::ROB_R,
  localparam int unsigned TW = fifo_sched_pkg::idx_w(R)
) (
  input  logic [D-1:0]         mask,
  input  logic [D-1:0][TW-1:0] tags,
  input  logic [TW-1:0]        head,
  output logic [D-1:0]         sel
);
  function automatic logic [TW:0] age(input logic [TW-1:0] t, input logic [TW-1:0] h);
    logic [TW:0] d;
    d = {1'b0, t} - {1'b0, h};
    if (t < h) d = d + (TW+1)'(R);
    return d;
  endfunction

  always_comb begin
    logic [TW:0] best;
    sel  = '0;
    best = '1;
    for (int unsigned i = 0; i < D; i++) begin
      if (mask[i] && age(tags[i], head) < best) begin
        best = age(tags[i], head);
        sel  = '0;
        sel[i] = 1'b1;
      end
    end
  end

endmodule
