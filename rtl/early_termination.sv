// early_termination: the early-termination (E.T.) condition and the choice of
// the decoder to terminate.
//
// An E.T. fires in a cycle with a new input codeword when either
//   (a) an output is requested and the ROB holds no decoded head codeword
//       (neither stored nor finished by its decoder in this cycle), or
//   (b) the input FIFO is full and every decoder is occupied (busy and not
//       handing over a finished result in this cycle).
// This is the OR/AND network of the condition diagram: (a) OR (b), AND
// "new input data and output request". Output requests only accompany new
// inputs (see output_pacer), so "new input" is the gating term; before the
// first output request, during the start-up phase, (b) still guards against
// FIFO overflow. When the E.T. fires, the longest-running decoding process
// (oldest ROB slot among the busy decoders) is terminated: terminate is one-hot.
// That decoder's current estimate is collected and, for (a), is the head
// codeword itself; the freed decoder lets the FIFO release its head, so in
// both cases input and output are possible in the same cycle.
// Purely combinational; depends only on registered state and in_valid/out_req.
module early_termination
  import fifo_sched_pkg::*;
#(
  parameter int unsigned D = fifo_sched_pkg::DEC_D,
  parameter int unsigned R = fifo_sched_pkg::ROB_R,
  localparam int unsigned TW = fifo_sched_pkg::idx_w(R)
) (
  input  logic                 in_valid,
  input  logic                 out_req,
  input  logic                 fifo_full,
  input  logic                 rob_head_stored,
  input  logic [TW-1:0]        rob_head,
  input  logic [D-1:0]         busy,
  input  logic [D-1:0]         done,
  input  logic [D-1:0][TW-1:0] tags,
  output logic                 et,
  output et_cause_e            cause,
  output logic [D-1:0]         terminate
);
  logic [D-1:0] head_done;
  logic         rob_not_ready, all_occupied, cond_rob, cond_fifo;
  logic [D-1:0] oldest;

  always_comb begin
    for (int unsigned i = 0; i < D; i++)
      head_done[i] = busy[i] && done[i] && (tags[i] == rob_head);
  end

  assign rob_not_ready = !(rob_head_stored || |head_done);
  assign all_occupied  = &busy && !(|(busy & done));
  assign cond_rob      = out_req && rob_not_ready;
  assign cond_fifo     = fifo_full && all_occupied;
  assign et            = in_valid && (cond_rob || cond_fifo);
  assign cause         = !et ? ET_NONE :
                         (cond_rob && cond_fifo) ? ET_BOTH :
                         cond_rob ? ET_ROB : ET_FIFO;

  oldest_select #(.D(D), .R(R)) u_oldest (
    .mask (busy),
    .tags (tags),
    .head (rob_head),
    .sel  (oldest)
  );

  assign terminate = et ? oldest : '0;

endmodule
