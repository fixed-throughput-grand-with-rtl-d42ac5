// collection_unit: moves one decoder result per cycle into its ROB slot.
//
// A terminated decoder (terminate) is always taken. Otherwise, among the busy
// decoders that have finished (done), the one holding the oldest codeword is
// taken, so a finished head codeword is never held back. The chosen decoder
// is acknowledged with collect (it is then idle), and its codeword is written
// to the ROB slot recorded for it. A finished decoder that is not taken keeps
// its result and is taken in a later cycle. Purely combinational. One ROB
// write per cycle follows the single connection from the collection unit to
// the ROB; the priority order is this design's choice.
module collection_unit #(
  parameter int unsigned D = fifo_sched_pkg::DEC_D,
  parameter int unsigned R = fifo_sched_pkg::ROB_R,
  parameter int unsigned W = fifo_sched_pkg::CODE_N,
  localparam int unsigned TW = fifo_sched_pkg::idx_w(R)
) (
  input  logic [D-1:0]         terminate,
  input  logic [D-1:0]         busy,
  input  logic [D-1:0]         done,
  input  logic [D-1:0][W-1:0]  dec_cw,
  input  logic [D-1:0][TW-1:0] tags,
  input  logic [TW-1:0]        rob_head,
  output logic [D-1:0]         collect,
  output logic                 rob_wr_en,
  output logic [TW-1:0]        rob_wr_slot,
  output logic [W-1:0]         rob_wr_data
);
  logic [D-1:0] oldest_done;

  oldest_select #(.D(D), .R(R)) u_oldest (
    .mask (busy & done),
    .tags (tags),
    .head (rob_head),
    .sel  (oldest_done)
  );

  assign collect   = (|terminate) ? terminate : oldest_done;
  assign rob_wr_en = |collect;

  always_comb begin
    rob_wr_slot = '0;
    rob_wr_data = '0;
    for (int unsigned i = 0; i < D; i++)
      if (collect[i]) begin
        rob_wr_slot = tags[i];
        rob_wr_data = dec_cw[i];
      end
  end

endmodule
