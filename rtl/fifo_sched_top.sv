// fifo_sched_top: fixed-throughput FIFO scheduling architecture for
// decoders with random runtime, such as ORBGRAND.
//
// Blocks of n LLR values arrive at a fixed interval of I cycles (in_valid).
// They queue in an input FIFO of F entries (llr_fifo), are handed by the
// distribution unit to one of D decoders, and each decoded codeword is moved
// by the collection unit into a re-order buffer (ROB) of R slots. The slot is
// booked when the block leaves the FIFO (rob_booking), so results leave the
// ROB in arrival order even when decoders finish out of order. After P
// arrivals (cfg_p, the data parallelism), each arrival is paired with the
// release of the oldest codeword (output_pacer), giving a constant latency of
// P*I cycles and one output every I cycles. When a codeword is due but not
// decoded, or an input arrives while the FIFO is full and all decoders are
// busy, the longest-running decoding process is terminated early
// (early_termination) and its current estimate is used.
//
// The decoders themselves are outside this module: per decoder i,
//   dec_start[i]  (out) one-cycle start; capture dec_llr
//   dec_llr       (out) LLR block, shared by all decoders
//   dec_done[i]   (in)  decoding finished, result on dec_cw[i], held until
//                       dec_ack[i]; must be a registered signal
//   dec_cw[i]     (in)  the decoder's current codeword estimate; valid from
//                       the cycle after dec_start, and used as the result on
//                       both dec_ack after dec_done and on dec_abort
//   dec_abort[i]  (out) early termination: stop now; dec_ack[i] is high too
//   dec_ack[i]    (out) result taken; the decoder is idle from the next cycle
//                       unless dec_start[i] is high in the same cycle
// Timing: in_valid in cycle t; for t >= the (P+1)-th arrival the ROB expels
// the codeword of the arrival P inputs back, which appears on out_valid/out_cw
// in cycle t+1. Requires P*I >= 2. et/et_cause report each early termination;
// out_active is high once P codewords have arrived (outputs have started);
// in_overflow and out_miss are error flags that this scheduling never raises.
//
// The block structure, the FIFO/ROB sizes F and R, the in-order ROB booking,
// the termination condition and the P*I timing follow the published
// architecture. The decoder handshake, the same-cycle recovery paths, the
// LLR width and the reset are this design's own choices.
module fifo_sched_top
  import fifo_sched_pkg::*;
#(
  parameter int unsigned N  = fifo_sched_pkg::CODE_N,
  parameter int unsigned QW = fifo_sched_pkg::LLR_W,
  parameter int unsigned F  = fifo_sched_pkg::FIFO_F,
  parameter int unsigned R  = fifo_sched_pkg::ROB_R,
  parameter int unsigned D  = fifo_sched_pkg::DEC_D,
  localparam int unsigned LW = N * QW,
  localparam int unsigned TW = fifo_sched_pkg::idx_w(R),
  localparam int unsigned PW = $clog2(F + R + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [PW-1:0]       cfg_p,
  // data source side
  input  logic                in_valid,
  input  logic [LW-1:0]       in_llr,
  // data sink side
  output logic                out_valid,
  output logic [N-1:0]        out_cw,
  // decoder array
  output logic [D-1:0]        dec_start,
  output logic [LW-1:0]       dec_llr,
  output logic [D-1:0]        dec_abort,
  output logic [D-1:0]        dec_ack,
  input  logic [D-1:0]        dec_done,
  input  logic [D-1:0][N-1:0] dec_cw,
  // status
  output logic                et,
  output et_cause_e           et_cause,
  output logic                in_overflow,
  output logic                out_miss,
  output logic                out_active,
  output logic [$clog2(F+1)-1:0] fifo_count
);
  // FIFO
  logic          fifo_pop, fifo_empty, fifo_full;
  logic [LW-1:0] fifo_data;
  // booking and ROB
  logic          can_book;
  logic [TW-1:0] book_slot, rob_head;
  logic [R-1:0]  booked;
  logic          rob_head_stored, rob_head_ready;
  logic          rob_wr_en;
  logic [TW-1:0] rob_wr_slot;
  logic [N-1:0]  rob_wr_data;
  // control
  logic          out_req, dispatch, any_free;
  logic [D-1:0]  free, busy, target, collect;
  logic [D-1:0][TW-1:0] tags;

  output_pacer #(.MAX_P(F + R)) u_pacer (
    .clk, .rst_n, .cfg_p, .in_valid, .out_req, .primed (out_active)
  );

  llr_fifo #(.DEPTH(F), .WIDTH(LW)) u_fifo (
    .clk, .rst_n,
    .push      (in_valid),
    .push_data (in_llr),
    .pop       (fifo_pop),
    .pop_data  (fifo_data),
    .empty     (fifo_empty),
    .full      (fifo_full),
    .count     (fifo_count),
    .overflow  (in_overflow)
  );

  early_termination #(.D(D), .R(R)) u_et (
    .in_valid,
    .out_req,
    .fifo_full,
    .rob_head_stored,
    .rob_head,
    .busy,
    .done  (dec_done),
    .tags,
    .et,
    .cause (et_cause),
    .terminate (dec_abort)
  );

  collection_unit #(.D(D), .R(R), .W(N)) u_collect (
    .terminate (dec_abort),
    .busy,
    .done        (dec_done),
    .dec_cw,
    .tags,
    .rob_head,
    .collect,
    .rob_wr_en,
    .rob_wr_slot,
    .rob_wr_data
  );
  assign dec_ack = collect;

  distribution_control #(.D(D), .R(R)) u_dctl (
    .clk, .rst_n,
    .fifo_empty,
    .can_book,
    .book_slot,
    .any_free,
    .target,
    .collect,
    .dispatch,
    .free,
    .busy,
    .tags
  );
  assign fifo_pop = dispatch;

  distribution_unit #(.D(D), .WIDTH(LW)) u_dist (
    .free,
    .dispatch,
    .fifo_data,
    .target,
    .any_free,
    .dec_start,
    .dec_llr
  );

  rob_booking #(.R(R)) u_book (
    .clk, .rst_n,
    .book         (dispatch),
    .release_en   (out_req),
    .release_slot (rob_head),
    .slot         (book_slot),
    .can_book,
    .booked
  );

  reorder_buffer #(.R(R), .W(N)) u_rob (
    .clk, .rst_n,
    .wr_en       (rob_wr_en),
    .wr_slot     (rob_wr_slot),
    .wr_data     (rob_wr_data),
    .rd_req      (out_req),
    .head        (rob_head),
    .head_stored (rob_head_stored),
    .head_ready  (rob_head_ready),
    .out_valid,
    .out_data    (out_cw),
    .out_miss
  );

  // The ROB must hold at least one codeword per decoder, or decoders idle.
  if (R < D) begin : g_bad_rd
    $error("fifo_sched_top: R (%0d) must be at least D (%0d)", R, D);
  end

  a_cfg_p: assert property (@(posedge clk) disable iff (!rst_n) cfg_p >= 1 && cfg_p <= PW'(F + R));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !in_overflow);
  a_head_ready:  assert property (@(posedge clk) disable iff (!rst_n) out_req |-> rob_head_ready);

endmodule
