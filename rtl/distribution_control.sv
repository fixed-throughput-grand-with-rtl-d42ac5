// distribution_control: decides when the input FIFO releases a codeword and
// keeps the table of which decoder works on which ROB slot.
//
// A codeword is dispatched when the FIFO is not empty, the next ROB slot can
// be booked and some decoder is available (dispatch = FIFO pop = ROB book).
// Per decoder it holds a busy flag and the ROB slot (tag) of its codeword:
// set when the decoder is started, cleared when the collection unit takes
// its result (collect). A decoder collected in a cycle counts as free in
// that same cycle and can be restarted at once. The tag table feeds the
// collection unit (where to write) and the early termination (which process
// is oldest). Dispatch is combinational; the table updates at the clock
// edge. The rule that the FIFO releases data only when the ROB has a slot
// follows the architecture; the table itself is this design's choice.
module distribution_control #(
  parameter int unsigned D = fifo_sched_pkg::DEC_D,
  parameter int unsigned R = fifo_sched_pkg::ROB_R,
  localparam int unsigned TW = fifo_sched_pkg::idx_w(R)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 fifo_empty,
  input  logic                 can_book,
  input  logic [TW-1:0]        book_slot,
  input  logic                 any_free,
  input  logic [D-1:0]         target,
  input  logic [D-1:0]         collect,
  output logic                 dispatch,
  output logic [D-1:0]         free,
  output logic [D-1:0]         busy,
  output logic [D-1:0][TW-1:0] tags
);
  assign free     = ~busy | collect;
  assign dispatch = !fifo_empty && can_book && any_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
      tags <= '0;
    end else begin
      for (int unsigned i = 0; i < D; i++) begin
        if (dispatch && target[i]) begin
          busy[i] <= 1'b1;
          tags[i] <= book_slot;
        end else if (collect[i]) begin
          busy[i] <= 1'b0;
        end
      end
    end
  end

  a_collect_busy: assert property (@(posedge clk) disable iff (!rst_n) (collect & ~busy) == '0);

endmodule
