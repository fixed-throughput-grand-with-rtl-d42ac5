// rob_booking: the ROB booking mechanism. Every LLR block that leaves the
// input FIFO is given the next ROB slot in circular order, so the order of
// the ROB slots reproduces the arrival order of the codewords even when
// several decoders finish out of order.
//
// It keeps the booking row of the ROB (one "booked" flag per slot) and the
// tail pointer, the next slot to hand out. The tail slot can be booked when
// its flag is clear, or when that slot is being released (its codeword
// expelled) in the same cycle. book takes the slot on slot; release clears
// the flag of release_slot (always the ROB head).
//
// Timing: can_book and slot are combinational; flags and tail update at the
// clock edge. Sequential, in-order booking follows the architecture; the
// flag-per-slot organisation is this design's choice.
module rob_booking #(
  parameter int unsigned R = fifo_sched_pkg::ROB_R,
  localparam int unsigned TW = fifo_sched_pkg::idx_w(R)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          book,
  input  logic          release_en,
  input  logic [TW-1:0] release_slot,
  output logic [TW-1:0] slot,
  output logic          can_book,
  output logic [R-1:0]  booked
);
  logic [TW-1:0] tail;

  assign slot     = tail;
  assign can_book = !booked[tail] || (release_en && release_slot == tail);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tail   <= '0;
      booked <= '0;
    end else begin
      for (int unsigned s = 0; s < R; s++) begin
        if (book && can_book && tail == TW'(s))
          booked[s] <= 1'b1;
        else if (release_en && release_slot == TW'(s))
          booked[s] <= 1'b0;
      end
      if (book && can_book) tail <= (tail == TW'(R - 1)) ? '0 : tail + 1'b1;
    end
  end

  a_book_ok: assert property (@(posedge clk) disable iff (!rst_n) book |-> can_book);

endmodule
