// llr_fifo: input FIFO of the scheduling architecture. It stores the LLR
// blocks of up to DEPTH (= F) received codewords, one whole block per entry,
// and hands them out oldest first.
//
// Storage is a circular array with a write pointer, a read pointer and an
// occupancy counter. The head entry is visible combinationally on pop_data
// whenever empty is low; pop removes it at the clock edge. A push into a
// full FIFO is accepted only when the head is popped in the same cycle (the
// early-termination logic frees a decoder so that this can happen); a push
// into a full FIFO without a pop is dropped and flagged on overflow.
//
// Interface: push/push_data (write side), pop/pop_data/empty (read side),
// full and count (status). Timing: an entry pushed in cycle t can be popped
// from cycle t+1 on. rst_n is an asynchronous, active-low reset of the
// pointers and the counter; the data array is not reset.
// The FIFO itself and its size F follow the architecture; the pointer
// organisation and the same-cycle push-on-pop rule are this design's choice.
module llr_fifo #(
  parameter int unsigned DEPTH = fifo_sched_pkg::FIFO_F,
  parameter int unsigned WIDTH = fifo_sched_pkg::CODE_N * fifo_sched_pkg::LLR_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         push_data,
  input  logic                     pop,
  output logic [WIDTH-1:0]         pop_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                     overflow
);
  localparam int unsigned PW = fifo_sched_pkg::idx_w(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign empty    = (count == 0);
  assign full     = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_pop   = pop && !empty;
  assign do_push  = push && (!full || do_pop);
  assign overflow = push && !do_push;
  assign pop_data = mem[rd_ptr];

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  // A pop is only requested when there is something to pop.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
