// reorder_buffer: output re-order buffer (ROB) of R decoded codewords.
//
// Each slot holds one W-bit codeword and a "ready" flag. A decoder result is
// written into the slot that was booked for it (wr_en/wr_slot/wr_data), in
// whatever order the decoders finish. The head pointer walks the slots in
// order; an output request (rd_req) expels the head codeword into the output
// register and advances the head. If the head codeword is being written in
// the same cycle it is forwarded straight to the output, so an early-
// terminated decoder can deliver the codeword in the very cycle it is
// requested.
//
// head_stored tells whether the head slot already holds its codeword (before
// any write of this cycle); head_ready adds the same-cycle forward.
// out_valid/out_data are registered: a request in cycle t shows the codeword
// in cycle t+1. out_miss marks an expelled slot that had no codeword, which
// the scheduling never lets happen as long as P*I >= 2.
// Release in arrival order follows the architecture; the forward path and
// the registered output are this design's choice.
module reorder_buffer #(
  parameter int unsigned R = fifo_sched_pkg::ROB_R,
  parameter int unsigned W = fifo_sched_pkg::CODE_N,
  localparam int unsigned TW = fifo_sched_pkg::idx_w(R)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [TW-1:0] wr_slot,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_req,
  output logic [TW-1:0] head,
  output logic          head_stored,
  output logic          head_ready,
  output logic          out_valid,
  output logic [W-1:0]  out_data,
  output logic          out_miss
);
  logic [W-1:0] mem [R];
  logic [R-1:0] ready;
  logic         fwd;

  assign head_stored = ready[head];
  assign fwd         = wr_en && (wr_slot == head);
  assign head_ready  = head_stored || fwd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head      <= '0;
      ready     <= '0;
      out_valid <= 1'b0;
      out_miss  <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= rd_req;
      out_miss  <= rd_req && !head_ready;
      if (rd_req) begin
        out_data <= head_stored ? mem[head] : wr_data;
        head     <= (head == TW'(R - 1)) ? '0 : head + 1'b1;
      end
      for (int unsigned s = 0; s < R; s++) begin
        if (rd_req && head == TW'(s))
          ready[s] <= 1'b0;
        else if (wr_en && wr_slot == TW'(s))
          ready[s] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_slot] <= wr_data;
  end

  a_no_miss: assert property (@(posedge clk) disable iff (!rst_n) rd_req |-> head_ready);
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !ready[wr_slot]);

endmodule
