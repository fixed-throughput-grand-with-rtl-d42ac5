// fifo_sched_pkg: shared constants and types of the fixed-throughput FIFO
// scheduling architecture for GRAND-type decoders.
//
// The defaults describe the configuration the architecture is mainly shown
// with: a (256,234) linear block code, an input FIFO and a re-order buffer
// (ROB) of four codewords each and one decoder, the "(4,1)" configuration.
// The LLR word width is this design's own choice; the LLR quantisation is
// left open by the description the architecture follows.
package fifo_sched_pkg;

  // Code length n and number of information bits k of the (256,234) code.
  localparam int unsigned CODE_N = 256;
  localparam int unsigned CODE_K = 234;

  // Bits per LLR value, two's complement; a negative LLR means hard
  // decision 1. Own choice.
  localparam int unsigned LLR_W = 6;

  // Input FIFO size F, ROB size R and number of decoders D.
  localparam int unsigned FIFO_F = 4;
  localparam int unsigned ROB_R  = 4;
  localparam int unsigned DEC_D  = 1;

  // Why an early termination (E.T.) fired in a cycle.
  typedef enum logic [1:0] {
    ET_NONE = 2'b00,  // no termination
    ET_ROB  = 2'b01,  // output requested but the head codeword is not decoded
    ET_FIFO = 2'b10,  // input arrives while FIFO full and all decoders busy
    ET_BOTH = 2'b11   // both conditions in the same cycle
  } et_cause_e;

  // Width of an index into n items, at least 1.
  function automatic int unsigned idx_w(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage
