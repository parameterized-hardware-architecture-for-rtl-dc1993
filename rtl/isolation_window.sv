// isolation_window: the window register in front of the correlator.
//
// The register has N/Q+2 slots of Q bits, N+2Q bits in all. Each cycle the Q
// new bits of the stream are written into the top slot (slot N/Q+1) and every
// slot's contents move one slot down towards slot 0, so bits that are Q
// positions apart form serial chains. Slot s occupies window[(s+1)Q-1 : sQ];
// since bit 0 of an input word is the earliest received bit, window[0] is
// always the oldest bit held and the stream reads in time order from bit 0
// upwards.
//
// Interface: din (Q bits) is sampled on every rising clk edge; window is the
// registered contents. A synchronous active-low reset fills the register with
// 0s, the idle-channel value. Slot count, shift direction and width follow
// the paper; the bit numbering inside a slot and the reset are this design's
// choices.
module isolation_window #(
  parameter int unsigned N = 1020,  // sync word length n, a multiple of Q
  parameter int unsigned Q = 68     // parallel input width q
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [Q-1:0]     din,
  output logic [N+2*Q-1:0] window
);

  localparam int unsigned SLOTS = N / Q + 2;

  initial begin
    assert (N % Q == 0 && N >= Q)
      else $error("isolation_window: N (%0d) must be a multiple of Q (%0d) and N >= Q", N, Q);
  end

  // Shift right by one slot; the new word enters the top slot.
  always_ff @(posedge clk) begin
    if (!rst_n) window <= '0;
    else        window <= {din, window[SLOTS*Q-1:Q]};
  end

endmodule
