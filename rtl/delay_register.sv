// delay_register: DEPTH-slot delay line for the window register contents.
//
// The correlator needs ceil(log2 n)+ceil(log2 q) cycles to turn a window into
// Sum and m. This chain of DEPTH slots of WIDTH bits delays the window by the
// same number of cycles, so that slot 0 holds exactly the window contents
// that produced the Sum and m of the same cycle. The window enters the top
// slot (DEPTH-1) and moves down one slot per cycle.
//
// Interface and timing: dout = din from DEPTH cycles earlier (DEPTH = 0 makes
// it a wire). No reset: the slots are flushed after DEPTH cycles. Slot count
// and width follow the paper; the absence of a reset is this design's choice.
module delay_register #(
  parameter int unsigned WIDTH = 1156,  // n + 2q
  parameter int unsigned DEPTH = 17     // ceil(log2 n) + ceil(log2 q)
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  if (DEPTH == 0) begin : g_wire
    assign dout = din;
  end else begin : g_chain
    logic [WIDTH-1:0] slot [DEPTH];

    always_ff @(posedge clk) begin
      slot[DEPTH-1] <= din;
      for (int unsigned s = 0; s + 1 < DEPTH; s++) slot[s] <= slot[s+1];
    end

    assign dout = slot[0];
  end

endmodule
