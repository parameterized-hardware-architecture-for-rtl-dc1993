// parallel_correlation: correlates the window with the sync word at Q
// candidate locations at once and reports the best one.
//
// Candidate p (p = 0..Q-1) is the N-bit stretch window[p+N-1 : p]. XNOR gates
// compare it bit by bit with the sync word (sync_word[j] against window[p+j],
// so sync_word[0] is the first bit sent), giving 1 for each agreeing bit; an
// adder tree per candidate counts the agreements. The Q counts go through a
// comparator tree, which returns the largest count (Sum) and the candidate it
// came from (m): m is the window position of the first sync word bit. A delay
// register carries the window alongside the pipeline, so delayed_window is
// the window that produced the current sum and m.
//
// Interface and timing: window and sync_word are sampled combinationally into
// the first adder level; sum, m and delayed_window appear
// LAT = ceil(log2 N) + ceil(log2 Q) cycles later, one result per cycle.
// sum and m are cleared by the synchronous active-low reset (through the
// comparator tree). The structure (N x Q XNORs, Q adder trees, one comparator
// tree, a delay of LAT slots) follows the paper; the bit order of the sync
// word and the reset are this design's choices.
module parallel_correlation #(
  parameter int unsigned N = 1020,
  parameter int unsigned Q = 68,
  localparam int unsigned SW = $clog2(N + 1),
  localparam int unsigned IW = (Q > 1) ? $clog2(Q) : 1,
  localparam int unsigned WW = N + 2 * Q
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [WW-1:0] window,
  input  logic [N-1:0]  sync_word,
  output logic [SW-1:0] sum,
  output logic [IW-1:0] m,
  output logic [WW-1:0] delayed_window
);

  import frame_sync_pkg::*;

  localparam int unsigned LAT = corr_latency(N, Q);

  logic [SW-1:0] corr [Q];

  // One XNOR row and one adder tree per candidate location.
  for (genvar p = 0; p < Q; p++) begin : g_perm
    logic [N-1:0] match;
    assign match = window[p +: N] ~^ sync_word;

    adder_tree #(.N(N)) u_adder (
      .clk  (clk),
      .bits (match),
      .sum  (corr[p])
    );
  end

  comparator_tree #(.Q(Q), .W(SW)) u_cmp (
    .clk       (clk),
    .rst_n     (rst_n),
    .values    (corr),
    .max_value (sum),
    .max_index (m)
  );

  delay_register #(.WIDTH(WW), .DEPTH(LAT)) u_delay (
    .clk  (clk),
    .din  (window),
    .dout (delayed_window)
  );

endmodule
