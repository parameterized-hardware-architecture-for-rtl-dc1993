// frame_sync_top: sync-word frame synchronizer.
//
// A demodulated bit stream arrives Q bits per cycle (bit 0 first). Frames are
// preceded by an N-bit random sync word that the receiver knows (sync_word).
// The isolation window keeps the last N+2Q received bits; the parallel
// correlation finds, every cycle, the one of Q candidate positions where the
// window agrees best with the sync word, and reports that agreement count
// (sum) and position (m); the frame capture starts a frame when sum exceeds
// threshold and streams its frame_words words out on frame_data, with
// valid_data high.
//
// Timing: a word entering on din is in the window one cycle later; sum and m
// for that window appear ceil(log2 N)+ceil(log2 Q) cycles after that; the
// first frame word leaves frame_data one cycle after detection. Throughput is
// Q bits per cycle in and out. rst_n is synchronous and active low and must
// be held for at least ceil(log2 N)+ceil(log2 Q) cycles so that the
// unreset pipeline registers are flushed with the idle (all-zero) window.
// The three-module chain and its parameters follow the paper (defaults:
// N = 1020, Q = 68); bringing sum and m out as ports is this design's choice.
module frame_sync_top #(
  parameter int unsigned N  = 1020,
  parameter int unsigned Q  = 68,
  parameter int unsigned KW = 16,
  localparam int unsigned SW = $clog2(N + 1),
  localparam int unsigned IW = (Q > 1) ? $clog2(Q) : 1,
  localparam int unsigned WW = N + 2 * Q
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [Q-1:0]  din,
  input  logic [N-1:0]  sync_word,
  input  logic [SW-1:0] threshold,
  input  logic [KW-1:0] frame_words,
  output logic [SW-1:0] sum,
  output logic [IW-1:0] m,
  output logic [Q-1:0]  frame_data,
  output logic          valid_data
);

  logic [WW-1:0] window;
  logic [WW-1:0] delayed_window;

  isolation_window #(.N(N), .Q(Q)) u_window (
    .clk    (clk),
    .rst_n  (rst_n),
    .din    (din),
    .window (window)
  );

  parallel_correlation #(.N(N), .Q(Q)) u_corr (
    .clk            (clk),
    .rst_n          (rst_n),
    .window         (window),
    .sync_word      (sync_word),
    .sum            (sum),
    .m              (m),
    .delayed_window (delayed_window)
  );

  frame_capture #(.N(N), .Q(Q), .KW(KW)) u_capture (
    .clk            (clk),
    .rst_n          (rst_n),
    .sum            (sum),
    .m              (m),
    .delayed_window (delayed_window),
    .threshold      (threshold),
    .frame_words    (frame_words),
    .frame_data     (frame_data),
    .valid_data     (valid_data)
  );

endmodule
