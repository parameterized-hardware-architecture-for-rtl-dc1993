// frame_capture: detects a sync word from the correlation peak and streams
// out the frame that follows it.
//
// Each cycle the incoming peak value sum is compared with threshold. When
// sum > threshold and no capture is running, the sync word is taken to start
// at position m of delayed_window (the window that produced sum), so the
// frame's first bit is at position m+N. The module latches m and, for
// frame_words (k) consecutive cycles, outputs bits m+N+Q-1 .. m+N of
// delayed_window. Because the window moves down by Q bits per cycle, the same
// bit range holds the next Q frame bits on every following cycle. While a
// capture runs, further threshold crossings are ignored; the next detection
// is accepted in the cycle after the last word has been taken, so frames may
// follow each other back to back.
//
// Interface and timing: frame_data and valid_data are registered; the word
// taken in the detection cycle appears one cycle later, followed by k-1 more
// words on consecutive cycles, with valid_data high for exactly k cycles.
// frame_words = 0 behaves as 1. The capture rule (threshold crossing, bits
// m+N+Q-1..m+N, k cycles, Valid Data) follows the paper; the strict '>'
// comparison, the registered outputs, the lock-out during a capture and the
// synchronous active-low reset are this design's choices.
module frame_capture #(
  parameter int unsigned N  = 1020,
  parameter int unsigned Q  = 68,
  parameter int unsigned KW = 16,   // width of the frame length input
  localparam int unsigned SW = $clog2(N + 1),
  localparam int unsigned IW = (Q > 1) ? $clog2(Q) : 1,
  localparam int unsigned WW = N + 2 * Q
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [SW-1:0] sum,
  input  logic [IW-1:0] m,
  input  logic [WW-1:0] delayed_window,
  input  logic [SW-1:0] threshold,
  input  logic [KW-1:0] frame_words,
  output logic [Q-1:0]  frame_data,
  output logic          valid_data
);

  logic [KW-1:0] remaining;   // words still to capture after this cycle
  logic [IW-1:0] m_lat;       // sync word location of the running capture
  logic          busy;
  logic          detect;
  logic [IW-1:0] m_sel;

  assign busy   = (remaining != '0);
  assign detect = !busy && (sum > threshold);
  assign m_sel  = busy ? m_lat : m;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      remaining  <= '0;
      m_lat      <= '0;
      valid_data <= 1'b0;
      frame_data <= '0;
    end else begin
      valid_data <= detect || busy;
      if (detect || busy) frame_data <= delayed_window[N + 32'(m_sel) +: Q];
      if (detect) begin
        m_lat     <= m;
        remaining <= (frame_words > KW'(1)) ? frame_words - KW'(1) : '0;
      end else if (busy) begin
        remaining <= remaining - KW'(1);
      end
    end
  end

  // The frame data window m+N+Q-1 .. m+N must lie inside the delayed window.
  initial assert (N + 2 * Q - 2 < WW);

endmodule
