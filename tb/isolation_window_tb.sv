// isolation_window_tb: checks the slot-shifting window register.
//
// At the default size (N = 1020, Q = 68, 17 slots) random words are shifted
// in, one per cycle. After each edge the window must hold the last N/Q+2
// words, the newest in the top slot and the oldest in slot 0, which is
// computed here from a history of the inputs. The all-zero reset state is
// checked first.
module isolation_window_tb;
  localparam int unsigned N = 1020;
  localparam int unsigned Q = 68;
  localparam int unsigned SLOTS = N / Q + 2;
  localparam int CYCLES = 200;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [Q-1:0] din;
  logic [N+2*Q-1:0] window;

  isolation_window #(.N(N), .Q(Q)) dut (.clk(clk), .rst_n(rst_n), .din(din), .window(window));

  int checks = 0, failures = 0;
  logic [Q-1:0] hist [SLOTS];   // hist[0] newest

  initial begin
    repeat (CYCLES * 4) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0;
    din = '1;
    repeat (3) @(negedge clk);
    checks++;
    if (window != '0) begin failures++; $display("window not cleared by reset"); end
    foreach (hist[i]) hist[i] = '0;
    rst_n = 1'b1;
    for (int c = 0; c < CYCLES; c++) begin
      for (int i = 0; i < Q; i++) din[i] = 1'($urandom);
      @(negedge clk);
      for (int i = SLOTS - 1; i > 0; i--) hist[i] = hist[i-1];
      hist[0] = din;
      for (int s = 0; s < SLOTS; s++) begin
        checks++;
        if (window[s*Q +: Q] != hist[SLOTS-1-s]) begin
          failures++;
          $display("cycle %0d slot %0d: %h expected %h", c, s, window[s*Q +: Q], hist[SLOTS-1-s]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
