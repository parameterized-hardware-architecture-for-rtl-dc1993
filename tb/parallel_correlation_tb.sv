// parallel_correlation_tb: checks correlation, peak search and alignment.
//
// Two reduced sizes are tested (N = 24, Q = 6 and N = 60, Q = 12). Every
// cycle a new window is applied: mostly random bits with a copy of the sync
// word planted at a random candidate position, sometimes with a few bits
// flipped, and sometimes an idle (all-zero) window. For each window this
// bench computes all Q agreement counts directly, their maximum and the
// lowest position holding it, and checks sum, m and delayed_window exactly
// ceil(log2 N)+ceil(log2 Q) cycles later.
module parallel_correlation_tb;
  import frame_sync_pkg::*;

  localparam int CYCLES = 400;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  int checks = 0, failures = 0;
  int planted_hits = 0;

  initial begin
    repeat (CYCLES * 4) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One test harness per size; each reports through the shared counters.
  for (genvar g = 0; g < 2; g++) begin : g_size
    localparam int unsigned N  = (g == 0) ? 24 : 60;
    localparam int unsigned Q  = (g == 0) ? 6 : 12;
    localparam int unsigned SW = $clog2(N + 1);
    localparam int unsigned IW = $clog2(Q);
    localparam int unsigned WW = N + 2 * Q;
    localparam int unsigned LAT = corr_latency(N, Q);

    logic [WW-1:0] window, delayed_window;
    logic [N-1:0]  sync_word;
    logic [SW-1:0] sum;
    logic [IW-1:0] m;

    parallel_correlation #(.N(N), .Q(Q)) dut (
      .clk(clk), .rst_n(rst_n), .window(window), .sync_word(sync_word),
      .sum(sum), .m(m), .delayed_window(delayed_window));

    int exp_sum [CYCLES];
    int exp_m   [CYCLES];
    int planted [CYCLES];
    logic [WW-1:0] exp_win [CYCLES];

    initial begin
      for (int i = 0; i < N; i++) sync_word[i] = 1'($urandom);
      window = '0;
      repeat (LAT + 2) @(negedge clk);
      checks++;
      if (sum != '0) begin failures++; $display("N=%0d: sum not cleared by reset", N); end
      wait (rst_n);
      for (int c = 0; c < CYCLES; c++) begin
        @(negedge clk);
        if (c >= LAT) begin
          checks += 3;
          if (int'(sum) != exp_sum[c-LAT]) begin
            failures++;
            $display("N=%0d c%0d: sum %0d expected %0d", N, c, sum, exp_sum[c-LAT]);
          end
          if (int'(m) != exp_m[c-LAT]) begin
            failures++;
            $display("N=%0d c%0d: m %0d expected %0d", N, c, m, exp_m[c-LAT]);
          end
          if (delayed_window != exp_win[c-LAT]) begin
            failures++;
            $display("N=%0d c%0d: delayed window mismatch", N, c);
          end
          if (planted[c-LAT] >= 0 && int'(m) == planted[c-LAT]) planted_hits++;
        end
        for (int i = 0; i < WW; i++) window[i] = 1'($urandom);
        planted[c] = -1;
        if (c % 5 == 4) begin
          window = '0;
        end else if (c % 2 == 0) begin
          planted[c] = $urandom % Q;
          window[planted[c] +: N] = sync_word;
          if (c % 4 == 2) for (int f = 0; f < 3; f++) window[planted[c] + ($urandom % N)] ^= 1'b1;
        end
        exp_win[c] = window;
        exp_sum[c] = -1;
        exp_m[c] = 0;
        for (int p = 0; p < Q; p++) begin
          int cnt;
          cnt = $countones(window[p +: N] ~^ sync_word);
          if (cnt > exp_sum[c]) begin exp_sum[c] = cnt; exp_m[c] = p; end
        end
      end
      $display("N=%0d: planted sync word found at its position %0d times", N, planted_hits);
    end
  end

  // Reset is held long enough to flush both pipelines.
  initial begin
    rst_n = 1'b0;
    repeat (20) @(negedge clk);
    rst_n = 1'b1;
    repeat (CYCLES + 2) @(negedge clk);
    if (planted_hits == 0) begin failures++; $display("planted sync word never located"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
