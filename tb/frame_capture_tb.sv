// frame_capture_tb: checks detection, capture window and Valid Data timing.
//
// At the default size (N = 1020, Q = 68) the bench plays a random bit stream
// through delayed_window, moving it down by Q bits per cycle as the real
// delay register does, and drives sum, m and threshold by hand. It checks:
// a detection captures bits m+N+Q-1..m+N for exactly k cycles, one cycle
// after the detection cycle; a second peak during a capture is ignored; a
// frame may start on the cycle after the previous one ends; sum equal to the
// threshold does not detect; k = 1 and the largest location m = Q-1 work.
module frame_capture_tb;
  localparam int unsigned N  = 1020;
  localparam int unsigned Q  = 68;
  localparam int unsigned KW = 16;
  localparam int unsigned SW = $clog2(N + 1);
  localparam int unsigned IW = $clog2(Q);
  localparam int unsigned WW = N + 2 * Q;
  localparam int CYCLES = 40;
  localparam int unsigned THR = 663;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [SW-1:0] sum, threshold;
  logic [IW-1:0] m;
  logic [WW-1:0] delayed_window;
  logic [KW-1:0] frame_words;
  logic [Q-1:0]  frame_data;
  logic          valid_data;

  frame_capture #(.N(N), .Q(Q), .KW(KW)) dut (
    .clk(clk), .rst_n(rst_n), .sum(sum), .m(m), .delayed_window(delayed_window),
    .threshold(threshold), .frame_words(frame_words),
    .frame_data(frame_data), .valid_data(valid_data));

  int checks = 0, failures = 0;
  bit stream [];
  logic          exp_valid [CYCLES];
  logic [Q-1:0]  exp_data  [CYCLES];

  // Detection events: cycle, location, frame length.
  int ev_t [4] = '{5, 10, 15, 25};
  int ev_m [4] = '{17, 3, 67, 0};
  int ev_k [4] = '{5, 1, 7, 1};

  initial begin
    repeat (CYCLES * 4) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    stream = new[(CYCLES + 2) * Q + WW];
    foreach (stream[i]) stream[i] = 1'($urandom);
    foreach (exp_valid[i]) begin exp_valid[i] = 1'b0; exp_data[i] = '0; end
    for (int e = 0; e < 4; e++)
      for (int i = 0; i < ev_k[e]; i++) begin
        exp_valid[ev_t[e] + i] = 1'b1;
        for (int b = 0; b < Q; b++) exp_data[ev_t[e] + i][b] = stream[(ev_t[e] + i) * Q + ev_m[e] + N + b];
      end

    threshold = SW'(THR);
    sum = '0; m = '0; frame_words = KW'(300); delayed_window = '0;
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (valid_data) begin failures++; $display("valid_data set during reset"); end
    rst_n = 1'b1;

    for (int c = 0; c < CYCLES; c++) begin
      for (int b = 0; b < WW; b++) delayed_window[b] = stream[c * Q + b];
      sum = SW'($urandom % THR);        // below threshold by default
      m = IW'($urandom % Q);
      for (int e = 0; e < 4; e++)
        if (c == ev_t[e]) begin
          sum = SW'(THR + 1 + e * 50);
          m = IW'(ev_m[e]);
          frame_words = KW'(ev_k[e]);
        end
      if (c == 7)  begin sum = SW'(N); m = IW'(40); frame_words = KW'(9); end  // inside a capture
      if (c == 12) sum = SW'(THR);                                            // equal: no detection
      @(negedge clk);
      checks += 2;
      if (valid_data !== exp_valid[c]) begin
        failures++;
        $display("cycle %0d: valid_data %0b expected %0b", c, valid_data, exp_valid[c]);
      end
      if (exp_valid[c] && frame_data !== exp_data[c]) begin
        failures++;
        $display("cycle %0d: frame_data %h expected %h", c, frame_data, exp_data[c]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
