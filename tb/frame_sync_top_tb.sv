// frame_sync_top_tb: end-to-end test of the synchronizer at a reduced size (N = 96, Q = 8).
//
// The bench builds a received bit stream of frames: idle (all-zero) gaps of
// random length, so that sync words land at every bit offset within a
// Q-bit word; an N-bit sync word; k words of random payload. Frames are
// varied to exercise each mechanism of the synchronizer: clean and noisy
// sync words (bits flipped at random), back-to-back frames with no gap, a
// payload that itself contains a copy of the sync word (which must be
// ignored because a capture is running), and a sync word so damaged that it
// stays below the threshold and the frame is lost. Idle gaps and payloads are noise-free here, and the threshold is raised to 0.75 n, so that every lost frame is a deliberate one.
//
// A behavioural reference computes, for every window, all Q agreement
// counts, their maximum and location, and runs the capture rule, then
// predicts sum, m, valid_data and frame_data cycle by cycle using the
// pipeline latency ceil(log2 N)+ceil(log2 Q). The DUT must match it on
// every cycle. Independently, each frame's payload must come out exactly
// once, at the predicted time, unless its sync word was deliberately
// destroyed. Each mechanism is counted and a mechanism that never happened
// counts as a failure.
module frame_sync_top_tb;
  import frame_sync_pkg::*;

  localparam int unsigned N  = 96;
  localparam int unsigned Q  = 8;
  localparam int unsigned KW = 16;
  localparam int unsigned SW = $clog2(N + 1);
  localparam int unsigned IW = (Q > 1) ? $clog2(Q) : 1;
  localparam int unsigned WW = N + 2 * Q;
  localparam int unsigned SLOTS = N / Q + 2;
  localparam int unsigned LAT = corr_latency(N, Q);
  localparam int unsigned THR = (N * 75) / 100;     // 0.75 n: with a 96-bit sync word the 0.65 n of the paper gives false peaks in idle gaps
  localparam int NF = 24;                          // frames in the stream
  localparam int MAXCYC = 40000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [Q-1:0]  din;
  logic [N-1:0]  sync_word;
  logic [SW-1:0] threshold;
  logic [KW-1:0] frame_words;
  logic [SW-1:0] sum;
  logic [IW-1:0] m;
  logic [Q-1:0]  frame_data;
  logic          valid_data;

  frame_sync_top #(.N(N), .Q(Q)) dut (
    .clk(clk), .rst_n(rst_n), .din(din), .sync_word(sync_word),
    .threshold(threshold), .frame_words(frame_words),
    .sum(sum), .m(m), .frame_data(frame_data), .valid_data(valid_data));

  int checks = 0, failures = 0;

  // Stream and frame bookkeeping.
  bit stream [$];
  int f_start [NF];      // bit index of each frame's sync word
  int f_k     [NF];      // payload words
  int f_gap   [NF];      // idle bits before the sync word
  int f_flips [NF];      // sync bits flipped
  bit f_lost  [NF];      // sync word destroyed on purpose
  bit f_embed [NF];      // payload contains a sync word copy
  int ncyc;

  // Mechanism counters.
  int n_detect = 0, n_recovered = 0, n_back_to_back = 0, n_noisy = 0;
  int n_lost = 0, n_ignored_peak = 0, n_idle_cycles = 0;
  bit m_seen [Q];

  bit sa [];             // the finished stream, as an array
  int slen;

  function automatic bit sbit(input int idx);
    if (idx < 0 || idx >= slen) return 1'b0;
    return sa[idx];
  endfunction

  // Window register contents after edge e (edge 0 loads word 0).
  function automatic logic [WW-1:0] win(input int e);
    logic [WW-1:0] w;
    for (int b = 0; b < WW; b++) w[b] = sbit((e - int'(SLOTS) + 1) * int'(Q) + b);
    return w;
  endfunction

  initial begin
    repeat (MAXCYC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e_sum [];
    int e_m   [];
    bit       x_valid [];
    logic [Q-1:0] x_data [];
    int rem, mlat, k_now;

    for (int i = 0; i < N; i++) sync_word[i] = 1'($urandom);
    threshold = SW'(THR);

    // ---- build the stream ----
    for (int i = 0; i < 37; i++) stream.push_back(1'b0);
    for (int f = 0; f < NF; f++) begin
      f_gap[f]   = (f % 4 == 1) ? 0 : int'($urandom % (3 * Q));
      f_k[f]     = 1 + int'($urandom % 30);
      f_lost[f]  = (f == NF - 2);
      f_embed[f] = (f % 4 == 1) && (f_k[f] * Q >= N + Q);
      f_flips[f] = 0;
      for (int i = 0; i < f_gap[f]; i++) stream.push_back(1'b0);
      f_start[f] = stream.size();
      for (int i = 0; i < N; i++) begin
        bit b, flip;
        b = sync_word[i];
        if (f_lost[f])       flip = ($urandom % 100) < 45;
        else if (f % 3 == 0) flip = 1'b0;
        else                 flip = ($urandom % 100) < 12;
        if (flip) f_flips[f]++;
        stream.push_back(b ^ flip);
      end
      for (int i = 0; i < f_k[f] * Q; i++) stream.push_back(1'($urandom));
      if (f_embed[f])
        for (int i = 0; i < N; i++) stream[f_start[f] + N + Q + 5 + i] = sync_word[i];
    end
    for (int i = 0; i < (SLOTS + LAT + 4) * Q; i++) stream.push_back(1'b0);
    
    slen = stream.size();
    sa = new[slen];
    foreach (sa[i]) sa[i] = stream[i];
    ncyc = (slen + int'(Q) - 1) / int'(Q);
    if (ncyc > MAXCYC - 200) $fatal(1, "stream too long");

    // ---- reference model ----
    e_sum = new[ncyc + 2];
    e_m   = new[ncyc + 2];
    x_valid = new[ncyc + 2];
    x_data  = new[ncyc + 2];
    // Peak of window e, stored at index e + LAT + 1 (windows before 0 are idle).
    for (int t = 0; t < ncyc + 2; t++) begin
      logic [WW-1:0] w;
      int best, bm;
      w = win(t - int'(LAT) - 1);
      best = -1; bm = 0;
      for (int p = 0; p < Q; p++) begin
        int c;
        c = $countones(w[p +: N] ~^ sync_word);
        if (c > best) begin best = c; bm = p; end
      end
      e_sum[t] = best; e_m[t] = bm;
    end
    // Capture rule; the capture sees at edge t the peak of window t-1-LAT.
    rem = 0; mlat = 0;
    for (int t = 0; t < ncyc + 2; t++) begin
      bit det;
      logic [WW-1:0] w;
      w = win(t - 1 - int'(LAT));
      det = (rem == 0) && (e_sum[t] > int'(THR));
      x_valid[t] = det || (rem != 0);
      if (det) begin
        mlat = e_m[t];
        k_now = 0;
        for (int f = 0; f < NF; f++) if (f_start[f] <= (t - 1 - int'(LAT) - int'(SLOTS) + 1) * int'(Q) + e_m[t]) k_now = f_k[f];
        rem = (k_now > 1) ? k_now - 1 : 0;
      end else if (rem != 0) begin
        rem--;
      end else if (e_sum[t] <= int'(THR)) begin
        n_idle_cycles++;
      end
      if (!det && rem != 0 && e_sum[t] > int'(THR)) n_ignored_peak++;
      x_data[t] = x_valid[t] ? w[N + mlat +: Q] : '0;
    end

    // ---- run the DUT ----
    din = '0;
    frame_words = KW'(f_k[0]);
    rst_n = 1'b0;
    repeat (LAT + 4) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < ncyc + 2; t++) begin
      for (int b = 0; b < Q; b++) din[b] = sbit(t * int'(Q) + b);
      // Frame length of the frame whose sync word is due to be detected next.
      for (int f = 0; f < NF; f++)
        if (f_start[f] <= (t - int'(LAT) - int'(SLOTS) + 1) * int'(Q) + int'(Q) - 1) frame_words = KW'(f_k[f]);
      @(negedge clk);
      // sum and m are checked once the comparator pipeline has filled after reset.
      checks += 3;
      if (t >= int'(LAT) && t + 1 < ncyc + 2 && int'(sum) != e_sum[t + 1]) begin
        failures++; $display("edge %0d: sum %0d expected %0d", t, sum, e_sum[t + 1]);
      end
      if (t >= int'(LAT) && t + 1 < ncyc + 2 && int'(m) != e_m[t + 1]) begin
        failures++; $display("edge %0d: m %0d expected %0d", t, m, e_m[t + 1]);
      end
      if (valid_data != x_valid[t] || (x_valid[t] && frame_data != x_data[t])) begin
        failures++; $display("edge %0d: valid %0b data %h expected %0b %h", t, valid_data, frame_data, x_valid[t], x_data[t]);
      end
      if (valid_data && (t == 0 || !x_valid[t-1])) n_detect++;
    end

    // ---- every frame's payload, at the predicted cycle ----
    for (int f = 0; f < NF; f++) begin
      int e, mm, t0;
      bit ok;
      e  = f_start[f] / int'(Q) + int'(SLOTS) - 1;   // window holding the sync start in slot 0
      mm = f_start[f] % int'(Q);
      t0 = e + int'(LAT) + 1;                         // edge after which word 0 is out
      ok = 1'b1;
      for (int i = 0; i < f_k[f]; i++) begin
        logic [Q-1:0] want;
        for (int b = 0; b < Q; b++) want[b] = stream[f_start[f] + N + i * Q + b];
        if (!x_valid[t0 + i] || x_data[t0 + i] != want) ok = 1'b0;
      end
      checks++;
      if (f_lost[f]) begin
        if (ok) begin failures++; $display("frame %0d: damaged sync word still detected", f); end
        else n_lost++;
      end else if (!ok) begin
        failures++; $display("frame %0d (start %0d, flips %0d): payload not recovered", f, f_start[f], f_flips[f]);
      end else begin
        n_recovered++;
        m_seen[mm] = 1'b1;
        if (f_gap[f] == 0 && f > 0) n_back_to_back++;
        if (f_flips[f] > 0) n_noisy++;
      end
    end

    $display("frames %0d recovered %0d lost-on-purpose %0d detections %0d", NF, n_recovered, n_lost, n_detect);
    $display("back-to-back %0d noisy-sync %0d peaks-ignored-during-capture %0d idle-cycles %0d",
             n_back_to_back, n_noisy, n_ignored_peak, n_idle_cycles);
    checks += 6;
    if (n_recovered == 0)    begin failures++; $display("no frame recovered"); end
    if (n_back_to_back == 0) begin failures++; $display("no back-to-back frame"); end
    if (n_noisy == 0)        begin failures++; $display("no noisy sync word detected"); end
    if (n_lost == 0)         begin failures++; $display("no below-threshold sync word"); end
    if (n_ignored_peak == 0) begin failures++; $display("no peak ignored during a capture"); end
    if (n_idle_cycles == 0)  begin failures++; $display("no idle cycle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
