// frame_sync_workload_tb: the three tested synchronizer versions on noisy
// streams of 300-word frames.
//
// Versions (N, Q) = (540, 60), (780, 52) and (1020, 68) each run with a
// threshold of 0.65 N (351, 507, 663) and k = 300. For each version the bench
// sends FPB frames at each of three bit error rates, 0.33, 0.30 and 0.26:
// about the rates of 16-QAM at -8 dB and -5 dB SNR, with 0.30 between them.
// Every bit of the stream, idle gaps and sync words included, is flipped with
// that probability. A frame counts as recovered when all 300 of its payload
// words leave frame_data, with valid_data high, at the cycle predicted from
// the position of its sync word and the pipeline latency. The bench prints
// the frame loss rate per version and rate. Checks: at BER 0.26 every frame
// must be recovered (sync words of 540 bits and more stand about 9 standard
// deviations above the random agreement level there); at every rate, any
// detection that starts at a frame's predicted cycle must deliver exactly
// that frame's payload; and at least one frame per version must be
// recovered. The frame counts are far below a statistical accuracy
// measurement; the bench shows the behaviour, not loss rates to 1e-5.
module frame_sync_workload_tb;
  import frame_sync_pkg::*;

  localparam int FPB = 6;           // frames per bit error rate
  localparam int NB  = 3;           // bit error rates
  localparam int K   = 300;
  localparam int MAXCYC = 12000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int done = 0;

  initial begin
    repeat (MAXCYC + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < 3; g++) begin : g_ver
    localparam int unsigned N  = (g == 0) ? 540 : (g == 1) ? 780 : 1020;
    localparam int unsigned Q  = (g == 0) ? 60  : (g == 1) ? 52  : 68;
    localparam int unsigned SW = $clog2(N + 1);
    localparam int unsigned IW = $clog2(Q);
    localparam int unsigned SLOTS = N / Q + 2;
    localparam int unsigned LAT = corr_latency(N, Q);
    localparam int unsigned THR = (N * 65) / 100;

    logic          rst_n;
    logic [Q-1:0]  din;
    logic [N-1:0]  sync_word;
    logic [SW-1:0] sum;
    logic [IW-1:0] m;
    logic [Q-1:0]  frame_data;
    logic          valid_data;

    frame_sync_top #(.N(N), .Q(Q)) dut (
      .clk(clk), .rst_n(rst_n), .din(din), .sync_word(sync_word),
      .threshold(SW'(THR)), .frame_words(16'(K)),
      .sum(sum), .m(m), .frame_data(frame_data), .valid_data(valid_data));

    bit stream [$];
    bit sa [];
    int slen;

    function automatic bit sbit(input int idx);
      if (idx < 0 || idx >= slen) return 1'b0;
      return sa[idx];
    endfunction
    int f_start [NB * FPB];
    int f_ber   [NB * FPB];
    bit           o_valid [];
    logic [Q-1:0] o_data  [];

    initial begin
      int ber [NB];
      int ncyc;
      int lost [NB];
      ber = '{33, 30, 26};
      for (int i = 0; i < N; i++) sync_word[i] = 1'($urandom);

      // Stream: per rate, FPB frames with random idle gaps, then noise.
      for (int i = 0; i < 50; i++) stream.push_back(1'b0);
      for (int b = 0; b < NB; b++) begin
        int seg, fin;
        seg = stream.size();
        for (int f = 0; f < FPB; f++) begin
          int gap, fi;
          fi = b * FPB + f;
          gap = int'($urandom % (3 * Q));
          for (int i = 0; i < gap; i++) stream.push_back(1'b0);
          f_start[fi] = stream.size();
          f_ber[fi] = b;
          for (int i = 0; i < N; i++) stream.push_back(sync_word[i]);
          for (int i = 0; i < K * int'(Q); i++) stream.push_back(1'($urandom));
        end
        fin = stream.size();
        for (int i = seg; i < fin; i++)
          if (($urandom % 100) < ber[b]) stream[i] ^= 1'b1;
      end
      for (int i = 0; i < (SLOTS + LAT + 4) * Q; i++) stream.push_back(1'b0);
      slen = stream.size();
      sa = new[slen];
      foreach (sa[i]) sa[i] = stream[i];
      ncyc = (slen + int'(Q) - 1) / int'(Q);
      if (ncyc > MAXCYC) $fatal(1, "stream too long");
      o_valid = new[ncyc];
      o_data  = new[ncyc];

      din = '0;
      rst_n = 1'b0;
      repeat (LAT + 4) @(negedge clk);
      rst_n = 1'b1;
      for (int t = 0; t < ncyc; t++) begin
        for (int i = 0; i < Q; i++) din[i] = sbit(t * int'(Q) + i);
        @(negedge clk);
        o_valid[t] = valid_data;
        o_data[t]  = frame_data;
      end

      foreach (lost[b]) lost[b] = 0;
      for (int fi = 0; fi < NB * FPB; fi++) begin
        int t0, good;
        t0 = f_start[fi] / int'(Q) + int'(SLOTS) - 1 + int'(LAT) + 1;
        good = 0;
        for (int i = 0; i < K; i++) begin
          logic [Q-1:0] want;
          for (int j = 0; j < Q; j++) want[j] = sbit(f_start[fi] + int'(N) + i * int'(Q) + j);
          if (o_valid[t0 + i] && o_data[t0 + i] == want) good++;
        end
        // A capture that starts on time must be the right frame, word for word.
        if (o_valid[t0] && !(t0 > 0 && o_valid[t0 - 1])) begin
          checks++;
          if (good != K) begin failures++; $display("N=%0d frame %0d: on-time capture with %0d of %0d words right", N, fi, good, K); end
        end
        if (good != K) lost[f_ber[fi]]++;
      end
      for (int b = 0; b < NB; b++)
        $display("N=%0d Q=%0d threshold=%0d BER=0.%0d: %0d of %0d frames lost", N, Q, THR, ber[b], lost[b], FPB);
      checks += 2;
      if (lost[NB-1] != 0) begin failures++; $display("N=%0d: frames lost at BER 0.26", N); end
      if (lost[0] + lost[1] + lost[2] == NB * FPB) begin failures++; $display("N=%0d: no frame recovered", N); end
      done++;
    end
  end

  initial begin
    wait (done == 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
