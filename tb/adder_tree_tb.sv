// adder_tree_tb: checks the pipelined population count.
//
// Two trees are tested, the default N = 1020 and a small odd N = 13 whose
// levels end in unpaired values. A new random vector (with all-zero and
// all-one vectors mixed in) is applied on every falling edge, and each
// output is compared with a popcount computed here, ceil(log2 N) cycles
// later, which also checks the pipeline latency and the one-vector-per-cycle
// rate.
module adder_tree_tb;
  import frame_sync_pkg::*;

  localparam int unsigned NA = 1020;
  localparam int unsigned NB = 13;
  localparam int unsigned LA = clog2(NA);
  localparam int unsigned LB = clog2(NB);
  localparam int CYCLES = 300;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [NA-1:0] bits_a;
  logic [NB-1:0] bits_b;
  logic [$clog2(NA+1)-1:0] sum_a;
  logic [$clog2(NB+1)-1:0] sum_b;

  adder_tree #(.N(NA)) dut_a (.clk(clk), .bits(bits_a), .sum(sum_a));
  adder_tree #(.N(NB)) dut_b (.clk(clk), .bits(bits_b), .sum(sum_b));

  int checks = 0, failures = 0;
  int exp_a [CYCLES];
  int exp_b [CYCLES];

  initial begin
    repeat (CYCLES * 4) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bits_a = '0;
    bits_b = '0;
    for (int c = 0; c < CYCLES; c++) begin
      @(negedge clk);
      // Outputs now reflect the vectors applied LA (LB) edges ago.
      if (c >= LA) begin
        checks++;
        if (int'(sum_a) != exp_a[c-LA]) begin
          failures++;
          $display("N=%0d cycle %0d: sum %0d expected %0d", NA, c, sum_a, exp_a[c-LA]);
        end
      end
      if (c >= LB) begin
        checks++;
        if (int'(sum_b) != exp_b[c-LB]) begin
          failures++;
          $display("N=%0d cycle %0d: sum %0d expected %0d", NB, c, sum_b, exp_b[c-LB]);
        end
      end
      for (int i = 0; i < NA; i++) bits_a[i] = 1'($urandom);
      for (int i = 0; i < NB; i++) bits_b[i] = 1'($urandom);
      // Biased and extreme vectors exercise the upper bits of the sum.
      if (c % 7 == 3) for (int i = 0; i < NA; i++) bits_a[i] = ($urandom % 8) != 0;
      if (c == 10) begin bits_a = '1; bits_b = '1; end
      if (c == 11) begin bits_a = '0; bits_b = '0; end
      exp_a[c] = $countones(bits_a);
      exp_b[c] = $countones(bits_b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
