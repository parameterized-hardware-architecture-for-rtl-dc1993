// comparator_tree_tb: checks the pipelined arg-max.
//
// Trees with Q = 68 (the default) and Q = 5 (odd level sizes) receive a new
// random value set on every falling edge; sets with forced ties and a single
// dominant value are mixed in. After ceil(log2 Q) cycles the maximum and the
// lowest index holding it, computed here, must appear on the outputs. The
// reset value (0, 0) is checked before the first set arrives.
module comparator_tree_tb;
  import frame_sync_pkg::*;

  localparam int unsigned QA = 68;
  localparam int unsigned QB = 5;
  localparam int unsigned W  = 10;
  localparam int unsigned LA = clog2(QA);
  localparam int unsigned LB = clog2(QB);
  localparam int CYCLES = 300;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic [W-1:0] va [QA];
  logic [W-1:0] vb [QB];
  logic [W-1:0] max_a, max_b;
  logic [$clog2(QA)-1:0] idx_a;
  logic [$clog2(QB)-1:0] idx_b;

  comparator_tree #(.Q(QA), .W(W)) dut_a (.clk(clk), .rst_n(rst_n), .values(va), .max_value(max_a), .max_index(idx_a));
  comparator_tree #(.Q(QB), .W(W)) dut_b (.clk(clk), .rst_n(rst_n), .values(vb), .max_value(max_b), .max_index(idx_b));

  int checks = 0, failures = 0;
  int ema [CYCLES], eia [CYCLES], emb [CYCLES], eib [CYCLES];

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (CYCLES * 4) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (va[i]) va[i] = '0;
    foreach (vb[i]) vb[i] = '0;
    rst_n = 1'b0;
    repeat (8) @(negedge clk);
    check("reset max", int'(max_a), 0);
    check("reset idx", int'(idx_a), 0);
    rst_n = 1'b1;
    for (int c = 0; c < CYCLES; c++) begin
      @(negedge clk);
      if (c >= LA) begin
        check($sformatf("Q=%0d max c%0d", QA, c), int'(max_a), ema[c-LA]);
        check($sformatf("Q=%0d idx c%0d", QA, c), int'(idx_a), eia[c-LA]);
      end
      if (c >= LB) begin
        check($sformatf("Q=%0d max c%0d", QB, c), int'(max_b), emb[c-LB]);
        check($sformatf("Q=%0d idx c%0d", QB, c), int'(idx_b), eib[c-LB]);
      end
      // Narrow value range on some cycles makes ties frequent.
      foreach (va[i]) va[i] = (c % 3 == 0) ? W'($urandom % 4) : W'($urandom);
      foreach (vb[i]) vb[i] = (c % 3 == 0) ? W'($urandom % 3) : W'($urandom);
      if (c % 11 == 5) va[$urandom % QA] = '1;
      ema[c] = -1; eia[c] = 0;
      foreach (va[i]) if (int'(va[i]) > ema[c]) begin ema[c] = int'(va[i]); eia[c] = i; end
      emb[c] = -1; eib[c] = 0;
      foreach (vb[i]) if (int'(vb[i]) > emb[c]) begin emb[c] = int'(vb[i]); eib[c] = i; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
