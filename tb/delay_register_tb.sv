// delay_register_tb: checks that the output is the input of exactly DEPTH
// cycles earlier, at the default size (1156 bits, 17 slots) and for a
// one-slot register.
module delay_register_tb;
  localparam int unsigned WIDTH = 1156;
  localparam int unsigned DEPTH = 17;
  localparam int CYCLES = 200;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [WIDTH-1:0] din, dout;
  logic [7:0] din1, dout1;

  delay_register #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut   (.clk(clk), .din(din),  .dout(dout));
  delay_register #(.WIDTH(8),     .DEPTH(1))     dut_1 (.clk(clk), .din(din1), .dout(dout1));

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] hist [CYCLES];
  logic [7:0] hist1 [CYCLES];

  initial begin
    repeat (CYCLES * 4) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < CYCLES; c++) begin
      for (int i = 0; i < WIDTH; i++) din[i] = 1'($urandom);
      din1 = 8'($urandom);
      hist[c] = din;
      hist1[c] = din1;
      @(negedge clk);
      // After edge c, dout holds the input applied before edge c-DEPTH+1.
      if (c >= DEPTH - 1) begin
        checks++;
        if (dout != hist[c-DEPTH+1]) begin failures++; $display("cycle %0d: wrong delayed word", c); end
      end
      checks++;
      if (dout1 != hist1[c]) begin failures++; $display("cycle %0d: one-slot delay wrong", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
