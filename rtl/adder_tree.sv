// adder_tree: pipelined population count of an N-bit vector.
//
// Level 0 is the N input bits. Each following level adds the values of the
// level below in pairs and registers the results, so level l holds
// ceil(N/2^l) values and the tree has ceil(log2 N) registered levels. An odd
// value left at the end of a level is carried up unchanged. Words grow by one
// bit per level, up to $clog2(N+1) bits.
//
// Interface and timing: bits is combinational into the first adder level; sum
// is the number of ones in the bits presented ceil(log2 N) clk cycles earlier
// (for N = 1 the tree is a wire). A new vector can be presented every cycle.
// The registers have no reset: after ceil(log2 N) cycles every stage holds
// valid data. The paired, register-per-level structure follows the paper; the
// handling of odd values and the word widths are this design's choices.
module adder_tree #(
  parameter int unsigned N = 1020
) (
  input  logic                     clk,
  input  logic [N-1:0]             bits,
  output logic [$clog2(N+1)-1:0]   sum
);

  import frame_sync_pkg::*;

  localparam int unsigned LEVELS = clog2(N);
  localparam int unsigned SW     = $clog2(N + 1);

  // Number of values and word width at level l.
  function automatic int unsigned lvl_count(input int unsigned l);
    return (N + (1 << l) - 1) >> l;
  endfunction
  function automatic int unsigned lvl_width(input int unsigned l);
    return (l + 1 < SW) ? l + 1 : SW;
  endfunction

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned CNT = lvl_count(l);
    localparam int unsigned WL  = lvl_width(l);
    logic [WL-1:0] v [CNT];

    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < CNT; i++) begin : g_bit
        assign v[i] = bits[i];
      end
    end else begin : g_add
      localparam int unsigned PCNT = lvl_count(l - 1);
      for (genvar i = 0; i < CNT; i++) begin : g_node
        if (2 * i + 1 < PCNT) begin : g_pair
          always_ff @(posedge clk)
            v[i] <= WL'(g_lvl[l-1].v[2*i]) + WL'(g_lvl[l-1].v[2*i+1]);
        end else begin : g_pass
          always_ff @(posedge clk)
            v[i] <= WL'(g_lvl[l-1].v[2*i]);
        end
      end
    end
  end

  assign sum = SW'(g_lvl[LEVELS].v[0]);

endmodule
