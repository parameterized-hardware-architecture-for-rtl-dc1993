// comparator_tree: pipelined arg-max over Q values.
//
// The tree has the shape of the adder tree but every node is a comparator:
// at each level the values are compared in pairs, the larger one moves up and
// its index (its position in the input set) moves up with it in a parallel
// register. After ceil(log2 Q) registered levels the root holds the largest
// value (Sum) and its index (m). On equal values the lower index wins, so the
// earliest candidate location is preferred. An odd value at the end of a
// level is carried up unchanged.
//
// Interface and timing: values is combinational into the first comparator
// level; max_value/max_index describe the set presented ceil(log2 Q) cycles
// earlier (for Q = 1 the tree is a wire). The registers are cleared by the
// synchronous active-low reset, so Sum reads 0 while the pipeline fills. The
// pairwise tree with a travelling index follows the paper; tie-breaking and
// the reset are this design's choices.
module comparator_tree #(
  parameter int unsigned Q = 68,
  parameter int unsigned W = 10,
  localparam int unsigned IW = (Q > 1) ? $clog2(Q) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [W-1:0]  values [Q],
  output logic [W-1:0]  max_value,
  output logic [IW-1:0] max_index
);

  import frame_sync_pkg::*;

  localparam int unsigned LEVELS = clog2(Q);

  function automatic int unsigned lvl_count(input int unsigned l);
    return (Q + (1 << l) - 1) >> l;
  endfunction

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned CNT = lvl_count(l);
    logic [W-1:0]  val [CNT];
    logic [IW-1:0] idx [CNT];

    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < CNT; i++) begin : g_in
        assign val[i] = values[i];
        assign idx[i] = IW'(i);
      end
    end else begin : g_cmp
      localparam int unsigned PCNT = lvl_count(l - 1);
      for (genvar i = 0; i < CNT; i++) begin : g_node
        if (2 * i + 1 < PCNT) begin : g_pair
          // Right operand wins only if strictly larger: ties keep the lower index.
          logic take_hi;
          assign take_hi = g_lvl[l-1].val[2*i+1] > g_lvl[l-1].val[2*i];
          always_ff @(posedge clk) begin
            if (!rst_n) begin
              val[i] <= '0;
              idx[i] <= '0;
            end else begin
              val[i] <= take_hi ? g_lvl[l-1].val[2*i+1] : g_lvl[l-1].val[2*i];
              idx[i] <= take_hi ? g_lvl[l-1].idx[2*i+1] : g_lvl[l-1].idx[2*i];
            end
          end
        end else begin : g_pass
          always_ff @(posedge clk) begin
            if (!rst_n) begin
              val[i] <= '0;
              idx[i] <= '0;
            end else begin
              val[i] <= g_lvl[l-1].val[2*i];
              idx[i] <= g_lvl[l-1].idx[2*i];
            end
          end
        end
      end
    end
  end

  assign max_value = g_lvl[LEVELS].val[0];
  assign max_index = g_lvl[LEVELS].idx[0];

endmodule
