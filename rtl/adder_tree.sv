// adder_tree: pipelined signed reduction of N operands to their sum.
//
// Operands are sign-extended to OUT_W bits and added pairwise, level by level;
// an odd operand at the end of a level passes through unchanged. After every
// LPS-th level a bank of registers is inserted, except after the last level,
// so the tree has ccnn_pkg::tree_regs(N, LPS) cycles of latency and its output
// is combinational from the last register bank (the instantiating layer
// registers it). A new operand set may be presented every cycle. The data
// registers carry no reset; validity is tracked by the instantiating layer.
// A tree of LPS+1 levels or fewer has no registers, and clk is then unused.
// The tree itself is not described by the published model, which only states
// that every multiplication is done in parallel; it is this design's choice.
module adder_tree #(
  parameter int unsigned N     = 8,
  parameter int unsigned IN_W  = 20,
  parameter int unsigned OUT_W = IN_W + ccnn_pkg::tree_levels(N),
  parameter int unsigned LPS   = 4
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  din [N],
  output logic signed [OUT_W-1:0] sum
);

  localparam int unsigned LEVELS = ccnn_pkg::tree_levels(N);

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned CNT = (N + (1 << l) - 1) >> l;
    logic signed [OUT_W-1:0] node [CNT];

    if (l == 0) begin : g_leaf
      for (genvar k = 0; k < N; k++) begin : g_k
        assign node[k] = OUT_W'(din[k]);
      end
    end else begin : g_add
      localparam int unsigned PCNT = (N + (1 << (l - 1)) - 1) >> (l - 1);
      logic signed [OUT_W-1:0] nxt [CNT];
      for (genvar k = 0; k < CNT; k++) begin : g_k
        if (2 * k + 1 < PCNT) begin : g_pair
          assign nxt[k] = g_lvl[l-1].node[2*k] + g_lvl[l-1].node[2*k+1];
        end else begin : g_pass
          assign nxt[k] = g_lvl[l-1].node[2*k];
        end
      end
      if ((l % LPS) == 0 && l < LEVELS) begin : g_reg
        always_ff @(posedge clk) node <= nxt;
      end else begin : g_comb
        assign node = nxt;
      end
    end
  end

  assign sum = g_lvl[LEVELS].node[0];

endmodule
