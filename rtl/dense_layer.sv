// dense_layer: fully parallel fixed-point dense (fully connected) layer.
//
// y[j] = act( sum_i w[j][i] * x[i] + b[j] ) for j = 0..N_OUT-1, where act is
// ReLU (RELU = 1) or the identity, and the result is requantised to Y_W bits.
// Every weight has its own multiplier and every neuron its own adder tree, so
// the layer accepts a new input vector on every clock (initiation interval 1),
// as a model compiled with reuse factor 1 and parallel I/O does.
//
// Number formats: x, w and b carry FRAC fractional bits; products carry 2*FRAC
// and are summed at full precision (no overflow possible inside the layer); the
// bias is aligned by a left shift of FRAC bits; y carries FRAC fractional bits.
//
// Timing: cycle 1 registers the N_OUT*N_IN products; the adder tree adds
// ccnn_pkg::tree_regs(N_IN, LPS) register stages; the final cycle adds the
// bias, requantises and registers y. Latency ccnn_pkg::layer_latency(N_IN,LPS)
// cycles, out_valid follows in_valid by the same amount. w and b are the
// trained constants and must be held steady while data flows; only the valid
// pipeline is reset (active-low, synchronous).
module dense_layer
  import ccnn_pkg::*;
#(
  parameter int unsigned N_IN  = 8,
  parameter int unsigned N_OUT = 8,
  parameter int unsigned X_W   = FX_W,
  parameter int unsigned W_W   = FX_W,
  parameter int unsigned FRAC  = FX_FRAC,
  parameter int unsigned Y_W   = FX_W,
  parameter bit          RELU  = 1'b1,
  parameter int unsigned LPS   = LEVELS_PER_STAGE
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [X_W-1:0] x [N_IN],
  input  logic signed [W_W-1:0] w [N_OUT][N_IN],
  input  logic signed [W_W-1:0] b [N_OUT],
  output logic                  out_valid,
  output logic signed [Y_W-1:0] y [N_OUT]
);

  localparam int unsigned P_W   = X_W + W_W;                   // product width
  localparam int unsigned S_W   = P_W + tree_levels(N_IN);     // tree sum width
  localparam int unsigned ACC_W = S_W + 1;                     // sum plus bias
  localparam int unsigned LAT   = layer_latency(N_IN, LPS);

  // Stage 1: all products, registered.
  logic signed [P_W-1:0] prod [N_OUT][N_IN];

  for (genvar j = 0; j < N_OUT; j++) begin : g_mul_row
    for (genvar i = 0; i < N_IN; i++) begin : g_mul
      always_ff @(posedge clk) prod[j][i] <= P_W'(x[i]) * P_W'(w[j][i]);
    end
  end

  for (genvar j = 0; j < N_OUT; j++) begin : g_neuron
    logic signed [S_W-1:0]   sum;
    logic signed [ACC_W-1:0] acc;
    logic signed [Y_W-1:0]   yq;

    adder_tree #(.N(N_IN), .IN_W(P_W), .OUT_W(S_W), .LPS(LPS)) u_tree (
      .clk (clk),
      .din (prod[j]),
      .sum (sum)
    );

    assign acc = ACC_W'(sum) + (ACC_W'(b[j]) <<< FRAC);

    relu_quant #(
      .IN_W(ACC_W), .IN_FRAC(2 * FRAC), .OUT_W(Y_W), .OUT_FRAC(FRAC), .RELU(RELU)
    ) u_act (
      .d (acc),
      .q (yq)
    );

    always_ff @(posedge clk) y[j] <= yq;
  end

  // Valid pipeline, matched to the data path depth.
  logic [LAT-1:0] vld;

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], in_valid};
  end

  assign out_valid = vld[LAT-1];

endmodule
