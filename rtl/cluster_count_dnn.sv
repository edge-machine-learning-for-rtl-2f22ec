// cluster_count_dnn: edge cluster-counting network for one drift-cell channel.
//
// Takes the first N_IN digitised samples of a sense-wire waveform, all in
// parallel, and regresses the number of primary ionisation clusters in it, so
// that only this count, not the waveform, has to leave the detector. The
// network is a chain of four fully parallel dense layers:
//   N_IN -> N1 (ReLU) -> N2 (ReLU) -> N3 (ReLU) -> 1 (linear)
// with 10-bit, 5-fractional-bit samples, weights, biases and hidden
// activations. The output keeps 5 fractional bits in CNT_W bits.
//
// Interface: samples are presented with in_valid for one cycle; a new waveform
// may be presented on every clock. cluster_count is valid while out_valid is
// high, LATENCY cycles later (11 at the default sizes: 4 + 2 + 3 + 2; at a
// 200 MHz clock this is 55 ns). The trained weights and biases w1..w4, b1..b4
// enter as ports and must be held constant during operation. rst_n
// (synchronous, active low) clears the valid pipeline only.
//
// The topology, activation functions, number format and full parallelism
// follow the published model; the clock rate, pipeline placement, output width,
// truncating/saturating requantisation and the weight ports are choices of
// this design.
module cluster_count_dnn
  import ccnn_pkg::*;
#(
  parameter int unsigned N_IN = N_SAMPLES,
  parameter int unsigned N1   = N_H1,
  parameter int unsigned N2   = N_H2,
  parameter int unsigned N3   = N_H3,
  parameter int unsigned LPS  = LEVELS_PER_STAGE
) (
  input  logic clk,
  input  logic rst_n,
  // waveform
  input  logic in_valid,
  input  fx_t  samples [N_IN],
  // trained parameters
  input  fx_t  w1 [N1][N_IN],
  input  fx_t  b1 [N1],
  input  fx_t  w2 [N2][N1],
  input  fx_t  b2 [N2],
  input  fx_t  w3 [N3][N2],
  input  fx_t  b3 [N3],
  input  fx_t  w4 [N3],
  input  fx_t  b4,
  // result
  output logic out_valid,
  output cnt_t cluster_count
);

  localparam int unsigned LATENCY = layer_latency(N_IN, LPS) + layer_latency(N1, LPS)
                                  + layer_latency(N2, LPS) + layer_latency(N3, LPS);

  logic v1, v2, v3, v4;
  fx_t  h1 [N1];
  fx_t  h2 [N2];
  fx_t  h3 [N3];
  cnt_t y4 [1];
  fx_t  w4_m [1][N3];
  fx_t  b4_m [1];

  assign w4_m[0] = w4;
  assign b4_m[0] = b4;

  dense_layer #(.N_IN(N_IN), .N_OUT(N1), .RELU(1'b1), .LPS(LPS)) u_l1 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(samples),
    .w(w1), .b(b1), .out_valid(v1), .y(h1)
  );

  dense_layer #(.N_IN(N1), .N_OUT(N2), .RELU(1'b1), .LPS(LPS)) u_l2 (
    .clk(clk), .rst_n(rst_n), .in_valid(v1), .x(h1),
    .w(w2), .b(b2), .out_valid(v2), .y(h2)
  );

  dense_layer #(.N_IN(N2), .N_OUT(N3), .RELU(1'b1), .LPS(LPS)) u_l3 (
    .clk(clk), .rst_n(rst_n), .in_valid(v2), .x(h2),
    .w(w3), .b(b3), .out_valid(v3), .y(h3)
  );

  dense_layer #(.N_IN(N3), .N_OUT(1), .Y_W(CNT_W), .RELU(1'b0), .LPS(LPS)) u_out (
    .clk(clk), .rst_n(rst_n), .in_valid(v3), .x(h3),
    .w(w4_m), .b(b4_m), .out_valid(v4), .y(y4)
  );

  assign out_valid     = v4;
  assign cluster_count = y4[0];

endmodule
