// tb_dense_layer: self-checking test of the fully parallel dense layer.
//
// Instance A: 20 inputs, 5 ReLU neurons, 2 adder levels per stage (latency 4).
// Instance B: 7 inputs, 3 linear neurons with 16-bit output, 1 level per stage
// (latency 4). Both get a fresh random input vector on most cycles (back to
// back) with occasional idle cycles. Expected outputs are computed here with
// integer arithmetic (sum of products, bias << 5, floor division by 32,
// clamping, ReLU) and compared in order; each result's latency and the layer's
// one-vector-per-cycle throughput are checked. Weights are random, with one
// neuron of A all positive and one all negative so that saturation and ReLU
// clipping occur.
module tb_dense_layer;
  import ccnn_pkg::*;

  localparam int NA = 20, MA = 5;
  localparam longint LAT_A = 4;
  localparam int NB = 7,  MB = 3;
  localparam longint LAT_B = 4;
  localparam int NVEC = 600;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid;
  fx_t  xa [NA];
  fx_t  wa [MA][NA];
  fx_t  ba [MA];
  fx_t  ya [MA];
  logic va;
  fx_t  xb [NB];
  fx_t  wb [MB][NB];
  fx_t  bb [MB];
  logic signed [15:0] yb [MB];
  logic vb;

  dense_layer #(.N_IN(NA), .N_OUT(MA), .RELU(1'b1), .LPS(2)) u_a (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(xa), .w(wa), .b(ba),
    .out_valid(va), .y(ya));
  dense_layer #(.N_IN(NB), .N_OUT(MB), .Y_W(16), .RELU(1'b0), .LPS(1)) u_b (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(xb), .w(wb), .b(bb),
    .out_valid(vb), .y(yb));

  int checks = 0, failures = 0;
  int n_clip = 0, n_sat = 0, n_neg = 0, n_b2b = 0, n_idle = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { longint t; longint ya [MA]; longint yb [MB]; } exp_t;
  exp_t qa [$];
  exp_t qb [$];

  function automatic longint fdiv32(longint v);
    longint r = v / 32;
    if (v < 0 && (v % 32) != 0) r = r - 1;
    return r;
  endfunction

  function automatic longint clampw(longint v, int w);
    longint mx = (longint'(1) << (w - 1)) - 1;
    longint mn = -(longint'(1) << (w - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction

  function automatic fx_t rnd_fx(int lo, int hi);
    return fx_t'($signed($urandom_range(0, hi - lo)) + lo);
  endfunction

  // Drive one new vector (or idle) at each negative edge; expectations pushed.
  task automatic drive(bit valid);
    exp_t e;
    in_valid = valid;
    for (int i = 0; i < NA; i++) xa[i] = rnd_fx(-512, 511);
    for (int i = 0; i < NB; i++) xb[i] = rnd_fx(-512, 511);
    if (!valid) return;
    e.t = cycle;
    for (int j = 0; j < MA; j++) begin
      longint s = longint'(ba[j]) * 32;
      for (int i = 0; i < NA; i++) s += longint'(xa[i]) * longint'(wa[j][i]);
      if (s < 0) n_clip++;
      if (fdiv32(s) > 511) n_sat++;
      e.ya[j] = (s < 0) ? 0 : clampw(fdiv32(s), 10);
    end
    for (int j = 0; j < MB; j++) begin
      longint s = longint'(bb[j]) * 32;
      for (int i = 0; i < NB; i++) s += longint'(xb[i]) * longint'(wb[j][i]);
      if (s < 0) n_neg++;
      e.yb[j] = clampw(fdiv32(s), 16);
    end
    qa.push_back(e);
    qb.push_back(e);
  endtask

  // Output checkers.
  always @(posedge clk) begin
    if (rst_n && va) begin
      exp_t e;
      checks++;
      if (qa.size() == 0) begin failures++; $display("A: unexpected output"); end
      else begin
        e = qa.pop_front();
        if (cycle - e.t != LAT_A) begin
          failures++; $display("A: latency %0d, expected %0d", cycle - e.t, LAT_A);
        end
        for (int j = 0; j < MA; j++) begin
          checks++;
          if (longint'(ya[j]) != e.ya[j]) begin
            failures++; $display("A: neuron %0d got %0d exp %0d", j, ya[j], e.ya[j]);
          end
        end
      end
    end
    if (rst_n && vb) begin
      exp_t e;
      checks++;
      if (qb.size() == 0) begin failures++; $display("B: unexpected output"); end
      else begin
        e = qb.pop_front();
        if (cycle - e.t != LAT_B) begin
          failures++; $display("B: latency %0d, expected %0d", cycle - e.t, LAT_B);
        end
        for (int j = 0; j < MB; j++) begin
          checks++;
          if (longint'(yb[j]) != e.yb[j]) begin
            failures++; $display("B: neuron %0d got %0d exp %0d", j, yb[j], e.yb[j]);
          end
        end
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic bit prev = 1'b0;
    for (int j = 0; j < MA; j++) begin
      ba[j] = rnd_fx(-64, 64);
      for (int i = 0; i < NA; i++)
        wa[j][i] = (j == 0) ? rnd_fx(0, 511) : (j == 1) ? rnd_fx(-511, 0) : rnd_fx(-64, 64);
    end
    for (int j = 0; j < MB; j++) begin
      bb[j] = rnd_fx(-512, 511);
      for (int i = 0; i < NB; i++) wb[j][i] = rnd_fx(-512, 511);
    end
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NVEC; ) begin
      bit v;
      @(negedge clk);
      v = ($urandom_range(0, 4) != 0);
      drive(v);
      if (v && prev) n_b2b++;
      if (!v) n_idle++;
      prev = v;
      if (v) k++;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (qa.size() != 0 || qb.size() != 0) begin
      failures++; $display("outputs missing: %0d %0d", qa.size(), qb.size());
    end
    if (n_clip == 0 || n_sat == 0 || n_neg == 0 || n_b2b == 0 || n_idle == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("clips=%0d sat=%0d neg=%0d back_to_back=%0d idle=%0d",
             n_clip, n_sat, n_neg, n_b2b, n_idle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
