// tb_cluster_count_dnn: end-to-end test of the cluster-counting network at its
// default size (500 samples, 8-32-8-1), with no parameter overrides.
//
// Synthetic drift-cell waveforms are generated here: a baseline with noise of a
// few LSB plus a random number of ionisation pulses, each a fast rise and an
// exponential tail, with amplitudes up to about 1.3 (42 LSB at 5 fractional
// bits). Each waveform is pushed through a bit-exact integer reference of the
// network (sum of products, bias << 5, floor division by 32, clamp to the
// layer's width, ReLU on hidden layers) and the design's output is compared
// with it, in order, together with the latency of 11 cycles.
//
// Phase 1 uses dense random weights; phase 2 zeroes the 60 % smallest-magnitude
// weights of every layer, as a pruned model would, and repeats. Waveforms are
// issued back to back and with idle cycles between them. The test counts, and
// requires at least once each: ReLU clipping in a hidden layer, saturation of a
// hidden activation, back-to-back issue, an idle gap, a negative (linear)
// output value and an output beyond the 10-bit activation range (above 16).
module tb_cluster_count_dnn;
  import ccnn_pkg::*;

  localparam int NS = N_SAMPLES, M1 = N_H1, M2 = N_H2, M3 = N_H3;
  localparam longint LATENCY = 11;
  localparam int NWAVE = 48;  // per phase

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid;
  fx_t  samples [NS];
  fx_t  w1 [M1][NS];
  fx_t  b1 [M1];
  fx_t  w2 [M2][M1];
  fx_t  b2 [M2];
  fx_t  w3 [M3][M2];
  fx_t  b3 [M3];
  fx_t  w4 [M3];
  fx_t  b4;
  logic out_valid;
  cnt_t cluster_count;

  cluster_count_dnn dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .samples(samples),
    .w1(w1), .b1(b1), .w2(w2), .b2(b2), .w3(w3), .b3(b3), .w4(w4), .b4(b4),
    .out_valid(out_valid), .cluster_count(cluster_count));

  int checks = 0, failures = 0;
  int n_clip = 0, n_sat = 0, n_b2b = 0, n_idle = 0, n_neg = 0, n_wide = 0, n_pruned = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { longint t; longint y; } exp_t;
  exp_t q [$];

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

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  // Hidden-layer neuron: ReLU, 10-bit result; counts clipping and saturation.
  function automatic longint hidden(longint s);
    if (s < 0) begin n_clip++; return 0; end
    if (fdiv32(s) > 511) n_sat++;
    return clampw(fdiv32(s), FX_W);
  endfunction

  // Bit-exact reference of the whole network for the current samples.
  function automatic longint reference();
    longint h1 [M1];
    longint h2 [M2];
    longint h3 [M3];
    longint s;
    for (int j = 0; j < M1; j++) begin
      s = longint'(b1[j]) * 32;
      for (int i = 0; i < NS; i++) s += longint'(samples[i]) * longint'(w1[j][i]);
      h1[j] = hidden(s);
    end
    for (int j = 0; j < M2; j++) begin
      s = longint'(b2[j]) * 32;
      for (int i = 0; i < M1; i++) s += h1[i] * longint'(w2[j][i]);
      h2[j] = hidden(s);
    end
    for (int j = 0; j < M3; j++) begin
      s = longint'(b3[j]) * 32;
      for (int i = 0; i < M2; i++) s += h2[i] * longint'(w3[j][i]);
      h3[j] = hidden(s);
    end
    s = longint'(b4) * 32;
    for (int i = 0; i < M3; i++) s += h3[i] * longint'(w4[i]);
    return clampw(fdiv32(s), CNT_W);
  endfunction

  // Synthetic waveform: noise plus npulse pulses with exponential tails.
  task automatic make_waveform(int npulse);
    real wf [NS];
    for (int i = 0; i < NS; i++) wf[i] = (real'($urandom_range(0, 6)) - 3.0) / 32.0;
    for (int p = 0; p < npulse; p++) begin
      int  t0  = $urandom_range(0, NS - 1);
      real amp = real'($urandom_range(10, 120)) / 100.0;
      real a   = amp;
      for (int i = t0; i < NS; i++) begin
        wf[i] += a;
        a = a * 0.97;
      end
    end
    for (int i = 0; i < NS; i++) begin
      int v = int'(wf[i] * 32.0);
      samples[i] = fx_t'((v > 511) ? 511 : (v < -512) ? -512 : v);
    end
  endtask

  task automatic init_weights();
    for (int j = 0; j < M1; j++) begin
      b1[j] = rnd_fx(-32, 32);
      for (int i = 0; i < NS; i++)
        w1[j][i] = (j == 0) ? rnd_fx(0, 12) : (j == 1) ? rnd_fx(-12, 0) : rnd_fx(-10, 12);
    end
    for (int j = 0; j < M2; j++) begin
      b2[j] = rnd_fx(-32, 32);
      for (int i = 0; i < M1; i++) w2[j][i] = rnd_fx(-24, 32);
    end
    for (int j = 0; j < M3; j++) begin
      b3[j] = rnd_fx(-32, 32);
      for (int i = 0; i < M2; i++) w3[j][i] = rnd_fx(-12, 12);
    end
    for (int i = 0; i < M3; i++) w4[i] = (i % 2 == 0) ? rnd_fx(0, 48) : rnd_fx(-20, 0);
    b4 = rnd_fx(100, 200);
  endtask

  // Zero the 60 % smallest-magnitude weights of each layer.
  task automatic prune();
    int mags [$];
    int thr;
    mags = {};
    foreach (w1[j, i]) mags.push_back(iabs(int'(w1[j][i])));
    mags.sort(); thr = mags[(mags.size() * 6) / 10];
    foreach (w1[j, i]) if (iabs(int'(w1[j][i])) < thr) begin w1[j][i] = '0; n_pruned++; end
    mags = {};
    foreach (w2[j, i]) mags.push_back(iabs(int'(w2[j][i])));
    mags.sort(); thr = mags[(mags.size() * 6) / 10];
    foreach (w2[j, i]) if (iabs(int'(w2[j][i])) < thr) begin w2[j][i] = '0; n_pruned++; end
    mags = {};
    foreach (w3[j, i]) mags.push_back(iabs(int'(w3[j][i])));
    mags.sort(); thr = mags[(mags.size() * 6) / 10];
    foreach (w3[j, i]) if (iabs(int'(w3[j][i])) < thr) begin w3[j][i] = '0; n_pruned++; end
    mags = {};
    foreach (w4[i]) mags.push_back(iabs(int'(w4[i])));
    mags.sort(); thr = mags[(mags.size() * 6) / 10];
    foreach (w4[i]) if (iabs(int'(w4[i])) < thr) begin w4[i] = '0; n_pruned++; end
  endtask

  task automatic run_phase(string name);
    bit prev = 1'b0;
    for (int k = 0; k < NWAVE; ) begin
      bit v = (k < 16) || ($urandom_range(0, 3) != 0);
      @(negedge clk);
      in_valid = v;
      if (v) begin
        exp_t e;
        make_waveform((k % 7 == 3) ? 40 : $urandom_range(2, 20));
        e.t = cycle;
        e.y = reference();
        if (e.y < 0) n_neg++;
        if (e.y > 511) n_wide++;
        q.push_back(e);
        if (prev) n_b2b++;
        k++;
      end else begin
        n_idle++;
      end
      prev = v;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (int'(LATENCY) + 4) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%s: %0d results missing", name, q.size()); end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = q.pop_front();
        if (cycle - e.t != LATENCY) begin
          failures++; $display("latency %0d, expected %0d", cycle - e.t, LATENCY);
        end
        checks++;
        if (longint'(cluster_count) != e.y) begin
          failures++; $display("count got %0d exp %0d", cluster_count, e.y);
        end
      end
    end
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 1'b0;
    init_weights();
    make_waveform(1);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_phase("dense");
    prune();
    b4 = rnd_fx(-480, -400);  // shift the pruned model's outputs below zero
    run_phase("pruned");
    $display("relu_clip=%0d hidden_sat=%0d back_to_back=%0d idle=%0d negative_out=%0d wide_out=%0d pruned_weights=%0d",
             n_clip, n_sat, n_b2b, n_idle, n_neg, n_wide, n_pruned);
    if (n_wide == 0) begin failures++; $display("no output beyond the 10-bit range"); end
    if (n_clip == 0) begin failures++; $display("ReLU clipping never happened"); end
    if (n_sat == 0)  begin failures++; $display("hidden saturation never happened"); end
    if (n_b2b == 0)  begin failures++; $display("back-to-back issue never happened"); end
    if (n_idle == 0) begin failures++; $display("idle gap never happened"); end
    if (n_neg == 0)  begin failures++; $display("negative output never happened"); end
    if (n_pruned == 0) begin failures++; $display("no weight was pruned"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
