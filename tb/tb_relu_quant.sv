// tb_relu_quant: self-checking test of the requantiser / ReLU.
//
// Two instances are driven with the same accumulator values: one with ReLU
// (hidden-layer setting, 30-bit input with 10 fractional bits to 10 bits with
// 5) and one linear (output-layer setting, to 16 bits). Expected values are
// computed here by integer division with floor and explicit clamping. Corner
// values around zero and around both saturation limits are tried, then random
// values. Each of ReLU clipping, positive and negative saturation must occur.
module tb_relu_quant;
  localparam int IN_W = 30;

  logic signed [IN_W-1:0] d;
  logic signed [9:0]      q_relu;
  logic signed [15:0]     q_lin;

  relu_quant #(.IN_W(IN_W), .IN_FRAC(10), .OUT_W(10), .OUT_FRAC(5), .RELU(1'b1)) u_relu (
    .d(d), .q(q_relu));
  relu_quant #(.IN_W(IN_W), .IN_FRAC(10), .OUT_W(16), .OUT_FRAC(5), .RELU(1'b0)) u_lin (
    .d(d), .q(q_lin));

  int checks = 0, failures = 0;
  int n_clip = 0, n_sat_hi = 0, n_sat_lo = 0;

  function automatic longint floor_div32(longint v);
    longint r = v / 32;
    if (v < 0 && (v % 32) != 0) r = r - 1;
    return r;
  endfunction

  function automatic longint clamp(longint v, int w);
    longint mx = (longint'(1) << (w - 1)) - 1;
    longint mn = -(longint'(1) << (w - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction

  task automatic try_value(longint v);
    longint e_relu, e_lin, f;
    d = IN_W'(v);
    #1;
    f = floor_div32(v);
    e_lin  = clamp(f, 16);
    e_relu = (v < 0) ? 0 : clamp(f, 10);
    if (v < 0) n_clip++;
    if (v >= 0 && f > 511) n_sat_hi++;
    if (f < -32768) n_sat_lo++;
    checks += 2;
    if (longint'(q_relu) != e_relu) begin
      failures++;
      $display("relu mismatch d=%0d got %0d exp %0d", v, q_relu, e_relu);
    end
    if (longint'(q_lin) != e_lin) begin
      failures++;
      $display("lin mismatch d=%0d got %0d exp %0d", v, q_lin, e_lin);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic longint corners [] = '{0, 1, -1, 31, 32, 33, -31, -32, -33,
                           16383, 16384, 16415, 16416, -16384, -16385,
                           1048575, 1048576, -1048576, -1048577, -1048608,
                           (longint'(1) << 29) - 1, -(longint'(1) << 29)};
    foreach (corners[k]) try_value(corners[k]);
    for (int k = 0; k < 4000; k++) begin
      longint v;
      case (k % 3)
        0: v = longint'($signed($urandom_range(0, 65535))) - 32768;       // around the 10-bit range
        1: v = longint'($signed($urandom_range(0, 4194303))) - 2097152;   // around the 16-bit range
        default: v = longint'($signed(IN_W'($urandom())));                  // anywhere
      endcase
      try_value(v);
    end
    if (n_clip == 0)   begin failures++; $display("ReLU clipping never happened"); end
    if (n_sat_hi == 0) begin failures++; $display("positive saturation never happened"); end
    if (n_sat_lo == 0) begin failures++; $display("negative saturation never happened"); end
    $display("relu clips=%0d sat_hi=%0d sat_lo=%0d", n_clip, n_sat_hi, n_sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
