// tb_lut_multiplier: exhaustive check of the lookup-table multiplier.
//
// Four tables are built, for a1 of both notch sections and for the negated b1
// and b2 of the 315 Hz section (the feedback tables). Every one of the 256
// sample addresses is applied and the product compared with
// floor(coef * s / 512 + 0.5), computed here in floating point and clamped to
// 16 bits, plus a handful of hand-worked corner values.
module tb_lut_multiplier;
  import filter_pkg::*;

  int checks   = 0;
  int failures = 0;

  localparam int NT = 4;
  localparam int COEFS [NT] = '{A1_315, -B1_315, -B2_315, A1_2500};

  logic signed [7:0]  s;
  logic signed [15:0] p [NT];

  lut_multiplier #(.COEF(COEFS[0])) u0 (.sample(s), .product(p[0]));
  lut_multiplier #(.COEF(COEFS[1])) u1 (.sample(s), .product(p[1]));
  lut_multiplier #(.COEF(COEFS[2])) u2 (.sample(s), .product(p[2]));
  lut_multiplier #(.COEF(COEFS[3])) u3 (.sample(s), .product(p[3]));

  function automatic int expected(int coef, int smp);
    real r;
    int  e;
    r = $floor(real'(coef) * real'(smp) / 512.0 + 0.5);
    e = int'(r);
    if (e > 32767)  e = 32767;
    if (e < -32768) e = -32768;
    return e;
  endfunction

  task automatic check(int idx, int exp_v);
    checks++;
    if (int'(p[idx]) != exp_v) begin
      failures++;
      $display("FAIL table %0d sample %0d: got %0d expected %0d", idx, s, p[idx], exp_v);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -128; v < 128; v++) begin
      s = 8'(v);
      #1;
      for (int t = 0; t < NT; t++) check(t, expected(COEFS[t], v));
    end
    // Hand-worked values: -1.92889404296875 * 127 * 64 = -15678.30 -> -15678
    s = 8'sd127;  #1; check(0, -15678);
    // -1.92889404296875 * -128 * 64 = 15801.5 -> rounds half up to 15802
    s = -8'sd128; #1; check(0, 15802);
    // -(-1.90960693359375) * 100 * 64 = 12221.48 -> 12221
    s = 8'sd100;  #1; check(1, 12221);
    // -0.980072021484375 * -1 * 64 = 62.72 -> 63
    s = -8'sd1;   #1; check(2, 63);
    // 1.04861450195312 * 0 = 0
    s = 8'sd0;    #1; check(3, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
