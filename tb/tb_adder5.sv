// tb_adder5: checks the five-input saturating adder.
//
// Random operands of several magnitudes plus directed extremes are applied;
// the expected sum is formed here in 64-bit arithmetic and clamped to 16
// bits, and the overflow flag is expected exactly when the clamp acts. The
// test also requires that both positive and negative saturation occurred.
module tb_adder5;

  int checks   = 0;
  int failures = 0;
  int n_pos_sat = 0, n_neg_sat = 0;

  logic signed [15:0] a [5];
  logic signed [15:0] sum;
  logic               overflow;

  adder5 dut (
    .in0(a[0]), .in1(a[1]), .in2(a[2]), .in3(a[3]), .in4(a[4]),
    .sum(sum), .overflow(overflow)
  );

  task automatic apply_and_check();
    longint w, e;
    logic   eo;
    #1;
    w = 0;
    for (int i = 0; i < 5; i++) w += longint'(a[i]);
    e  = w;
    eo = 1'b0;
    if (w > 32767)  begin e = 32767;  eo = 1'b1; n_pos_sat++; end
    if (w < -32768) begin e = -32768; eo = 1'b1; n_neg_sat++; end
    checks++;
    if (longint'(sum) != e || overflow != eo) begin
      failures++;
      $display("FAIL %0d %0d %0d %0d %0d: sum %0d ovf %0b, expected %0d %0b",
               a[0], a[1], a[2], a[3], a[4], sum, overflow, e, eo);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Directed extremes.
    for (int i = 0; i < 5; i++) a[i] = 16'sh7fff;
    apply_and_check();
    for (int i = 0; i < 5; i++) a[i] = -16'sh8000;
    apply_and_check();
    a = '{16'sd32767, 16'sd0, 16'sd0, 16'sd0, 16'sd0};  apply_and_check();
    a = '{16'sd32767, 16'sd1, 16'sd0, 16'sd0, 16'sd0};  apply_and_check();
    a = '{-16'sd32768, -16'sd1, 16'sd0, 16'sd0, 16'sd0}; apply_and_check();
    a = '{16'sd100, -16'sd50, 16'sd25, -16'sd12, 16'sd6}; apply_and_check();
    // Random operands: full range, and small enough to stay in range.
    for (int n = 0; n < 4000; n++) begin
      for (int i = 0; i < 5; i++) begin
        if (n % 2 == 0) a[i] = 16'($urandom);
        else            a[i] = 16'(signed'(12'($urandom)));
      end
      apply_and_check();
    end
    checks++;
    if (n_pos_sat == 0 || n_neg_sat == 0) begin
      failures++;
      $display("FAIL saturation not exercised: pos %0d neg %0d", n_pos_sat, n_neg_sat);
    end
    $display("positive saturations %0d, negative saturations %0d", n_pos_sat, n_neg_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
