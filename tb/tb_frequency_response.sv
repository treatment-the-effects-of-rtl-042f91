// tb_frequency_response: measures the magnitude response of the complete
// two-notch filter (default coefficients) with sine inputs, over the band
// f/fs = 0.03 ... 0.35 in steps of 0.01 (222 Hz ... 2590 Hz at fs = 7.4 kHz)
// plus the two notch frequencies, 315 Hz and 2500 Hz.
//
// Each point drives a fresh (reset) filter with 3000 samples of a tone of
// amplitude 100 at one sample per clock and measures the output RMS over the
// last 1500 samples. The gain in dB is printed for every point. Checks:
//   * at 315 Hz and 2500 Hz the gain is below -18 dB;
//   * at every point more than 80 Hz from both notches the gain is within
//     +/-1 dB (the a0 = a2 = 1 simplification raises it slightly above 0 dB);
//   * out_valid pulses once per input sample, two clocks after it.
module tb_frequency_response;
  import filter_pkg::*;

  int checks   = 0;
  int failures = 0;

  logic    clk = 1'b0;
  logic    rst_n;
  logic    in_valid;
  sample_t in_sample;
  logic    out_valid, overflow, clip;
  acc_t    out_y, y1_acc;
  sample_t out_sample;

  notch_filter_top dut (
    .clk, .rst_n, .in_valid, .in_sample,
    .out_valid, .out_y, .out_sample, .overflow, .clip, .y1_acc
  );

  always #5 clk = ~clk;

  localparam real PI = 3.14159265358979;
  localparam real FS = 7400.0;
  localparam int  NS = 3000;

  // Output samples collected while a tone is applied.
  int  n_out;
  real sum_sq;
  logic v_d1, v_d2;

  always @(posedge clk) begin
    v_d1 <= in_valid;
    v_d2 <= v_d1;
    if (rst_n) begin
      if (out_valid !== v_d2) begin
        checks++;
        failures++;
        $display("FAIL out_valid %0b, expected %0b", out_valid, v_d2);
      end
      if (out_valid) begin
        if (n_out >= NS / 2) sum_sq += real'(out_sample) * real'(out_sample);
        n_out++;
      end
    end
  end

  task automatic measure(real f, output real gain_db);
    real rms;
    @(negedge clk);
    rst_n = 1'b0; in_valid = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    n_out = 0; sum_sq = 0.0;
    for (int n = 0; n < NS; n++) begin
      in_valid  = 1'b1;
      in_sample = sample_t'(int'($floor(100.0 * $sin(2.0 * PI * f * real'(n) / FS) + 0.5)));
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (n_out != NS) begin
      failures++;
      $display("FAIL %0d outputs for %0d inputs", n_out, NS);
    end
    rms = $sqrt(sum_sq / real'(NS - NS / 2));
    if (rms < 1.0e-3) rms = 1.0e-3;
    gain_db = 20.0 * $log10(rms / (100.0 / $sqrt(2.0)));
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real g, f;
    v_d1 = 1'b0; v_d2 = 1'b0;
    rst_n = 1'b0; in_valid = 1'b0; in_sample = '0;
    for (int k = 3; k <= 35; k++) begin
      f = real'(k) * 0.01 * FS;
      measure(f, g);
      $display("f/fs %0.3f  %7.1f Hz  gain %6.2f dB", f / FS, f, g);
      if ((f < 235.0 || f > 395.0) && (f < 2420.0 || f > 2580.0)) begin
        checks++;
        if (g > 1.0 || g < -1.0) begin
          failures++;
          $display("FAIL passband gain %0.2f dB at %0.1f Hz", g, f);
        end
      end
    end
    measure(315.0, g);
    $display("notch  315.0 Hz  gain %6.2f dB", g);
    checks++;
    if (g > -18.0) begin failures++; $display("FAIL 315 Hz notch only %0.2f dB", g); end
    measure(2500.0, g);
    $display("notch 2500.0 Hz  gain %6.2f dB", g);
    checks++;
    if (g > -18.0) begin failures++; $display("FAIL 2500 Hz notch only %0.2f dB", g); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
