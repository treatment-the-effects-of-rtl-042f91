// tb_iir_section: self-checking test of the IIR notch section in both of its
// configurations: `dut` with the default 315 Hz coefficients and `dut2500`
// with the 2500 Hz coefficients, driven by the same samples.
//
// A reference model kept in this file recomputes each output from the section
// equation, y = x[n] + a1 x[n-1] + x[n-2] - b1 y[n-1] - b2 y[n-2], with each
// product formed in floating point and rounded to the 16-bit word (6 fraction
// bits), the sum clamped to 16 bits and y rounded and clamped to 8 bits for the
// delay line. Every output is compared bit for bit, including the overflow and
// clip flags, and out_valid must appear exactly one clock after each in_valid.
// Phases:
//   1. random samples, one per clock;
//   2. random samples with random gaps between them;
//   3. a full-scale square wave at fs/4, which drives the adder into saturation
//      and the 8-bit rounding into clipping (both must happen);
//   4. 315, 1000 and 2500 Hz tones of amplitude 100 at fs = 7.4 kHz: each
//      section must leave under 15% of the input RMS at its own notch
//      frequency and pass at least 90% at 1000 Hz.
module tb_iir_section;
  import filter_pkg::*;

  int checks   = 0;
  int failures = 0;
  int n_ovf = 0, n_clip = 0;

  logic    clk = 1'b0;
  logic    rst_n;
  logic    in_valid;
  sample_t in_sample;
  logic    out_valid, overflow, clip;
  acc_t    out_acc;
  sample_t out_sample;

  iir_section dut (
    .clk, .rst_n, .in_valid, .in_sample,
    .out_valid, .out_acc, .out_sample, .overflow, .clip
  );

  logic    out_valid2, overflow2, clip2;
  acc_t    out_acc2;
  sample_t out_sample2;

  iir_section #(.A1(A1_2500), .B1(B1_2500), .B2(B2_2500)) dut2500 (
    .clk, .rst_n, .in_valid, .in_sample,
    .out_valid(out_valid2), .out_acc(out_acc2), .out_sample(out_sample2),
    .overflow(overflow2), .clip(clip2)
  );

  always #5 clk = ~clk;

  // ---------------- reference model ----------------
  // Index 0: 315 Hz section, index 1: 2500 Hz section.
  localparam int CA1 [2] = '{A1_315, A1_2500};
  localparam int CB1 [2] = '{B1_315, B1_2500};
  localparam int CB2 [2] = '{B2_315, B2_2500};
  int m_x0 [2], m_x1 [2], m_x2 [2], m_y1 [2], m_y2 [2];
  int e_acc [2], e_smp [2];
  bit e_ovf [2], e_clip [2];

  function automatic int prod(int coef, int smp);
    real r;
    r = $floor(real'(coef) * real'(smp) / 512.0 + 0.5);
    if (r > 32767.0)  r = 32767.0;
    if (r < -32768.0) r = -32768.0;
    return int'(r);
  endfunction

  task automatic model_step(int i, int x);
    int w, r;
    m_x2[i] = m_x1[i]; m_x1[i] = m_x0[i]; m_x0[i] = x;
    w = m_x0[i] * 64 + prod(CA1[i], m_x1[i]) + m_x2[i] * 64
      + prod(-CB1[i], m_y1[i]) + prod(-CB2[i], m_y2[i]);
    e_ovf[i] = (w > 32767) || (w < -32768);
    e_acc[i] = (w > 32767) ? 32767 : (w < -32768) ? -32768 : w;
    r = int'($floor(real'(e_acc[i]) / 64.0 + 0.5));
    e_clip[i] = (r > 127) || (r < -128);
    e_smp[i] = (r > 127) ? 127 : (r < -128) ? -128 : r;
    m_y2[i] = m_y1[i]; m_y1[i] = e_smp[i];
  endtask

  task automatic compare(int i, int x, logic v, acc_t acc, sample_t smp, logic ovf, logic clp);
    checks++;
    if (!v) begin
      failures++;
      $display("FAIL section %0d: out_valid not high one cycle after in_valid", i);
    end
    checks++;
    if (int'(acc) != e_acc[i] || int'(smp) != e_smp[i] || ovf != e_ovf[i] || clp != e_clip[i]) begin
      failures++;
      if (failures < 20)
        $display("FAIL section %0d x=%0d: acc %0d smp %0d ovf %0b clip %0b, expected %0d %0d %0b %0b",
                 i, x, acc, smp, ovf, clp, e_acc[i], e_smp[i], e_ovf[i], e_clip[i]);
    end
  endtask

  // ---------------- stimulus helpers ----------------
  real sum_sq [2];
  int  n_sq;

  // Offer one sample, then check the result in the next cycle.
  task automatic send(int x, bit measure = 1'b0);
    in_valid  <= 1'b1;
    in_sample <= sample_t'(x);
    @(posedge clk);
    in_valid  <= 1'b0;
    model_step(0, x);
    model_step(1, x);
    #1;
    compare(0, x, out_valid, out_acc, out_sample, overflow, clip);
    compare(1, x, out_valid2, out_acc2, out_sample2, overflow2, clip2);
    if (overflow) n_ovf++;
    if (clip)     n_clip++;
    if (measure) begin
      sum_sq[0] += real'(out_sample) * real'(out_sample);
      sum_sq[1] += real'(out_sample2) * real'(out_sample2);
      n_sq++;
    end
  endtask

  task automatic idle(int n);
    in_valid <= 1'b0;
    repeat (n) begin
      @(posedge clk);
      #1;
      checks++;
      if (out_valid || out_valid2) begin
        failures++;
        $display("FAIL out_valid high without input");
      end
    end
  endtask

  task automatic restart();
    rst_n    <= 1'b0;
    in_valid <= 1'b0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 2; i++) begin
      m_x0[i] = 0; m_x1[i] = 0; m_x2[i] = 0; m_y1[i] = 0; m_y2[i] = 0;
    end
    @(negedge clk);
  endtask

  function automatic int tone(real f, int n, real amp);
    return int'($floor(amp * $sin(2.0 * 3.14159265358979 * f * real'(n) / 7400.0) + 0.5));
  endfunction

  // RMS of both sections' outputs for one tone; rms[0] 315 Hz, rms[1] 2500 Hz section.
  task automatic tone_rms(real f, output real rms [2]);
    restart();
    sum_sq[0] = 0.0; sum_sq[1] = 0.0; n_sq = 0;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      send(tone(f, n, 100.0), n >= 3000);
    end
    for (int i = 0; i < 2; i++) rms[i] = $sqrt(sum_sq[i] / real'(n_sq));
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real rms_315 [2], rms_1k [2], rms_2500 [2], ref_rms;
    in_sample = '0;
    restart();
    // 1. back-to-back random samples
    for (int n = 0; n < 3000; n++) send(int'(signed'(8'($urandom))));
    // 2. random gaps
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      send(int'(signed'(6'($urandom))));
      idle($urandom_range(0, 3));
    end
    // 3. full-scale square wave at fs/4
    restart();
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      send((((n / 2) % 2) != 0) ? 127 : -128);
    end
    checks++;
    if (n_ovf == 0 || n_clip == 0) begin
      failures++;
      $display("FAIL saturation not exercised: overflow %0d clip %0d", n_ovf, n_clip);
    end
    // 4. notch depth
    ref_rms = 100.0 / $sqrt(2.0);
    tone_rms(315.0, rms_315);
    tone_rms(1000.0, rms_1k);
    tone_rms(2500.0, rms_2500);
    $display("RMS in %0.2f; 315 Hz section out at 315/1000/2500 Hz: %0.2f %0.2f %0.2f",
             ref_rms, rms_315[0], rms_1k[0], rms_2500[0]);
    $display("RMS in %0.2f; 2500 Hz section out at 315/1000/2500 Hz: %0.2f %0.2f %0.2f",
             ref_rms, rms_315[1], rms_1k[1], rms_2500[1]);
    checks++;
    if (rms_315[0] > 0.15 * ref_rms) begin failures++; $display("FAIL 315 Hz not rejected");  end
    checks++;
    if (rms_2500[1] > 0.15 * ref_rms) begin failures++; $display("FAIL 2500 Hz not rejected"); end
    checks++;
    if (rms_2500[0] < 0.90 * ref_rms || rms_315[1] < 0.90 * ref_rms) begin
      failures++;
      $display("FAIL a section rejects the other section's notch frequency");
    end
    for (int i = 0; i < 2; i++) begin
      checks++;
      if (rms_1k[i] < 0.90 * ref_rms) begin
        failures++;
        $display("FAIL section %0d does not pass 1000 Hz", i);
      end
    end
    $display("adder overflows %0d, clips %0d", n_ovf, n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
