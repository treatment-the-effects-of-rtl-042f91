// tb_notch_filter_top: end-to-end test of the two-section notch filter at its
// default (published) coefficients.
//
// A reference model of both sections, kept in this file, predicts every output
// word bit for bit (16-bit y[n], 8-bit sample, overflow and clip flags), and
// out_valid must follow in_valid by exactly two clocks. Phases:
//   1. random samples at one per clock (full throughput);
//   2. random samples with idle gaps between them (sample strobe at a low rate);
//   3. a full-scale square wave at fs/4 (adder saturation and 8-bit clipping);
//   4. a reset in the middle of a stream;
//   5. pure tones at 315, 1000 and 2500 Hz, fs = 7.4 kHz: output RMS must be
//      under 15% of the input RMS at both notch frequencies and above 90% at
//      1000 Hz;
//   6. a noisy-speech stand-in: four voice-band tones (180, 720, 1260,
//      1800 Hz) plus interfering tones at 315 Hz and 2500 Hz. The DFT
//      magnitude of each interfering tone must drop at least fivefold (14 dB;
//      the 8-bit rounding of the fed-back y[n] limits the depth) while the
//      voice-band tones stay within 15% of their input level.
// Every mechanism (back-to-back samples, gaps, adder overflow, clipping, reset)
// is counted and must occur at least once.
module tb_notch_filter_top;
  import filter_pkg::*;

  int checks   = 0;
  int failures = 0;
  int n_b2b = 0, n_gap = 0, n_ovf = 0, n_clip = 0, n_reset = 0;

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

  // ---------------- reference model ----------------
  typedef struct {
    int a1, b1, b2;
    int x0, x1, x2, y1, y2;
  } sec_t;

  sec_t s1, s2;
  int   e_y, e_smp;
  bit   e_ovf, e_clip;

  function automatic int prod(int coef, int smp);
    real r;
    r = $floor(real'(coef) * real'(smp) / 512.0 + 0.5);
    if (r > 32767.0)  r = 32767.0;
    if (r < -32768.0) r = -32768.0;
    return int'(r);
  endfunction

  // One sample through one section: returns the 16-bit word and the 8-bit sample.
  task automatic sec_step(inout sec_t s, input int x, output int acc, output int smp,
                          output bit ovf, output bit clp);
    int w, r;
    s.x2 = s.x1; s.x1 = s.x0; s.x0 = x;
    w = s.x0 * 64 + prod(s.a1, s.x1) + s.x2 * 64 + prod(-s.b1, s.y1) + prod(-s.b2, s.y2);
    ovf = (w > 32767) || (w < -32768);
    acc = (w > 32767) ? 32767 : (w < -32768) ? -32768 : w;
    r   = int'($floor(real'(acc) / 64.0 + 0.5));
    clp = (r > 127) || (r < -128);
    smp = (r > 127) ? 127 : (r < -128) ? -128 : r;
    s.y2 = s.y1; s.y1 = smp;
  endtask

  task automatic model_reset();
    s1 = '{a1: A1_315,  b1: B1_315,  b2: B2_315,  default: 0};
    s2 = '{a1: A1_2500, b1: B1_2500, b2: B2_2500, default: 0};
  endtask

  // Expected outputs queued per accepted sample, consumed when out_valid rises.
  int exp_y[$], exp_s[$];
  bit exp_o[$], exp_c[$];
  int issue_t[$];
  int cycle = 0;
  int out_log[$];
  bit logging = 1'b0;

  task automatic model_push(int x);
    int a1v, sm1, a2v, sm2;
    bit o1, c1, o2, c2;
    sec_step(s1, x, a1v, sm1, o1, c1);
    sec_step(s2, sm1, a2v, sm2, o2, c2);
    exp_y.push_back(a2v);
    exp_s.push_back(sm2);
    exp_o.push_back(o1 | o2);
    exp_c.push_back(c1 | c2);
  endtask

  always @(posedge clk) cycle <= cycle + 1;

  // Output checker.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_y.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        int ey, es, it;
        bit eo, ec;
        ey = exp_y.pop_front(); es = exp_s.pop_front();
        eo = exp_o.pop_front(); ec = exp_c.pop_front();
        it = issue_t.pop_front();
        if (int'(out_y) != ey || int'(out_sample) != es || overflow != eo || clip != ec) begin
          failures++;
          if (failures < 20)
            $display("FAIL out y %0d smp %0d ovf %0b clip %0b, expected %0d %0d %0b %0b",
                     out_y, out_sample, overflow, clip, ey, es, eo, ec);
        end
        checks++;
        if (cycle - it != 2) begin
          failures++;
          $display("FAIL latency %0d clocks, expected 2", cycle - it);
        end
        if (overflow) n_ovf++;
        if (clip)     n_clip++;
        if (logging)  out_log.push_back(int'(out_sample));
      end
    end
  end

  bit last_valid = 1'b0;

  task automatic send(int x);
    @(negedge clk);
    if (last_valid) n_b2b++;
    in_valid  = 1'b1;
    in_sample = sample_t'(x);
    issue_t.push_back(cycle);
    model_push(int'(sample_t'(x)));
    last_valid = 1'b1;
  endtask

  task automatic idle(int n);
    repeat (n) begin
      @(negedge clk);
      in_valid   = 1'b0;
      last_valid = 1'b0;
    end
  endtask

  task automatic drain();
    idle(4);
    checks++;
    if (exp_y.size() != 0) begin
      failures++;
      $display("FAIL %0d outputs missing", exp_y.size());
      exp_y.delete(); exp_s.delete(); exp_o.delete(); exp_c.delete(); issue_t.delete();
    end
  endtask

  task automatic do_reset();
    @(negedge clk);
    rst_n = 1'b0; in_valid = 1'b0; last_valid = 1'b0;
    exp_y.delete(); exp_s.delete(); exp_o.delete(); exp_c.delete(); issue_t.delete();
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    model_reset();
    n_reset++;
  endtask

  localparam real PI = 3.14159265358979;
  localparam real FS = 7400.0;

  function automatic real sinf(real f, int n);
    return $sin(2.0 * PI * f * real'(n) / FS);
  endfunction

  // Magnitude of the DFT of v at frequency f, normalised to tone amplitude.
  function automatic real dft_mag(int v[$], int start, real f);
    real re = 0.0, im = 0.0;
    int  n  = v.size() - start;
    for (int k = start; k < v.size(); k++) begin
      re += real'(v[k]) * $cos(2.0 * PI * f * real'(k) / FS);
      im += real'(v[k]) * $sin(2.0 * PI * f * real'(k) / FS);
    end
    return 2.0 * $sqrt(re * re + im * im) / real'(n);
  endfunction

  task automatic run_tone(real f, output real rms);
    real acc = 0.0;
    int  cnt = 0;
    do_reset();
    out_log.delete();
    logging = 1'b1;
    for (int n = 0; n < 6000; n++) send(int'($floor(100.0 * sinf(f, n) + 0.5)));
    drain();
    logging = 1'b0;
    for (int k = 3000; k < out_log.size(); k++) begin
      acc += real'(out_log[k]) * real'(out_log[k]);
      cnt++;
    end
    rms = $sqrt(acc / real'(cnt));
  endtask

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NF = 6;
  localparam real FREQ [NF] = '{180.0, 720.0, 1260.0, 1800.0, 315.0, 2500.0};
  localparam real AMP  [NF] = '{15.0, 15.0, 15.0, 15.0, 30.0, 30.0};

  initial begin
    real rms_315, rms_1k, rms_2500, ref_rms, mag_in, mag_out, v;
    int  in_log[$];
    rst_n = 1'b0; in_valid = 1'b0; in_sample = '0;
    do_reset();

    // 1. full throughput
    for (int n = 0; n < 2000; n++) send(int'(signed'(8'($urandom))));
    // 2. gaps
    for (int n = 0; n < 1000; n++) begin
      send(int'(signed'(7'($urandom))));
      idle($urandom_range(1, 4));
      n_gap++;
    end
    drain();
    // 3. full-scale square wave at fs/4
    for (int n = 0; n < 400; n++) send((((n / 2) % 2) != 0) ? 127 : -128);
    drain();
    // 4. reset in mid-stream, then more random data
    for (int n = 0; n < 50; n++) send(int'(signed'(8'($urandom))));
    do_reset();
    for (int n = 0; n < 500; n++) send(int'(signed'(8'($urandom))));
    drain();

    // 5. notch depth on pure tones
    ref_rms = 100.0 / $sqrt(2.0);
    run_tone(315.0, rms_315);
    run_tone(1000.0, rms_1k);
    run_tone(2500.0, rms_2500);
    $display("tone RMS in %0.2f out: 315 Hz %0.2f, 1000 Hz %0.2f, 2500 Hz %0.2f",
             ref_rms, rms_315, rms_1k, rms_2500);
    checks++;
    if (rms_315 > 0.15 * ref_rms)  begin failures++; $display("FAIL 315 Hz not rejected");  end
    checks++;
    if (rms_2500 > 0.15 * ref_rms) begin failures++; $display("FAIL 2500 Hz not rejected"); end
    checks++;
    if (rms_1k < 0.90 * ref_rms)   begin failures++; $display("FAIL 1000 Hz not passed");   end

    // 6. noisy-speech stand-in
    do_reset();
    out_log.delete();
    logging = 1'b1;
    for (int n = 0; n < 7400; n++) begin
      v = 0.0;
      for (int k = 0; k < NF; k++) v += AMP[k] * sinf(FREQ[k], n);
      in_log.push_back(int'($floor(v + 0.5)));
      send(in_log[n]);
    end
    drain();
    logging = 1'b0;
    for (int k = 0; k < NF; k++) begin
      mag_in  = dft_mag(in_log, 3700, FREQ[k]);
      mag_out = dft_mag(out_log, 3700, FREQ[k]);
      $display("speech test %6.1f Hz: in %6.2f out %6.2f", FREQ[k], mag_in, mag_out);
      checks++;
      if (k >= 4) begin
        if (mag_out > 0.2 * mag_in) begin
          failures++;
          $display("FAIL interfering tone at %0.1f Hz not removed", FREQ[k]);
        end
      end else if (mag_out < 0.85 * mag_in || mag_out > 1.15 * mag_in) begin
        failures++;
        $display("FAIL voice-band tone at %0.1f Hz altered", FREQ[k]);
      end
    end

    // Every mechanism must have been exercised.
    $display("back-to-back %0d, gaps %0d, overflows %0d, clips %0d, resets %0d",
             n_b2b, n_gap, n_ovf, n_clip, n_reset);
    checks++; if (n_b2b   == 0) begin failures++; $display("FAIL no back-to-back samples"); end
    checks++; if (n_gap   == 0) begin failures++; $display("FAIL no gaps");                 end
    checks++; if (n_ovf   == 0) begin failures++; $display("FAIL no adder overflow");       end
    checks++; if (n_clip  == 0) begin failures++; $display("FAIL no 8-bit clipping");       end
    checks++; if (n_reset <  2) begin failures++; $display("FAIL no mid-stream reset");     end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
