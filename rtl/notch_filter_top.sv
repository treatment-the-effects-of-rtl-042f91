// notch_filter_top: studio-noise filter, a cascade of two second-order IIR
// notch sections, H(z) = H1(z) * H2(z).
//
//   section 1 (u_sec_315):  zeros on the unit circle at +/-15.32 degrees
//                           (315 Hz at fs = 7.4 kHz, the wall resonance),
//                           poles at radius 0.99 on the same angles;
//   section 2 (u_sec_2500): zeros at +/-121.62 degrees (2500 Hz, the
//                           coincidence dip), poles at radius 0.99.
// Both sections are the same iir_section block with different coefficients,
// as in the published design. The 8-bit rounded output of section 1 is the
// input sample of section 2.
//
// Interface and timing: offer an 8-bit sample with in_valid high for one clock
// (any rate up to one sample per clock; the intended audio rate is 7.4 kHz).
// Section 1 registers it at that edge and its result is ready a cycle later;
// section 2 registers that result on the next edge, so out_valid pulses two
// clocks after in_valid. out_y is the 16-bit adder output y[n] of section 2
// (6 fraction bits), out_sample the same value rounded to an 8-bit sample;
// y1_acc is the 16-bit output of section 1, valid one clock after in_valid.
// The status outputs report, for the sample on the output, whether an adder
// saturated or an 8-bit rounding clipped in either section (section 1's flags
// are delayed one sample step to line up with the output).
// Synchronous active-low reset clears both delay lines.
module notch_filter_top
  import filter_pkg::*;
#(
  parameter int A1_S1 = A1_315,
  parameter int B1_S1 = B1_315,
  parameter int B2_S1 = B2_315,
  parameter int A1_S2 = A1_2500,
  parameter int B1_S2 = B1_2500,
  parameter int B2_S2 = B2_2500
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t in_sample,
  output logic    out_valid,
  output acc_t    out_y,
  output sample_t out_sample,
  output logic    overflow,   // an adder saturated (either section)
  output logic    clip,       // an 8-bit rounding saturated (either section)
  output acc_t    y1_acc      // y1[n], section 1 adder output (one step ahead of out_y)
);

  logic    s1_valid, s1_ovf, s1_clip;
  acc_t    s1_acc;
  sample_t s1_sample;
  logic    s2_ovf, s2_clip;
  logic    s1_ovf_q, s1_clip_q;

  iir_section #(.A1(A1_S1), .B1(B1_S1), .B2(B2_S1)) u_sec_315 (
    .clk, .rst_n,
    .in_valid  (in_valid),
    .in_sample (in_sample),
    .out_valid (s1_valid),
    .out_acc   (s1_acc),
    .out_sample(s1_sample),
    .overflow  (s1_ovf),
    .clip      (s1_clip)
  );

  iir_section #(.A1(A1_S2), .B1(B1_S2), .B2(B2_S2)) u_sec_2500 (
    .clk, .rst_n,
    .in_valid  (s1_valid),
    .in_sample (s1_sample),
    .out_valid (out_valid),
    .out_acc   (out_y),
    .out_sample(out_sample),
    .overflow  (s2_ovf),
    .clip      (s2_clip)
  );

  // Section 1's flags belong to the sample that section 2 takes in on the
  // same edge; hold them alongside it.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_ovf_q  <= 1'b0;
      s1_clip_q <= 1'b0;
    end else if (s1_valid) begin
      s1_ovf_q  <= s1_ovf;
      s1_clip_q <= s1_clip;
    end
  end

  assign overflow = s1_ovf_q  | s2_ovf;
  assign clip     = s1_clip_q | s2_clip;

  assign y1_acc = s1_acc;

endmodule
