// iir_section: one second-order IIR notch section, direct form I, built from
// lookup-table multipliers and a single five-input adder.
//
// Equation (a0 = a2 = 1, denominator 1 + b1 z^-1 + b2 z^-2):
//     y[n] = x[n] + a1*x[n-1] + x[n-2] - b1*y[n-1] - b2*y[n-2]
// Datapath:
//   * five clocked registers hold x[n], x[n-1], x[n-2], y[n-1], y[n-2], all as
//     8-bit samples;
//   * three lut_multiplier tables turn x[n-1], y[n-1] and y[n-2] into the
//     16-bit products a1*x[n-1], -b1*y[n-1] and -b2*y[n-2]; the tables of the
//     feedback terms hold the negated coefficient, so the adder only adds;
//   * x[n] and x[n-2] need no multiplier: they are shifted left by ACC_FRAC
//     into the accumulator format;
//   * adder5 sums the five terms into the 16-bit y[n] (saturating);
//   * y[n] is rounded to an 8-bit sample (half-up, saturating). That sample is
//     both the section output passed on to the next section and the value
//     stored in the y[n-1] register, because the feedback tables, like the
//     input table, are addressed by an 8-bit sample.
// The register set, the three tables, the single 5-input adder and the 8-bit
// table addresses follow the published design. The sign convention of the
// feedback terms follows the transfer function (the time-domain equation
// printed with it shows "+ b1 y[n-1] + b2 y[n-2]", which with the given b1, b2
// would place a pole outside the unit circle). Rounding, saturation, the
// sample strobe and the reset are this design's choices.
//
// Interface and timing: a sample is offered on in_sample with in_valid high for
// one clock. At that edge every register shifts by one sample (x[n] <= input,
// x[n-1] <= x[n], ..., y[n-1] <= rounded y[n] of the previous sample). The new
// y[n] is then combinational from the registers: out_valid is high for the one
// cycle after in_valid, and out_acc / out_sample / overflow / clip hold their
// value until the next in_valid. in_valid may be high every cycle, so the
// section accepts one sample per clock with a latency of one clock.
// Synchronous active-low reset clears the delay line.
module iir_section
  import filter_pkg::*;
#(
  parameter int A1 = A1_315,   // a1 * 2^15
  parameter int B1 = B1_315,   // b1 * 2^15
  parameter int B2 = B2_315    // b2 * 2^15
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t in_sample,
  output logic    out_valid,
  output acc_t    out_acc,      // y[n], 16-bit accumulator format
  output sample_t out_sample,   // y[n] rounded to an 8-bit sample
  output logic    overflow,     // the adder saturated for this y[n]
  output logic    clip          // rounding y[n] to 8 bits saturated
);

  // Delay line: clocked registers for x[n], x[n-1], x[n-2], y[n-1], y[n-2].
  sample_t x0, x1, x2, y1, y2;

  // Products from the lookup tables.
  acc_t p_a1, p_b1, p_b2;
  acc_t t_x0, t_x2;
  acc_t y_acc;

  lut_multiplier #(.COEF(A1))  u_lut_a1 (.sample(x1), .product(p_a1));
  lut_multiplier #(.COEF(-B1)) u_lut_b1 (.sample(y1), .product(p_b1));
  lut_multiplier #(.COEF(-B2)) u_lut_b2 (.sample(y2), .product(p_b2));

  assign t_x0 = acc_t'(x0) <<< ACC_FRAC;
  assign t_x2 = acc_t'(x2) <<< ACC_FRAC;

  adder5 #(.DATA_W(ACC_W)) u_adder (
    .in0(t_x0), .in1(p_a1), .in2(t_x2), .in3(p_b1), .in4(p_b2),
    .sum(y_acc), .overflow(overflow)
  );

  // Round y[n] to a sample: add half an LSB, shift, clamp to the sample range.
  localparam int unsigned RND_W = ACC_W + 1;
  localparam logic signed [RND_W-1:0] S_MAX = RND_W'((1 << (SAMPLE_W - 1)) - 1);
  localparam logic signed [RND_W-1:0] S_MIN = -S_MAX - RND_W'(1);

  logic signed [RND_W-1:0] rounded;
  sample_t                 y_sample;

  always_comb begin
    rounded = (RND_W'(y_acc) + RND_W'(1 << (ACC_FRAC - 1))) >>> ACC_FRAC;
    clip    = 1'b0;
    if (rounded > S_MAX) begin
      y_sample = sample_t'(S_MAX);
      clip     = 1'b1;
    end else if (rounded < S_MIN) begin
      y_sample = sample_t'(S_MIN);
      clip     = 1'b1;
    end else begin
      y_sample = rounded[SAMPLE_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x0 <= '0; x1 <= '0; x2 <= '0; y1 <= '0; y2 <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        x0 <= in_sample;
        x1 <= x0;
        x2 <= x1;
        y1 <= y_sample;
        y2 <= y1;
      end
    end
  end

  assign out_acc    = y_acc;
  assign out_sample = y_sample;

  // A result is announced exactly one cycle after each accepted sample.
  a_valid_follows : assert property (@(posedge clk) disable iff (!rst_n)
                                     in_valid |=> out_valid)
    else $error("out_valid missing one cycle after in_valid");
  a_valid_only_after_input : assert property (@(posedge clk) disable iff (!rst_n)
                                              !in_valid |=> !out_valid)
    else $error("out_valid without a preceding in_valid");

endmodule
