// adder5: five-input, 16-bit saturating adder that forms one IIR output sample.
//
// The five terms of the section equation, x[n], a1*x[n-1], x[n-2], -b1*y[n-1]
// and -b2*y[n-2], all already in the accumulator format, are summed at full
// precision (DATA_W + 3 bits cannot overflow for five operands) and the result
// is clamped to the DATA_W-bit range. `overflow` is high in any cycle in which
// the clamp acted.
//
// A single 16-bit adder accumulating five inputs follows the published design.
// The design states that coefficient scaling keeps the adders free of overflow
// but does not say what happens if one occurs; saturating, rather than wrapping,
// is this design's choice, since a wrapped sum in a recursive filter with poles
// at radius 0.99 would ring for hundreds of samples.
//
// Purely combinational: sum and overflow follow the inputs in the same cycle.
module adder5 #(
  parameter int unsigned DATA_W = 16
) (
  input  logic signed [DATA_W-1:0] in0,
  input  logic signed [DATA_W-1:0] in1,
  input  logic signed [DATA_W-1:0] in2,
  input  logic signed [DATA_W-1:0] in3,
  input  logic signed [DATA_W-1:0] in4,
  output logic signed [DATA_W-1:0] sum,
  output logic                     overflow
);

  localparam int unsigned WIDE_W = DATA_W + 3;

  localparam logic signed [WIDE_W-1:0] MAX_V = WIDE_W'({1'b0, {(DATA_W-1){1'b1}}});
  localparam logic signed [WIDE_W-1:0] MIN_V = -MAX_V - WIDE_W'(1);

  logic signed [WIDE_W-1:0] wide;

  always_comb begin
    wide = WIDE_W'(in0) + WIDE_W'(in1) + WIDE_W'(in2) + WIDE_W'(in3) + WIDE_W'(in4);
    overflow = 1'b0;
    if (wide > MAX_V) begin
      sum      = {1'b0, {(DATA_W-1){1'b1}}};
      overflow = 1'b1;
    end else if (wide < MIN_V) begin
      sum      = {1'b1, {(DATA_W-1){1'b0}}};
      overflow = 1'b1;
    end else begin
      sum = wide[DATA_W-1:0];
    end
  end

endmodule
