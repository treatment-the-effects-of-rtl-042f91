// lut_multiplier: constant-coefficient multiplier built as a lookup table.
//
// The 8-bit signed sample is used as the address of a 256-word read-only table
// whose entry for sample s is the product COEF * s, already aligned to the
// accumulator format:
//     table[s] = round(COEF * s / 2^(COEF_FRAC - ACC_FRAC)), saturated to DATA_W
// where COEF is the coefficient scaled by 2^COEF_FRAC. Rounding is half-up
// (add half an LSB, then arithmetic shift right). The table is computed at
// elaboration from COEF, so one module serves every coefficient.
//
// Replacing each 8x16 multiplier by a table addressed by the sample follows the
// published design, which places these tables in a memory next to the FPGA. The
// table is written here as a constant array with a combinational read (an
// asynchronous ROM); the output alignment and rounding are this design's choice.
//
// Interface: sample (address) in, product out, no clock; the product is valid in
// the same cycle as the sample.
module lut_multiplier
  import filter_pkg::*;
#(
  parameter int          COEF      = A1_315,          // coefficient * 2^COEF_FRAC
  parameter int unsigned ADDR_W    = SAMPLE_W,        // sample bits = address bits
  parameter int unsigned DATA_W    = ACC_W,           // product word
  parameter int unsigned SHIFT     = COEF_FRAC - ACC_FRAC
) (
  input  logic signed [ADDR_W-1:0] sample,
  output logic signed [DATA_W-1:0] product
);

  localparam int unsigned DEPTH = 2 ** ADDR_W;

  typedef logic signed [DATA_W-1:0] rom_t [DEPTH];

  // Entry i holds the product for the sample whose bit pattern is i.
  function automatic rom_t build_rom();
    rom_t        rom;
    longint      s, p, lim_hi, lim_lo;
    lim_hi = (longint'(1) <<< (DATA_W - 1)) - 1;
    lim_lo = -(longint'(1) <<< (DATA_W - 1));
    for (int i = 0; i < DEPTH; i++) begin
      s = (i >= DEPTH / 2) ? longint'(i) - longint'(DEPTH) : longint'(i);
      p = longint'(COEF) * s;
      if (SHIFT > 0) p = (p + (longint'(1) <<< (SHIFT - 1))) >>> SHIFT;
      if (p > lim_hi) p = lim_hi;
      if (p < lim_lo) p = lim_lo;
      rom[i] = DATA_W'(p);
    end
    return rom;
  endfunction

  localparam rom_t ROM = build_rom();

  assign product = ROM[unsigned'(sample)];

endmodule
