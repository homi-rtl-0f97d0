// scale_shift_unit: maps a 16-bit representation value to an unsigned 8-bit
// pixel for the accelerator and the display path.
//
// out = min(255, (in * scale) >> shift), with an 8-bit scale and a 4-bit
// shift supplied by configuration. Purely combinational. The platform only
// states that the 16-bit value is brought to 8 bits by scaling and shifting;
// the operation order, field widths and saturation are this design's choice.
// With scale=1, shift=0 a binary frame (255) and a histogram count pass
// unchanged up to 255.
module scale_shift_unit (
  input  logic [15:0] in_val,
  input  logic [7:0]  scale,
  input  logic [3:0]  shift,
  output logic [7:0]  out_val
);
  logic [23:0] prod, shifted;
  always_comb begin
    prod    = in_val * scale;
    shifted = prod >> shift;
    out_val = (shifted > 24'd255) ? 8'd255 : shifted[7:0];
  end
endmodule
