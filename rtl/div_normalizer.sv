// div_normalizer: barrel-shift a wide divisor into the divider's 16 bits.
//
// The divider takes a 16-bit divisor, but F+B and (F+B)*W^2 can be much wider.
// If the value already fits in OUT_W bits it passes unchanged with shift 0.
// Otherwise it is shifted right so that its most significant one lands on bit
// OUT_W-1 and the shift count is reported; the caller shows the quotient
// together with that count, and q / 2**shift is the real ratio. OUT_W is 15
// for a signed divisor (bit 15 stays the sign bit) and 16 for an unsigned one.
// Purely combinational: a leading-one detector and a barrel shifter. The rule
// is the paper's; the zero-based bit numbering is this design's reading of it.
module div_normalizer #(
  parameter int unsigned IN_W  = 64,
  parameter int unsigned OUT_W = 15,
  localparam int unsigned SH_W = $clog2(IN_W + 1)
) (
  input  logic [IN_W-1:0]  value,
  output logic [OUT_W-1:0] scaled,
  output logic [SH_W-1:0]  shift
);
  logic [SH_W-1:0] msb_pos1;   // index of the leading one, plus one (0 if value is 0)

  always_comb begin
    msb_pos1 = '0;
    for (int b = 0; b < IN_W; b++) begin
      if (value[b]) msb_pos1 = SH_W'(b + 1);
    end
  end

  always_comb begin
    if (msb_pos1 > SH_W'(OUT_W)) shift = msb_pos1 - SH_W'(OUT_W);
    else                         shift = '0;
  end

  assign scaled = OUT_W'(value >> shift);
endmodule
