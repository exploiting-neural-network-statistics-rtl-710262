// sm_weight_decoder: the weight de-coder between the weight TCM and the PE.
//
// Weights are quantised symmetrically to [-127, 127] and stored, after
// compile-time encoding, in sign-magnitude (SM): bit 7 is the sign, bits 6..0
// the magnitude. -128 never occurs, so SM costs no extra bit. The MAC works on
// SM directly (unsigned 7-bit magnitude, sign applied in the adder), so no
// conversion back to two's complement is needed: this block only splits each
// byte into sign and magnitude. With ONES = 1 the memory holds the whole
// sign-magnitude byte inverted, so that pruned, mostly-zero weights (0x00)
// read as 0xFF, all 1-bits, from a single-ended-read SRAM, and so that the
// XNOR decorrelator on the interconnect sees them as "no transition" in every
// bit including the sign; the decoder inverts the byte back. (Inverting the
// sign as well is this design's choice: an XNOR-MSB style code that left the
// sign alone would make the sign wire toggle on every pruned weight.)
//
// Interface: `word` is one TCM word of LANES stored weights; `sign[l]` and
// `mag[l]` are lane l's sign and magnitude. Combinational, logic depth one.
module sm_weight_decoder #(
  parameter int unsigned LANES = 8,
  parameter bit          ONES  = 1'b1
) (
  input  logic [LANES*8-1:0]    word,
  output logic [LANES-1:0]      sign,
  output logic [LANES-1:0][6:0] mag
);
  always_comb begin
    for (int unsigned l = 0; l < LANES; l++) begin
      sign[l] = ONES ? ~word[l*8 + 7] : word[l*8 + 7];
      mag[l]  = ONES ? ~word[l*8 +: 7] : word[l*8 +: 7];
    end
  end
endmodule
