// act_zp_codec: XOR-ZP coding of ReLU activations, for LANES byte lanes.
//
// ReLU activations quantised to int8 have the zero point -128 (0x80), and half
// or more of them equal it. XORing every byte with the zero point maps the
// int8 value q to the uint8 value u = q + 128, in which the common value is
// 0x00: only the MSB gate is needed. With ONES = 1 the byte is XNORed with the
// zero point instead (XOR with 0x7F), giving ~u, in which the common value is
// 0xFF; this suits single-ended SRAM reads, which spend energy on 0-bits.
//
// The operation is an involution, so the same module encodes (PE output to
// A TCM) and decodes. Two lanes are offered: `enc_in` (int8 from the
// requantiser) to `enc_out` (memory code), and `dec_in` (memory code from the
// A TCM) to `dec_out` (uint8 for the MAC, which works on the encoded value
// directly). Purely combinational, logic depth one.
module act_zp_codec #(
  parameter int unsigned LANES = 8,
  parameter logic [7:0]  ZP    = 8'h80,
  parameter bit          ONES  = 1'b1
) (
  input  logic [LANES*8-1:0] enc_in,   // int8 activations, two's complement
  output logic [LANES*8-1:0] enc_out,  // memory code
  input  logic [LANES*8-1:0] dec_in,   // memory code
  output logic [LANES*8-1:0] dec_out   // uint8 activations (zero point 0)
);
  localparam logic [7:0] MASK_ENC = ONES ? ~ZP : ZP;  // int8 -> memory code
  localparam logic [7:0] MASK_DEC = ONES ? 8'hFF : 8'h00; // memory code -> uint8

  always_comb begin
    for (int unsigned l = 0; l < LANES; l++) begin
      enc_out[l*8 +: 8] = enc_in[l*8 +: 8] ^ MASK_ENC;
      dec_out[l*8 +: 8] = dec_in[l*8 +: 8] ^ MASK_DEC;
    end
  end
endmodule
