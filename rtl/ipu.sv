// ipu: inner-product unit of a PE, LANES multiply-accumulates per cycle on
// XOR-ZP coded activations (uint8) and sign-magnitude weights (uint7 + sign).
//
// Per lane, an unsigned 8x7 multiplier forms p = act * mag (uint15). The
// products and the weight signs are registered (the pipeline register in
// front of the adder tree). Then each product is XORed with its sign bit and
// the sign is prepended, giving the int16 word {s, p ^ {15{s}}}, which equals
// -p-1 for s = 1 and p for s = 0. The adder tree sums the LANES int16 words,
// the LANES sign bits (the "+1" that completes each two's-complement
// negation) and the 32-bit accumulator. This is the structure of the paper's
// uint8 x uint7 MAC and of its adder-tree inner-product unit.
//
// Because activations are processed as uint8 (zero point 0), the accumulator
// start value must hold the compile-time corrected bias; it is loaded with
// `acc_init`.
//
// Interface and timing: a word pair presented with `in_valid` in cycle t is
// multiplied in t, registered at the end of t, and added into `acc` at the
// end of t+1; one word per cycle, latency 2. `acc_init` in a cycle makes the
// accumulator restart from `init_value`, and a product leaving the pipeline
// register in that same cycle is added to `init_value` instead of `acc`.
// `busy` is high while a product is in the pipeline register.
module ipu #(
  parameter int unsigned LANES = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [LANES-1:0][7:0] act,      // uint8 activations
  input  logic [LANES-1:0][6:0] wmag,     // uint7 weight magnitudes
  input  logic [LANES-1:0]      wsign,    // weight signs
  input  logic                  acc_init,
  input  logic signed [31:0]    init_value,
  output logic signed [31:0]    acc,
  output logic                  busy
);
  logic [LANES-1:0][14:0] prod_d, prod_q;
  logic [LANES-1:0]       sign_q;
  logic                   valid_q;
  logic signed [31:0]     tree_sum;
  logic signed [31:0]     acc_base;

  // Multipliers.
  always_comb begin
    for (int unsigned l = 0; l < LANES; l++)
      prod_d[l] = 15'(act[l]) * 15'(wmag[l]);
  end

  // Product register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      prod_q  <= '0;
      sign_q  <= '0;
    end else begin
      valid_q <= in_valid;
      if (in_valid) begin
        prod_q <= prod_d;
        sign_q <= wsign;
      end
    end
  end

  // Sign XOR, concatenation and adder tree with the signs as carry inputs.
  always_comb begin
    tree_sum = '0;
    for (int unsigned l = 0; l < LANES; l++) begin
      tree_sum += 32'(signed'({sign_q[l], prod_q[l] ^ {15{sign_q[l]}}}));
      tree_sum += 32'(sign_q[l]);
    end
  end

  assign acc_base = acc_init ? init_value : acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  acc <= '0;
    else if (valid_q)            acc <= acc_base + tree_sum;
    else if (acc_init)           acc <= init_value;
  end

  assign busy = valid_q;
endmodule
