// xor_correlator: converts a word stream from the switching-optimised bus code
// back to the bit-probability-optimised memory code; the inverse of
// xor_decorrelator.
//
// Each bit is decoded on its own: y = x_prev XOR x, so a transition on the
// input wire becomes a 1-bit. With XNOR = 1, y = ~(x_prev XOR x), the inverse
// of the XNOR decorrelator. WIDTH flip-flops and WIDTH X(N)OR gates, logic
// depth one, as in the paper.
//
// Interface: `valid` qualifies `x`; x_prev only advances on a valid word.
// `first` decodes the word against the reset value (all zeros), matching the
// decorrelator's restart. Restart flag and reset value are this design's
// choice. Timing: `y` is combinational in `x`; state updates at the clock edge.
module xor_correlator #(
  parameter int unsigned WIDTH = 64,
  parameter bit          XNOR  = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,
  input  logic             first,
  input  logic [WIDTH-1:0] x,
  output logic [WIDTH-1:0] y
);
  logic [WIDTH-1:0] x_prev;
  logic [WIDTH-1:0] ref_word;

  assign ref_word = first ? '0 : x_prev;
  assign y        = XNOR ? ~(ref_word ^ x) : (ref_word ^ x);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     x_prev <= '0;
    else if (valid) x_prev <= x;
  end
endmodule
