// xor_decorrelator: converts a word stream from the bit-probability-optimised
// memory code to the switching-optimised bus code.
//
// Each bit is coded on its own: y = y_prev XOR x, so every 1-bit of the input
// becomes a transition on the output wire. With XNOR = 1 the gates are XNORs,
// y = ~(y_prev XOR x), so 0-bits become transitions instead; this is the
// variant for streams whose memory code favours 1-bits. Cost: WIDTH
// flip-flops and WIDTH X(N)OR gates, logic depth one (as in the paper).
//
// Interface: `valid` qualifies `x`; the register y_prev only advances on a
// valid word. `first` restarts the stream: the word is coded against the
// reset value (all zeros) instead of y_prev. The restart flag and the reset
// value are this design's choice; the paper gives only the coding equation.
// Timing: `y` is combinational in `x` (no latency); the state is updated at
// the rising clock edge.
module xor_decorrelator #(
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
  logic [WIDTH-1:0] y_prev;
  logic [WIDTH-1:0] ref_word;

  assign ref_word = first ? '0 : y_prev;
  assign y        = XNOR ? ~(ref_word ^ x) : (ref_word ^ x);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     y_prev <= '0;
    else if (valid) y_prev <= y;
  end
endmodule
