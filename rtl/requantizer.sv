// requantizer: rescales a 32-bit accumulator to an int8 output activation.
//
// Full-integer quantised inference multiplies the accumulator by the rescale
// factor M <= 1, held as a 32-bit integer, and shifts the 64-bit product
// right with rounding, then saturates to [-128, 127]. For ReLU layers the
// output zero point is -128 and is folded into the bias at compile time, so
// saturation at -128 is the ReLU itself; no separate activation logic is
// needed. Rounding is round-half-up (add 2^(shift-1) before an arithmetic
// shift); the rounding mode and the run-time shift amount are this design's
// choices, the paper only names "an 8-bit downshift with rounding and
// saturation".
//
// Interface and timing: `in_valid`/`acc`/`mult`/`shift` are registered into
// `out_valid`/`q` one cycle later. `sat_hi`/`sat_lo` flag a saturated result.
module requantizer (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [31:0] acc,
  input  logic signed [31:0] mult,
  input  logic [5:0]         shift,
  output logic               out_valid,
  output logic signed [7:0]  q,
  output logic               sat_hi,
  output logic               sat_lo
);
  logic signed [63:0] prod;
  logic signed [63:0] rounded;
  logic signed [63:0] shifted;
  logic signed [7:0]  q_d;
  logic               hi_d, lo_d;

  always_comb begin
    prod    = 64'(acc) * 64'(mult);
    rounded = (shift == 6'd0) ? prod : prod + (64'sd1 <<< (shift - 6'd1));
    shifted = rounded >>> shift;
    hi_d    = shifted > 64'sd127;
    lo_d    = shifted < -64'sd128;
    q_d     = hi_d ? 8'sd127 : (lo_d ? -8'sd128 : shifted[7:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      q         <= '0;
      sat_hi    <= 1'b0;
      sat_lo    <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        q      <= q_d;
        sat_hi <= hi_d;
        sat_lo <= lo_d;
      end
    end
  end
endmodule
