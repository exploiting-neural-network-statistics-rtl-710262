// tcm: tightly coupled memory of a PE, a dual-ported SRAM written as an array.
//
// Each PE has one for weights and one for activations. Port A faces the PE,
// port B the cluster interconnect, so the next layer's parameters can be
// loaded while the PE computes; dual porting is also what makes the stored
// bit values matter for read energy (single-ended reads discharge the bit
// line only for one of the two values). The array holds words in the memory
// code; it does not interpret them.
//
// Interface and timing: per port, `en` with `we` = 0 reads `addr`, and the
// word appears on `rdata` after the next rising edge (one-cycle synchronous
// read). `en` with `we` = 1 writes the bytes of `wdata` whose `be` bit is set.
// Simultaneous writes of one address from both ports are not resolved
// (port B wins); reading a word in the cycle it is written returns the old
// word. Depth and byte enables are this design's choices.
module tcm #(
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned WORD_W = 64,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned NBE   = WORD_W / 8
) (
  input  logic              clk,
  // port A (PE side)
  input  logic              a_en,
  input  logic              a_we,
  input  logic [NBE-1:0]    a_be,
  input  logic [AW-1:0]     a_addr,
  input  logic [WORD_W-1:0] a_wdata,
  output logic [WORD_W-1:0] a_rdata,
  // port B (interconnect side)
  input  logic              b_en,
  input  logic              b_we,
  input  logic [NBE-1:0]    b_be,
  input  logic [AW-1:0]     b_addr,
  input  logic [WORD_W-1:0] b_wdata,
  output logic [WORD_W-1:0] b_rdata
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) begin
        for (int unsigned i = 0; i < NBE; i++)
          if (a_be[i]) mem[a_addr][i*8 +: 8] <= a_wdata[i*8 +: 8];
      end else begin
        a_rdata <= mem[a_addr];
      end
    end
    if (b_en) begin
      if (b_we) begin
        for (int unsigned i = 0; i < NBE; i++)
          if (b_be[i]) mem[b_addr][i*8 +: 8] <= b_wdata[i*8 +: 8];
      end else begin
        b_rdata <= mem[b_addr];
      end
    end
  end
endmodule
