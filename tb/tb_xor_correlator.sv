// tb_xor_correlator: self-checking test of xor_correlator, XOR and XNOR
// variants. Random memory-code words are encoded by a behavioural
// decorrelator written in this testbench; the correlator must return the
// original words, including across valid gaps and restarts on `first`.
module tb_xor_correlator;
  localparam int W = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  logic valid, first;
  logic [W-1:0] data, x0, x1, y0, y1, s0, s1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  xor_correlator #(.WIDTH(W), .XNOR(1'b0)) dut0 (.clk, .rst_n, .valid, .first, .x(x0), .y(y0));
  xor_correlator #(.WIDTH(W), .XNOR(1'b1)) dut1 (.clk, .rst_n, .valid, .first, .x(x1), .y(y1));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [W-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    valid = 0; first = 0; x0 = '0; x1 = '0; s0 = '0; s1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      valid = ($urandom_range(0, 3) != 0);
      first = ($urandom_range(0, 20) == 0);
      data  = {$urandom, $urandom};
      // behavioural decorrelators (encoders) of the two variants
      x0 = (first ? '0 : s0) ^ data;
      x1 = ~((first ? '0 : s1) ^ data);
      #1;
      if (valid) begin
        check(y0, data, "xor");
        check(y1, data, "xnor");
        s0 = x0; s1 = x1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
