// tb_xor_decorrelator: self-checking test of xor_decorrelator, XOR and XNOR
// variants. A reference model keeps its own previous output word and
// computes y = prev ^ x (or its complement) for random words, random valid
// gaps and random restarts. It also checks the point of the code: for a
// stream of mostly zero words (XOR variant) the output toggles only where
// the input has 1-bits.
module tb_xor_decorrelator;
  localparam int W = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  logic valid, first;
  logic [W-1:0] x, y0, y1, m0, m1, e0, e1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  xor_decorrelator #(.WIDTH(W), .XNOR(1'b0)) dut0 (.clk, .rst_n, .valid, .first, .x, .y(y0));
  xor_decorrelator #(.WIDTH(W), .XNOR(1'b1)) dut1 (.clk, .rst_n, .valid, .first, .x, .y(y1));

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
    valid = 0; first = 0; x = '0; m0 = '0; m1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      valid = ($urandom_range(0, 3) != 0);
      first = ($urandom_range(0, 20) == 0);
      x = {$urandom, $urandom};
      if (i >= 200) x = x & {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      #1;
      e0 = (first ? '0 : m0) ^ x;
      e1 = ~((first ? '0 : m1) ^ x);
      check(y0, e0, "xor");
      check(y1, e1, "xnor");
      if (i >= 200 && !first) begin
        // transitions on the wire equal the 1-bits of the input
        check(y0 ^ m0, x, "xor transitions");
      end
      if (valid) begin m0 = e0; m1 = e1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
