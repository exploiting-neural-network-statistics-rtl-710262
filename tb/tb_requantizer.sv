// tb_requantizer: self-checking test of the rescale step.
//
// For random accumulators, rescale factors and shifts, the expected int8 is
// computed independently: the exact product, round half up (floor of
// (p + 2^(s-1)) / 2^s computed with division), then clamping to
// [-128, 127]. Latency one cycle and the saturation flags are checked, and
// both saturation directions are forced to occur.
module tb_requantizer;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, out_valid, sat_hi, sat_lo;
  logic signed [31:0] acc, mult;
  logic [5:0] shift;
  logic signed [7:0] q;
  int checks = 0, failures = 0, n_hi = 0, n_lo = 0;

  always #5 clk = ~clk;

  requantizer dut (.clk, .rst_n, .in_valid, .acc, .mult, .shift, .out_valid, .q, .sat_hi, .sat_lo);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint floor_div(input longint a, input longint b);
    longint r = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) r -= 1;
    return r;
  endfunction

  initial begin
    in_valid = 0; acc = 0; mult = 0; shift = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      longint p, r, e;
      int s;
      @(negedge clk);
      in_valid = 1'b1;
      acc   = $signed($urandom) >>> $urandom_range(0, 24);
      mult  = $signed({1'b0, $urandom_range(0, 32'h7fff_ffff) >> $urandom_range(0, 20)});
      s     = $urandom_range(20, 50);
      if (i < 50) begin acc = $signed($urandom_range(0, 400)) - 200; mult = 1; s = $urandom_range(0, 3); end
      shift = 6'(s);
      p = longint'(acc) * longint'(mult);
      r = (s == 0) ? p : floor_div(p + (longint'(1) <<< (s - 1)), longint'(1) <<< s);
      e = (r > 127) ? 127 : ((r < -128) ? -128 : r);
      @(negedge clk);
      in_valid = 1'b0;
      checks += 3;
      if (!out_valid) begin failures++; $display("FAIL no out_valid"); end
      if (longint'(q) != e) begin failures++; $display("FAIL acc=%0d m=%0d s=%0d q=%0d exp=%0d", acc, mult, s, q, e); end
      if (sat_hi != (r > 127) || sat_lo != (r < -128)) begin failures++; $display("FAIL sat flags"); end
      if (sat_hi) n_hi++;
      if (sat_lo) n_lo++;
    end
    checks += 2;
    if (n_hi == 0) begin failures++; $display("FAIL positive saturation never happened"); end
    if (n_lo == 0) begin failures++; $display("FAIL ReLU clip never happened"); end
    $display("saturations: high %0d, low %0d", n_hi, n_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
