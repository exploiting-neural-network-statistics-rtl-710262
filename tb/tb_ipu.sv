// tb_ipu: self-checking test of the inner-product unit.
//
// Random uint8 activations and random weights in [-127, 127] (split into sign
// and magnitude here) are streamed one word per cycle after an accumulator
// load with a random bias. The expected sum bias + sum(act * w) is computed
// with plain integer arithmetic. Checks: the result after every burst, the
// accumulator value two cycles after each single word (latency 2), one word
// accepted per cycle (a burst of n words is done n + 2 cycles after its
// first word), the extreme products 255 * -127 and 255 * 127, and a load
// that coincides with the last product of the previous burst.
module tb_ipu;
  localparam int L = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, acc_init, busy;
  logic [L-1:0][7:0] act;
  logic [L-1:0][6:0] wmag;
  logic [L-1:0] wsign;
  logic signed [31:0] init_value, acc;
  int checks = 0, failures = 0;
  longint expv;

  always #5 clk = ~clk;

  ipu #(.LANES(L)) dut (.clk, .rst_n, .in_valid, .act, .wmag, .wsign, .acc_init, .init_value, .acc, .busy);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input longint got, exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  // Drive one random word; return its dot product.
  function automatic longint drive_word(input int mode);
    longint s = 0;
    for (int l = 0; l < L; l++) begin
      int a, w;
      a = (mode == 1) ? 255 : $urandom_range(0, 255);
      w = (mode == 1) ? ((l % 2) ? 127 : -127) : int'($urandom_range(0, 254)) - 127;
      act[l]   = 8'(a);
      wsign[l] = (w < 0);
      wmag[l]  = 7'((w < 0) ? -w : w);
      s += longint'(a) * longint'(w);
    end
    return s;
  endfunction

  initial begin
    in_valid = 0; acc_init = 0; init_value = 0; act = '0; wmag = '0; wsign = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int burst = 0; burst < 40; burst++) begin
      int n, t0, t1;
      n = $urandom_range(1, 30);
      @(negedge clk);
      acc_init   = 1'b1;
      init_value = $signed($urandom_range(0, 200000)) - 100000;
      expv       = init_value;
      @(negedge clk);
      acc_init = 1'b0;
      t0 = $time / 10;
      for (int k = 0; k < n; k++) begin
        in_valid = 1'b1;
        expv += drive_word((burst == 3) ? 1 : 0);
        @(negedge clk);
      end
      in_valid = 1'b0;
      // the word issued last completes at the second edge after its cycle
      check(busy, 1, "busy while draining");
      @(negedge clk);
      check(busy, 0, "pipeline empty");
      check(acc, expv, "result two edges after the last word");
      @(negedge clk);
      t1 = $time / 10;
      check(acc, expv, "burst result");
      check(t1 - t0, n + 2, "cycles for burst");
    end
    // single words: accumulator steps with latency two
    @(negedge clk);
    acc_init = 1'b1; init_value = 32'sd7; expv = 7;
    @(negedge clk);
    acc_init = 1'b0;
    for (int k = 0; k < 10; k++) begin
      longint d;
      in_valid = 1'b1;
      d = drive_word(0);
      @(negedge clk);
      in_valid = 1'b0;
      check(acc, expv, "no update after one cycle");
      @(negedge clk);
      expv += d;
      check(acc, expv, "update after two cycles");
    end
    // load in the same cycle as the last product of a burst: product goes on top of the new value
    @(negedge clk);
    in_valid = 1'b1;
    expv = drive_word(0);
    @(negedge clk);
    in_valid = 1'b0;
    acc_init = 1'b1; init_value = 32'sd1000; expv += 1000;
    @(negedge clk);
    acc_init = 1'b0;
    check(acc, expv, "load merged with product");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
