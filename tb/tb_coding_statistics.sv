// tb_coding_statistics: bit-level statistics of the engine's codes on
// synthetic weight and activation streams.
//
// Real network parameters are not available to a self-contained testbench,
// so the streams are generated with the shapes that 8-bit quantised networks
// show: weights from a Laplacian (leptokurtic, zero mean, clipped to
// [-127, 127]), the same weights with 80 % pruned to zero, and ReLU
// activations of which about half equal the zero point -128 and the rest
// decay exponentially above it. Each stream passes through the RTL coders
// with the 1-bit minimising polarity (XOR-ZP encoder for activations,
// behavioural sign-magnitude encoder for weights, then the XOR decorrelator),
// and back (correlator, sign-magnitude decoder, XOR-ZP decoder); every value
// must come back unchanged. For every stream the expected sum over the 8 bits
// of the 1-bit probability and of the toggle probability is measured for
// plain two's complement, for the probability code alone, and for the
// probability code plus decorrelator. Checks: the probability code lowers
// the 1-bit probability, the decorrelator lowers switching below the plain
// stream, and the codes never lose a value.
module tb_coding_statistics;
  localparam int N = 20000;
  logic clk = 1'b0, rst_n = 1'b0;
  logic valid, first;
  logic [7:0] pcode, bus, back, sm_word;
  logic [7:0] act_in, act_code, act_back;
  logic [0:0] sgn;
  logic [0:0][6:0] mag;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  xor_decorrelator #(.WIDTH(8), .XNOR(1'b0)) u_dec (.clk, .rst_n, .valid, .first, .x(pcode), .y(bus));
  xor_correlator   #(.WIDTH(8), .XNOR(1'b0)) u_cor (.clk, .rst_n, .valid, .first, .x(bus), .y(back));
  sm_weight_decoder #(.LANES(1), .ONES(1'b0)) u_wdec (.word(back), .sign(sgn), .mag(mag));
  act_zp_codec #(.LANES(1), .ONES(1'b0)) u_aenc (.enc_in(act_in), .enc_out(act_code), .dec_in(back), .dec_out(act_back));

  initial begin
    repeat (20 * N) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int laplace(input real scale);
    real u;
    int v;
    u = (real'($urandom_range(1, 1000000))) / 1000001.0;
    v = int'(-scale * $ln(u));
    if ($urandom_range(0, 1)) v = -v;
    if (v > 127) v = 127;
    if (v < -127) v = -127;
    return v;
  endfunction

  // kind 0: weights, 1: pruned weights, 2: ReLU activations
  task automatic run_stream(input int kind, input string name);
    real p_raw = 0, p_code = 0, p_bus = 0, t_raw = 0, t_code = 0, t_bus = 0;
    logic [7:0] prev_raw = '0, prev_code = '0, prev_bus = '0, raw;
    int lost = 0;
    for (int i = 0; i < N; i++) begin
      int v;
      @(negedge clk);
      if (kind == 2) v = ($urandom_range(0, 1) == 0) ? -128 : -128 + laplace(30.0);
      else v = (kind == 1 && $urandom_range(0, 9) < 8) ? 0 : laplace(18.0);
      if (v < -128) v = -128 - (v + 128);
      if (v > 127) v = 127;
      raw = 8'(v);
      if (kind == 2) begin
        act_in = raw;
        #1 pcode = act_code;
      end else begin
        pcode = {v < 0, 7'((v < 0) ? -v : v)};
      end
      valid = 1'b1;
      first = (i == 0);
      #1;
      // lossless round trip
      if (kind == 2) begin if (act_back !== (raw ^ 8'h80)) lost++; end  // decoded to uint8 = q + 128
      else if ((sgn[0] ? -int'(mag[0]) : int'(mag[0])) != v) lost++;
      p_raw += $countones(raw); p_code += $countones(pcode); p_bus += $countones(bus);
      if (i > 0) begin
        t_raw += $countones(raw ^ prev_raw); t_code += $countones(pcode ^ prev_code); t_bus += $countones(bus ^ prev_bus);
      end
      prev_raw = raw; prev_code = pcode; prev_bus = bus;
    end
    @(negedge clk);
    valid = 1'b0;
    p_raw /= N; p_code /= N; p_bus /= N; t_raw /= (N - 1); t_code /= (N - 1); t_bus /= (N - 1);
    $display("%-16s  1-bits/word: plain %4.2f  code %4.2f  code+decorr %4.2f   toggles/word: plain %4.2f  code %4.2f  code+decorr %4.2f",
             name, p_raw, p_code, p_bus, t_raw, t_code, t_bus);
    $display("%-16s  vs. random data (4 per word): code switching %6.1f %%, code 1-bits %6.1f %%, code+decorr switching %6.1f %%",
             name, 100.0 * (t_code - 4.0) / 4.0, 100.0 * (p_code - 4.0) / 4.0, 100.0 * (t_bus - 4.0) / 4.0);
    checks += 4;
    if (lost != 0) begin failures++; $display("FAIL %s: %0d values lost", name, lost); end
    if (!(p_code < p_raw)) begin failures++; $display("FAIL %s: code does not lower 1-bit probability", name); end
    if (!(t_bus < t_raw)) begin failures++; $display("FAIL %s: decorrelated code does not lower switching", name); end
    // the decorrelator turns the code's 1-bits into transitions: toggles/word = 1-bits/word
    if (t_bus > p_code + 0.05 || t_bus < p_code - 0.05) begin failures++; $display("FAIL %s: toggles differ from code 1-bits", name); end
  endtask

  initial begin
    valid = 0; first = 0; pcode = '0; act_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_stream(0, "weights");
    run_stream(1, "pruned weights");
    run_stream(2, "ReLU activations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
