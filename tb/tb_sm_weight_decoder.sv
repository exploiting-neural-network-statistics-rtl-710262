// tb_sm_weight_decoder: exhaustive test of sm_weight_decoder for every weight
// in [-127, 127] in every lane, both polarities. The stored byte is made by a
// compile-time style encoder in this testbench (sign-magnitude, whole byte
// inverted for ONES = 1); sign and magnitude must come back, and
// sign ? -mag : mag must equal the weight.
module tb_sm_weight_decoder;
  localparam int L = 8;
  logic [L*8-1:0] w0, w1;
  logic [L-1:0] s0, s1;
  logic [L-1:0][6:0] m0, m1;
  int checks = 0, failures = 0;

  sm_weight_decoder #(.LANES(L), .ONES(1'b0)) dut0 (.word(w0), .sign(s0), .mag(m0));
  sm_weight_decoder #(.LANES(L), .ONES(1'b1)) dut1 (.word(w1), .sign(s1), .mag(m1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -127; v <= 127; v++) begin
      int wv [L];
      for (int l = 0; l < L; l++) begin
        int a;
        wv[l] = ((v + 127 + 37 * l) % 255) - 127;
        a = (wv[l] < 0) ? -wv[l] : wv[l];
        w0[l*8 +: 8] = {wv[l] < 0, 7'(a)};
        w1[l*8 +: 8] = ~{wv[l] < 0, 7'(a)};
      end
      #1;
      for (int l = 0; l < L; l++) begin
        int r0, r1;
        r0 = s0[l] ? -int'(m0[l]) : int'(m0[l]);
        r1 = s1[l] ? -int'(m1[l]) : int'(m1[l]);
        checks += 2;
        if (r0 != wv[l]) begin failures++; $display("FAIL ones=0 w=%0d got %0d", wv[l], r0); end
        if (r1 != wv[l]) begin failures++; $display("FAIL ones=1 w=%0d got %0d", wv[l], r1); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
