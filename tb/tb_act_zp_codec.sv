// tb_act_zp_codec: exhaustive test of act_zp_codec for all 256 int8 values in
// every lane, in both polarities. Encoding an int8 q must give q + 128 as
// uint8 (ONES = 0) or its complement (ONES = 1); decoding the stored code
// must give q + 128; the ReLU zero point -128 must map to 0x00 / 0xFF.
module tb_act_zp_codec;
  localparam int L = 8;
  logic [L*8-1:0] ein, eo0, eo1, do0, do1;
  int checks = 0, failures = 0;

  act_zp_codec #(.LANES(L), .ONES(1'b0)) dut0 (.enc_in(ein), .enc_out(eo0), .dec_in(eo0), .dec_out(do0));
  act_zp_codec #(.LANES(L), .ONES(1'b1)) dut1 (.enc_in(ein), .enc_out(eo1), .dec_in(eo1), .dec_out(do1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -128; v < 128; v++) begin
      for (int l = 0; l < L; l++) ein[l*8 +: 8] = 8'(v + 3 * l);
      #1;
      for (int l = 0; l < L; l++) begin
        int q;
        logic [7:0] u;
        q = int'($signed(ein[l*8 +: 8]));
        u = 8'(q + 128);
        checks += 4;
        if (eo0[l*8 +: 8] !== u)  begin failures++; $display("FAIL enc0 q=%0d", q); end
        if (eo1[l*8 +: 8] !== ~u) begin failures++; $display("FAIL enc1 q=%0d", q); end
        if (do0[l*8 +: 8] !== u)  begin failures++; $display("FAIL dec0 q=%0d", q); end
        if (do1[l*8 +: 8] !== u)  begin failures++; $display("FAIL dec1 q=%0d", q); end
      end
    end
    ein = {L{8'h80}};
    #1;
    checks += 2;
    if (eo0 !== '0) failures++;
    if (eo1 !== '1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
