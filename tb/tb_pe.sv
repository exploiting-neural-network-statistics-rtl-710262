// tb_pe: self-checking test of the processing element with behavioural
// one-cycle-latency TCM models.
//
// The weight memory model holds, per output, a header word {mult, bias} and
// n_words words of sign-magnitude weights; the activation memory holds uint8
// activations (XOR-ZP code, zero point 0). Each command's outputs are
// computed here with integer arithmetic (bias + sum of products, exact
// 64-bit rescale, round half up, clamp to int8) and compared with the bytes
// the PE writes. Also checked: the cycle count n_out * (n_words + 6) from
// command to `done`, that no other byte is written, and that both
// saturation directions (including the ReLU clip at -128) occur.
module tb_pe;
  import lp_pkg::*;
  localparam int WD = 1024, AD = 512;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, cmd_ready, done;
  pe_cmd_t cmd;
  logic w_en, a_en, a_we;
  logic [9:0] w_addr;
  logic [8:0] a_addr;
  logic [7:0] a_be, a_wbyte;
  word_t w_rdata, a_rdata;
  logic [7:0] w_sign;
  logic [7:0][6:0] w_mag;
  logic out_valid, out_sat_hi, out_sat_lo;
  word_t wmem [WD];
  word_t amem [AD];
  int checks = 0, failures = 0, n_hi = 0, n_lo = 0;

  always #5 clk = ~clk;

  pe #(.W_AW(10), .A_AW(9)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .done,
    .w_en, .w_addr, .w_rdata, .w_sign, .w_mag,
    .a_en, .a_we, .a_be, .a_addr, .a_wbyte, .a_act(a_rdata),
    .out_valid, .out_sat_hi, .out_sat_lo);

  // behavioural TCMs
  always_ff @(posedge clk) begin
    if (w_en) w_rdata <= wmem[w_addr];
    if (a_en && !a_we) a_rdata <= amem[a_addr];
    if (a_en && a_we)
      for (int i = 0; i < 8; i++) if (a_be[i]) amem[a_addr][i*8 +: 8] <= a_wbyte;
    if (out_sat_hi) n_hi <= n_hi + 1;
    if (out_sat_lo) n_lo <= n_lo + 1;
  end
  always_comb
    for (int l = 0; l < 8; l++) begin
      w_sign[l] = w_rdata[l*8 + 7];
      w_mag[l]  = w_rdata[l*8 +: 7];
    end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint floor_div(input longint a, input longint b);
    longint r = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) r -= 1;
    return r;
  endfunction

  function automatic int requant(input longint acc, input longint m, input int s);
    longint p = acc * m, r;
    r = (s == 0) ? p : floor_div(p + (longint'(1) <<< (s - 1)), longint'(1) <<< s);
    return (r > 127) ? 127 : ((r < -128) ? -128 : int'(r));
  endfunction

  initial begin
    cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 12; run++) begin
      int nw, no, abase, wbase, obase, sh, cyc;
      int expq [64];
      word_t snap [AD];
      nw = $urandom_range(1, 12); no = $urandom_range(1, 10);
      abase = $urandom_range(0, 100); wbase = $urandom_range(0, 300);
      obase = 8 * 200 + $urandom_range(0, 300); sh = 20;
      for (int k = 0; k < nw; k++)
        for (int l = 0; l < 8; l++)
          amem[abase + k][l*8 +: 8] = ($urandom_range(0, 1)) ? 8'h00 : 8'($urandom);
      for (int o = 0; o < no; o++) begin
        longint acc;
        int hb, mult, bias;
        hb = wbase + o * (nw + 1);
        mult = $urandom_range(1 << 16, 1 << 19);
        bias = int'($urandom_range(0, 80000)) - 40000;
        wmem[hb] = {32'(mult), 32'(bias)};
        acc = bias;
        for (int k = 0; k < nw; k++)
          for (int l = 0; l < 8; l++) begin
            int w;
            w = ($urandom_range(0, 2) == 0) ? 0 : int'($urandom_range(0, 254)) - 127;
            wmem[hb + 1 + k][l*8 +: 8] = {w < 0, 7'((w < 0) ? -w : w)};
            acc += longint'(amem[abase + k][l*8 +: 8]) * w;
          end
        expq[o] = requant(acc, mult, sh);
      end
      snap = amem;
      @(negedge clk);
      cmd_valid = 1;
      cmd = '{a_addr: 16'(abase), w_addr: 16'(wbase), n_words: 16'(nw), n_out: 16'(no),
              out_addr: 16'(obase), shift: 6'(sh)};
      checks++;
      if (!cmd_ready) begin failures++; $display("FAIL not ready"); end
      @(negedge clk);
      cmd_valid = 0;
      cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != no * (nw + 6)) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, no * (nw + 6)); end
      for (int o = 0; o < no; o++) begin
        int ba;
        ba = obase + o;
        checks++;
        if (int'($signed(amem[ba / 8][(ba % 8)*8 +: 8])) != expq[o]) begin
          failures++;
          $display("FAIL run %0d out %0d got %0d exp %0d", run, o, $signed(amem[ba / 8][(ba % 8)*8 +: 8]), expq[o]);
        end
        snap[ba / 8][(ba % 8)*8 +: 8] = amem[ba / 8][(ba % 8)*8 +: 8];
      end
      checks++;
      if (snap != amem) begin failures++; $display("FAIL stray write"); end
    end
    checks += 2;
    if (n_hi == 0) begin failures++; $display("FAIL no positive saturation"); end
    if (n_lo == 0) begin failures++; $display("FAIL no ReLU clip"); end
    $display("saturations: high %0d, low %0d", n_hi, n_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
