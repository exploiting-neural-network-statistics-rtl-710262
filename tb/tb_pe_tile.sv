// tb_pe_tile: self-checking test of one tile through its interconnect port.
//
// The testbench plays the interconnect: it encodes memory-code words with its
// own behavioural XNOR decorrelator (restarting on `first`) and writes them
// into the weight and activation TCMs, then reads words back through the
// tile's read-path recoders and decodes them with its own correlator. It
// then runs the PE on a small ReLU layer (sign-magnitude weights, XOR-ZP
// activations, both stored inverted) and reads the outputs back over the
// bus, checking them against an integer reference, and checks that the
// interconnect side toggles no wire while a run of pruned (zero) weights is
// written.
module tb_pe_tile;
  import lp_pkg::*;
  localparam int KW = 6, NO = 9, SH = 18;
  logic clk = 1'b0, rst_n = 1'b0;
  bus_req_t bus_req;
  tcm_sel_e bus_sel;
  bus_rsp_t bus_rsp;
  logic cmd_valid, cmd_ready, done, out_valid, out_sat_hi, out_sat_lo;
  pe_cmd_t cmd;
  word_t enc_prev, dec_prev;
  int checks = 0, failures = 0;
  int act [KW * 8];
  int wgt [NO][KW * 8];
  int bias [NO], mult [NO];

  always #5 clk = ~clk;

  pe_tile #(.W_DEPTH(256), .A_DEPTH(64), .MEM_ONES(1'b1)) dut (
    .clk, .rst_n, .bus_req, .bus_sel, .bus_rsp,
    .cmd_valid, .cmd, .cmd_ready, .done, .out_valid, .out_sat_hi, .out_sat_lo);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic bwrite(input tcm_sel_e s, input int addr, input word_t mw, input bit first);
    word_t y;
    y = ~((first ? '0 : enc_prev) ^ mw);
    enc_prev = y;
    @(negedge clk);
    bus_sel = s;
    bus_req = '{valid: 1'b1, we: 1'b1, first: first, addr: 16'(addr), data: y};
    @(negedge clk);
    bus_req = '0;
  endtask

  task automatic bread(input tcm_sel_e s, input int addr, input bit first, output word_t mw);
    @(negedge clk);
    bus_sel = s;
    bus_req = '{valid: 1'b1, we: 1'b0, first: first, addr: 16'(addr), data: '0};
    @(negedge clk);
    bus_req = '0;
    checks++;
    if (!bus_rsp.valid || bus_rsp.first != first) begin failures++; $display("FAIL response flags"); end
    mw = ~((first ? '0 : dec_prev) ^ bus_rsp.data);
    dec_prev = bus_rsp.data;
  endtask

  function automatic longint floor_div(input longint a, input longint b);
    longint r = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) r -= 1;
    return r;
  endfunction

  initial begin
    word_t wd, rd;
    word_t img [32];
    int toggles;
    bus_req = '0; bus_sel = TCM_W; cmd_valid = 0; cmd = '0; enc_prev = '0; dec_prev = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // raw round trip through both TCMs and both recoder directions
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < 32; i++) begin
        img[i] = {$urandom, $urandom};
        bwrite(tcm_sel_e'(s), 200 * (1 - s) + i % 64, img[i], i == 0);
      end
      for (int rep = 0; rep < 2; rep++)   // the second pass restarts a used coder
        for (int i = 0; i < 32; i++) begin
          bread(tcm_sel_e'(s), 200 * (1 - s) + i % 64, i == 0, rd);
          checks++;
          if (rd !== img[i]) begin failures++; $display("FAIL round trip sel %0d word %0d", s, i); end
        end
    end

    // pruned weights: after the first word, the interconnect wires stay still
    toggles = 0;
    for (int i = 0; i < 10; i++) begin
      word_t before_bus;
      before_bus = enc_prev;
      bwrite(TCM_W, 240 + i, '1, i == 0);   // ten words of zero weights (stored 0xFF)
      if (i > 0) toggles += $countones(before_bus ^ enc_prev);
    end
    checks++;
    if (toggles != 0) begin failures++; $display("FAIL pruned weights toggle the bus"); end

    // a small layer
    foreach (act[j]) act[j] = ($urandom_range(0, 1) == 0) ? -128 : int'($urandom_range(0, 255)) - 128;
    for (int k = 0; k < KW; k++) begin
      for (int l = 0; l < 8; l++) wd[l*8 +: 8] = 8'(act[k*8 + l]) ^ 8'h7F;
      bwrite(TCM_A, 3 + k, wd, k == 0);
    end
    for (int o = 0; o < NO; o++) begin
      bias[o] = int'($urandom_range(0, 40000)) - 20000;
      mult[o] = $urandom_range(1 << 9, 1 << 12);
      bwrite(TCM_W, 10 + o * (KW + 1), {32'(mult[o]), 32'(bias[o])}, o == 0);
      for (int k = 0; k < KW; k++) begin
        for (int l = 0; l < 8; l++) begin
          int w;
          w = ($urandom_range(0, 3) == 0) ? 0 : int'($urandom_range(0, 254)) - 127;
          wgt[o][k*8 + l] = w;
          wd[l*8 +: 8] = ~{w < 0, 7'((w < 0) ? -w : w)};
        end
        bwrite(TCM_W, 10 + o * (KW + 1) + 1 + k, wd, 1'b0);
      end
    end
    @(negedge clk);
    cmd_valid = 1;
    cmd = '{a_addr: 16'd3, w_addr: 16'd10, n_words: 16'(KW), n_out: 16'(NO), out_addr: 16'(40 * 8 + 3), shift: 6'(SH)};
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
    for (int wi = 40; wi < 42; wi++) begin
      bread(TCM_A, wi, wi == 40, rd);
      for (int l = 0; l < 8; l++) begin
        int o;
        o = (wi - 40) * 8 + l - 3;
        if (o >= 0 && o < NO) begin
          longint acc, r;
          int e, g;
          acc = bias[o];
          for (int j = 0; j < KW * 8; j++) acc += longint'(act[j] + 128) * wgt[o][j];
          r = floor_div(acc * mult[o] + (longint'(1) <<< (SH - 1)), longint'(1) <<< SH);
          e = (r > 127) ? 127 : ((r < -128) ? -128 : int'(r));
          g = int'($signed(rd[l*8 +: 8] ^ 8'h7F));
          checks++;
          if (g != e) begin failures++; $display("FAIL out %0d got %0d exp %0d", o, g, e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
