// tb_lp_nn_engine: end-to-end test of the engine at its default size.
//
// Workload: a ReLU fully connected layer with K_WORDS * 8 inputs and
// N_OUT outputs per tile on every tile (each tile computes different
// outputs from the same input vector). Weights are 80 % pruned, the other
// ones spread over [-127, 127]; about half of the input activations equal
// the ReLU zero point -128.
//
// The host side of this testbench encodes everything as the rest of the SoC
// would: weights into sign-magnitude and activations into XOR-ZP (memory
// code, 1-bit favouring polarity), then each burst through its own
// behavioural XNOR decorrelator onto the system port. It then
//  1. writes activations and all tiles' weight blocks into the unified memory,
//  2. per tile, moves activations and weights into the TCMs and starts the PE
//     as soon as its weights are in, so later tiles load while earlier tiles
//     compute,
//  3. moves each tile's output words back into the unified memory,
//  4. reads them over the system port, undoes the bus code and the XOR-ZP
//     code, and compares every output with an integer reference model.
// Mechanisms counted, each must occur: coder restarts on `first`, loading
// overlapped with computing, positive saturation, ReLU clipping, negative
// (sign path) weights. The testbench also counts wire transitions on the
// cluster interconnect during the weight loads and checks that the bus code
// toggles fewer wires than plain two's-complement words would.
module tb_lp_nn_engine;
  import lp_pkg::*;
  localparam int NP = 4;          // must equal the engine's default N_PE
  localparam int K_WORDS = 64;    // 512 inputs
  localparam int N_OUT = 12;      // outputs per tile
  localparam int WBLK = N_OUT * (K_WORDS + 1);
  localparam int UM_ACT = 0, UM_W = 100, UM_OUT = 3400;
  localparam int A_OUT_WORD = 100; // output area in each A TCM
  localparam int SHIFT = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  bus_req_t sys_req;
  bus_rsp_t sys_rsp;
  logic x_valid, x_ready, x_done;
  xfer_dir_e x_dir;
  logic [1:0] x_tile;
  tcm_sel_e x_sel;
  logic [15:0] x_um_addr, x_tcm_addr, x_len;
  logic [NP-1:0] pe_cmd_valid, pe_cmd_ready, pe_done, pe_out_valid, pe_sat_hi, pe_sat_lo;
  pe_cmd_t [NP-1:0] pe_cmd;

  lp_nn_engine dut (
    .clk, .rst_n, .sys_req, .sys_rsp,
    .x_valid, .x_dir, .x_tile, .x_sel, .x_um_addr, .x_tcm_addr, .x_len, .x_ready, .x_done,
    .pe_cmd_valid, .pe_cmd, .pe_cmd_ready, .pe_done, .pe_out_valid, .pe_sat_hi, .pe_sat_lo);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_first = 0, n_overlap = 0, n_sat_hi = 0, n_sat_lo = 0, n_neg_w = 0, n_outputs = 0;
  longint bus_toggles = 0, raw_toggles = 0;
  logic count_toggles = 1'b0;
  word_t prev_bus = '0, prev_raw = '0, raw_word;

  // reference data
  int act [K_WORDS * 8];
  int wgt [NP][N_OUT][K_WORDS * 8];
  int bias [NP][N_OUT];
  int mult [NP][N_OUT];

  // counters of mechanisms
  always_ff @(posedge clk) if (rst_n) begin
    if (dut.c_req_bus.valid && dut.c_req_bus.first) n_first <= n_first + 1;
    if (!x_ready && (pe_cmd_ready != '1)) n_overlap <= n_overlap + 1;
    n_sat_hi <= n_sat_hi + $countones(pe_sat_hi);
    n_sat_lo <= n_sat_lo + $countones(pe_sat_lo);
    n_outputs <= n_outputs + $countones(pe_out_valid);
  end

  // wire transitions on the cluster interconnect while weights travel to the tiles
  always @(posedge clk) begin
    foreach (dut.tile_req[t])
      if (count_toggles && dut.tile_req[t].valid && dut.tile_req[t].we) begin
        bus_toggles += $countones(dut.tile_req[t].data ^ prev_bus);
        prev_bus = dut.tile_req[t].data;
      end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host-side coding (the SoC side of the system port) ----
  word_t host_enc_prev, host_dec_prev;

  function automatic logic [7:0] act_code(input int q);  // int8 -> memory code
    return 8'(q) ^ 8'h7F;
  endfunction
  function automatic logic [7:0] w_code(input int w);    // weight -> memory code
    return ~{w < 0, 7'((w < 0) ? -w : w)};
  endfunction

  task automatic sys_write(input int addr, input word_t mem_word, input bit first);
    word_t y;
    y = ~((first ? '0 : host_enc_prev) ^ mem_word);
    host_enc_prev = y;
    @(negedge clk);
    sys_req = '{valid: 1'b1, we: 1'b1, first: first, addr: 16'(addr), data: y};
    @(negedge clk);
    sys_req = '0;
  endtask

  task automatic sys_read(input int addr, input bit first, output word_t mem_word);
    @(negedge clk);
    sys_req = '{valid: 1'b1, we: 1'b0, first: first, addr: 16'(addr), data: '0};
    @(negedge clk);
    sys_req = '0;
    checks++;
    if (!sys_rsp.valid || sys_rsp.first != first) begin failures++; $display("FAIL sys response"); end
    mem_word = ~((first ? '0 : host_dec_prev) ^ sys_rsp.data);
    host_dec_prev = sys_rsp.data;
  endtask

  task automatic xfer(input xfer_dir_e d, input int tile, input tcm_sel_e s, input int ua, input int ta, input int len);
    @(negedge clk);
    while (!x_ready) @(negedge clk);
    x_valid = 1; x_dir = d; x_tile = 2'(tile); x_sel = s; x_um_addr = 16'(ua); x_tcm_addr = 16'(ta); x_len = 16'(len);
    @(negedge clk);
    x_valid = 0;
    while (!x_done) @(negedge clk);
  endtask

  function automatic longint floor_div(input longint a, input longint b);
    longint r = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) r -= 1;
    return r;
  endfunction
  function automatic int requant(input longint acc, input longint m, input int s);
    longint p = acc * m, r;
    r = floor_div(p + (longint'(1) <<< (s - 1)), longint'(1) <<< s);
    return (r > 127) ? 127 : ((r < -128) ? -128 : int'(r));
  endfunction

  initial begin
    word_t wd;
    int cyc0, cyc1;
    sys_req = '0; x_valid = 0; x_dir = XFER_TO_TCM; x_tile = 0; x_sel = TCM_W;
    x_um_addr = 0; x_tcm_addr = 0; x_len = 0; pe_cmd_valid = '0; pe_cmd = '0;
    host_enc_prev = '0; host_dec_prev = '0;

    // data
    foreach (act[i]) act[i] = ($urandom_range(0, 1) == 0) ? -128 : int'($urandom_range(0, 255)) - 128;
    for (int t = 0; t < NP; t++)
      for (int o = 0; o < N_OUT; o++) begin
        bias[t][o] = int'($urandom_range(0, 100000)) - 50000;
        mult[t][o] = $urandom_range(1 << 10, 1 << 14);
        for (int j = 0; j < K_WORDS * 8; j++) begin
          int w;
          w = ($urandom_range(0, 9) < 8) ? 0 : int'($urandom_range(0, 254)) - 127;
          wgt[t][o][j] = w;
          if (w < 0) n_neg_w++;
        end
      end

    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. fill the unified memory over the system port
    for (int k = 0; k < K_WORDS; k++) begin
      for (int l = 0; l < 8; l++) wd[l*8 +: 8] = act_code(act[k*8 + l]);
      sys_write(UM_ACT + k, wd, k == 0);
    end
    for (int t = 0; t < NP; t++)
      for (int o = 0; o < N_OUT; o++) begin
        sys_write(UM_W + t * WBLK + o * (K_WORDS + 1), {32'(mult[t][o]), 32'(bias[t][o])}, (t == 0 && o == 0));
        for (int k = 0; k < K_WORDS; k++) begin
          for (int l = 0; l < 8; l++) wd[l*8 +: 8] = w_code(wgt[t][o][k*8 + l]);
          sys_write(UM_W + t * WBLK + o * (K_WORDS + 1) + 1 + k, wd, 1'b0);
        end
      end

    // 2. load tiles; start each PE as soon as its data is in
    cyc0 = $time / 10;
    for (int t = 0; t < NP; t++) begin
      xfer(XFER_TO_TCM, t, TCM_A, UM_ACT, 0, K_WORDS);
      count_toggles = 1'b1;
      xfer(XFER_TO_TCM, t, TCM_W, UM_W + t * WBLK, 0, WBLK);
      count_toggles = 1'b0;
      @(negedge clk);
      checks++;
      if (!pe_cmd_ready[t]) begin failures++; $display("FAIL PE %0d busy", t); end
      pe_cmd_valid[t] = 1'b1;
      pe_cmd[t] = '{a_addr: 16'd0, w_addr: 16'd0, n_words: 16'(K_WORDS), n_out: 16'(N_OUT),
                    out_addr: 16'(A_OUT_WORD * 8), shift: 6'(SHIFT)};
      @(negedge clk);
      pe_cmd_valid[t] = 1'b0;
    end
    while (pe_cmd_ready != '1) @(negedge clk);
    cyc1 = $time / 10;
    $display("load and compute: %0d cycles", cyc1 - cyc0);

    // 3. outputs back to the unified memory
    for (int t = 0; t < NP; t++)
      xfer(XFER_TO_UM, t, TCM_A, UM_OUT + 2 * t, A_OUT_WORD, (N_OUT + 7) / 8);

    // 4. read and compare
    for (int t = 0; t < NP; t++)
      for (int wi = 0; wi < (N_OUT + 7) / 8; wi++) begin
        sys_read(UM_OUT + 2 * t + wi, (t == 0 && wi == 0), wd);
        for (int l = 0; l < 8; l++) begin
          int o;
          o = wi * 8 + l;
          if (o < N_OUT) begin
            longint acc;
            int e, g;
            acc = bias[t][o];
            for (int j = 0; j < K_WORDS * 8; j++) acc += longint'(act[j] + 128) * wgt[t][o][j];
            e = requant(acc, mult[t][o], SHIFT);
            g = int'($signed(wd[l*8 +: 8] ^ 8'h7F));
            checks++;
            if (g != e) begin failures++; $display("FAIL tile %0d out %0d got %0d exp %0d", t, o, g, e); end
          end
        end
      end

    // plain two's-complement toggles of the same weight stream, for comparison
    prev_raw = '0;
    for (int t = 0; t < NP; t++)
      for (int o = 0; o < N_OUT; o++) begin
        raw_word = {32'(mult[t][o]), 32'(bias[t][o])};
        raw_toggles += $countones(raw_word ^ prev_raw); prev_raw = raw_word;
        for (int k = 0; k < K_WORDS; k++) begin
          for (int l = 0; l < 8; l++) raw_word[l*8 +: 8] = 8'(wgt[t][o][k*8 + l]);
          raw_toggles += $countones(raw_word ^ prev_raw); prev_raw = raw_word;
        end
      end

    $display("mechanisms: coder restarts %0d, load/compute overlap cycles %0d, saturations high %0d low %0d, negative weights %0d, outputs %0d",
             n_first, n_overlap, n_sat_hi, n_sat_lo, n_neg_w, n_outputs);
    $display("interconnect toggles during weight loads: coded %0d, plain int8 %0d", bus_toggles, raw_toggles);
    checks += 7;
    if (n_first == 0)   begin failures++; $display("FAIL no coder restart"); end
    if (n_overlap == 0) begin failures++; $display("FAIL no overlap"); end
    if (n_sat_hi == 0)  begin failures++; $display("FAIL no positive saturation"); end
    if (n_sat_lo == 0)  begin failures++; $display("FAIL no ReLU clip"); end
    if (n_neg_w == 0)   begin failures++; $display("FAIL no negative weight"); end
    if (n_outputs != NP * N_OUT) begin failures++; $display("FAIL output count"); end
    if (bus_toggles >= raw_toggles) begin failures++; $display("FAIL bus code does not save transitions"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
