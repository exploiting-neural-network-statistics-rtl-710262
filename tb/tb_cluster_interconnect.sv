// tb_cluster_interconnect: self-checking test of the transfer engine with
// behavioural memories on both sides (one-cycle read latency, responses
// carrying the request's `first` flag).
//
// Random transfers in both directions, to random tiles and TCM selections,
// are checked word by word against a model of the memories; also checked:
// `first` is set on exactly the first word at each end, the right TCM
// select is presented, no other tile is touched, and a transfer of len
// words raises `done` len + 2 cycles after it is accepted.
module tb_cluster_interconnect;
  import lp_pkg::*;
  localparam int NP = 4, D = 256;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, cmd_ready, done;
  xfer_dir_e cmd_dir;
  logic [1:0] cmd_tile;
  tcm_sel_e cmd_sel, tile_sel;
  logic [15:0] cmd_um_addr, cmd_tcm_addr, cmd_len;
  bus_req_t um_req;
  bus_rsp_t um_rsp;
  bus_req_t [NP-1:0] tile_req;
  bus_rsp_t [NP-1:0] tile_rsp;
  word_t um [D];
  word_t tm [NP][2][D];
  int checks = 0, failures = 0, firsts_um = 0, firsts_tile = 0, wrong_tile = 0;

  always #5 clk = ~clk;

  cluster_interconnect #(.N_PE(NP)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_dir, .cmd_tile, .cmd_sel, .cmd_um_addr, .cmd_tcm_addr, .cmd_len,
    .cmd_ready, .done, .um_req, .um_rsp, .tile_req, .tile_sel, .tile_rsp);

  logic [1:0] cur_tile;

  always_ff @(posedge clk) begin
    um_rsp.valid <= um_req.valid && !um_req.we;
    um_rsp.first <= um_req.first;
    if (um_req.valid && !um_req.we) um_rsp.data <= um[um_req.addr[7:0]];
    if (um_req.valid && um_req.we) um[um_req.addr[7:0]] <= um_req.data;
    if (um_req.valid && um_req.first) firsts_um <= firsts_um + 1;
    for (int t = 0; t < NP; t++) begin
      tile_rsp[t].valid <= tile_req[t].valid && !tile_req[t].we;
      tile_rsp[t].first <= tile_req[t].first;
      if (tile_req[t].valid && !tile_req[t].we) tile_rsp[t].data <= tm[t][tile_sel][tile_req[t].addr[7:0]];
      if (tile_req[t].valid && tile_req[t].we) tm[t][tile_sel][tile_req[t].addr[7:0]] <= tile_req[t].data;
      if (tile_req[t].valid && tile_req[t].first) firsts_tile <= firsts_tile + 1;
      if (tile_req[t].valid && t != int'(cur_tile)) wrong_tile <= wrong_tile + 1;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd_dir = XFER_TO_TCM; cmd_tile = 0; cmd_sel = TCM_W; cmd_um_addr = 0; cmd_tcm_addr = 0; cmd_len = 0;
    um_rsp = '0; tile_rsp = '0; cur_tile = 0;
    for (int i = 0; i < D; i++) begin
      um[i] = {$urandom, $urandom};
      for (int t = 0; t < NP; t++) begin tm[t][0][i] = {$urandom, $urandom}; tm[t][1][i] = {$urandom, $urandom}; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int x = 0; x < 60; x++) begin
      int len, ua, ta, cyc, f_um0, f_t0;
      logic dir;
      logic [1:0] tl;
      logic sl;
      word_t src [];
      len = $urandom_range(1, 40); ua = $urandom_range(0, D - 41); ta = $urandom_range(0, D - 41);
      dir = 1'($urandom); tl = 2'($urandom); sl = 1'($urandom);
      src = new[len];
      for (int i = 0; i < len; i++) src[i] = dir ? tm[tl][sl][ta + i] : um[ua + i];
      f_um0 = firsts_um; f_t0 = firsts_tile;
      @(negedge clk);
      checks++;
      if (!cmd_ready) begin failures++; $display("FAIL not ready"); end
      cmd_valid = 1; cmd_dir = xfer_dir_e'(dir); cmd_tile = tl; cmd_sel = tcm_sel_e'(sl);
      cmd_um_addr = 16'(ua); cmd_tcm_addr = 16'(ta); cmd_len = 16'(len); cur_tile = tl;
      @(negedge clk);
      cmd_valid = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 3;
      if (cyc != len + 2) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, len + 2); end
      if (firsts_um - f_um0 != 1 || firsts_tile - f_t0 != 1) begin failures++; $display("FAIL first flags"); end
      if (tile_sel != tcm_sel_e'(sl)) begin failures++; $display("FAIL tile_sel"); end
      for (int i = 0; i < len; i++) begin
        word_t got;
        got = dir ? um[ua + i] : tm[tl][sl][ta + i];
        checks++;
        if (got !== src[i]) begin failures++; $display("FAIL xfer %0d word %0d", x, i); end
      end
    end
    checks++;
    if (wrong_tile != 0) begin failures++; $display("FAIL another tile was addressed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
