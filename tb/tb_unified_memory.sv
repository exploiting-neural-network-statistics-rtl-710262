// tb_unified_memory: self-checking test of the unified memory against an
// array model: random reads and writes on both ports, responses one cycle
// later with the request's `first` flag.
module tb_unified_memory;
  import lp_pkg::*;
  localparam int D = 128;
  logic clk = 1'b0, rst_n = 1'b0;
  bus_req_t c_req, s_req;
  bus_rsp_t c_rsp, s_rsp;
  word_t model [D];
  word_t exp_c, exp_s;
  logic chk_c, chk_s, f_c, f_s;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  unified_memory #(.DEPTH(D)) dut (.clk, .rst_n, .c_req, .c_rsp, .s_req, .s_rsp);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    c_req = '0; s_req = '0; chk_c = 0; chk_s = 0; f_c = 0; f_s = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      s_req = '{valid: 1'b1, we: 1'b1, first: 1'b0, addr: 16'(i), data: {$urandom, $urandom}};
      model[i] = s_req.data;
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks += 2;
      if (c_rsp.valid !== chk_c || s_rsp.valid !== chk_s) begin failures++; $display("FAIL rsp valid"); end
      if (chk_c) begin checks++; if (c_rsp.data !== exp_c || c_rsp.first !== f_c) begin failures++; $display("FAIL c read"); end end
      if (chk_s) begin checks++; if (s_rsp.data !== exp_s || s_rsp.first !== f_s) begin failures++; $display("FAIL s read"); end end
      c_req = '{valid: 1'($urandom), we: 1'($urandom), first: 1'($urandom), addr: 16'($urandom_range(0, D - 1)), data: {$urandom, $urandom}};
      s_req = '{valid: 1'($urandom), we: 1'($urandom), first: 1'($urandom), addr: 16'($urandom_range(0, D - 1)), data: {$urandom, $urandom}};
      if (s_req.addr == c_req.addr) s_req.addr = 16'((c_req.addr + 1) % D);
      chk_c = c_req.valid && !c_req.we; exp_c = model[c_req.addr]; f_c = c_req.first;
      chk_s = s_req.valid && !s_req.we; exp_s = model[s_req.addr]; f_s = s_req.first;
      if (c_req.valid && c_req.we) model[c_req.addr] = c_req.data;
      if (s_req.valid && s_req.we) model[s_req.addr] = s_req.data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
