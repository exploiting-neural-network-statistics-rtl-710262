// tb_tcm: self-checking test of the dual-ported TCM against an array model.
// Random reads and byte-masked writes on both ports, one-cycle read latency,
// read-before-write in the same cycle, and both ports active together on
// different addresses.
module tb_tcm;
  localparam int D = 64, W = 64;
  logic clk = 1'b0;
  logic a_en, a_we, b_en, b_we;
  logic [7:0] a_be, b_be;
  logic [5:0] a_addr, b_addr;
  logic [W-1:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [W-1:0] model [D];
  logic [W-1:0] exp_a, exp_b;
  logic chk_a, chk_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tcm #(.DEPTH(D), .WORD_W(W)) dut (.clk, .a_en, .a_we, .a_be, .a_addr, .a_wdata, .a_rdata,
                                    .b_en, .b_we, .b_be, .b_addr, .b_wdata, .b_rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] merge(input logic [W-1:0] old, neu, input logic [7:0] be);
    for (int i = 0; i < 8; i++) if (be[i]) old[i*8 +: 8] = neu[i*8 +: 8];
    return old;
  endfunction

  initial begin
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_be = 0; b_be = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    chk_a = 0; chk_b = 0;
    // fill through both ports
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_be = '1; a_addr = 6'(i); a_wdata = {$urandom, $urandom};
      model[i] = a_wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (chk_a) begin checks++; if (a_rdata !== exp_a) begin failures++; $display("FAIL port a read"); end end
      if (chk_b) begin checks++; if (b_rdata !== exp_b) begin failures++; $display("FAIL port b read"); end end
      a_en = $urandom_range(0, 1); a_we = $urandom_range(0, 1); a_be = 8'($urandom);
      b_en = $urandom_range(0, 1); b_we = $urandom_range(0, 1); b_be = 8'($urandom);
      a_addr = 6'($urandom); b_addr = 6'($urandom);
      if (b_addr == a_addr) b_addr = a_addr + 6'd1;
      a_wdata = {$urandom, $urandom}; b_wdata = {$urandom, $urandom};
      chk_a = a_en && !a_we; exp_a = model[a_addr];
      chk_b = b_en && !b_we; exp_b = model[b_addr];
      if (a_en && a_we) model[a_addr] = merge(model[a_addr], a_wdata, a_be);
      if (b_en && b_we) model[b_addr] = merge(model[b_addr], b_wdata, b_be);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
