// pe_tile: one column of the engine: a PE, its private weight TCM and
// activation TCM, the coders between PE and TCMs, and the recoders between
// the TCMs and the cluster interconnect.
//
// Data representations in a tile:
//  - In both TCMs words are kept in the memory code: sign-magnitude weights
//    and XOR-ZP activations, with every bit inverted when
//    MEM_ONES = 1 (the polarity single-ended SRAM reads prefer).
//  - On the interconnect side words are in the bus code: the memory code
//    passed through a per-bit X(N)OR decorrelator, so that the frequent
//    memory-code value becomes "no transition". Each TCM has a correlator on
//    its write path and a decorrelator on its read path (a bidirectional
//    recoder).
//  - Between weight TCM and PE, sm_weight_decoder splits words into sign and
//    magnitude (one direction only); between PE and activation TCM,
//    act_zp_codec encodes the int8 results and turns stored activations into
//    the uint8 operands the MAC takes.
//
// Interface: `bus_req` (with `bus_sel` choosing the W or A TCM) writes or
// reads one word in the bus code; read data returns on `bus_rsp` one cycle
// later, carrying the request's `first` flag. `first` restarts the recoder of
// the addressed TCM. The PE port is pe's command port. Port A of each TCM is
// the PE's, port B the interconnect's.
module pe_tile
  import lp_pkg::*;
#(
  parameter int unsigned W_DEPTH  = 1024,
  parameter int unsigned A_DEPTH  = 1024,
  parameter bit          MEM_ONES = 1'b1,
  localparam int unsigned W_AW    = $clog2(W_DEPTH),
  localparam int unsigned A_AW    = $clog2(A_DEPTH)
) (
  input  logic     clk,
  input  logic     rst_n,
  // cluster interconnect side
  input  bus_req_t bus_req,
  input  tcm_sel_e bus_sel,
  output bus_rsp_t bus_rsp,
  // PE command
  input  logic     cmd_valid,
  input  pe_cmd_t  cmd,
  output logic     cmd_ready,
  output logic     done,
  output logic     out_valid,
  output logic     out_sat_hi,
  output logic     out_sat_lo
);
  // PE <-> TCMs
  logic                  pw_en, pa_en, pa_we;
  logic [W_AW-1:0]       pw_addr;
  logic [A_AW-1:0]       pa_addr;
  logic [LANES-1:0]      pa_be;
  logic [7:0]            pa_wbyte;
  word_t                 w_rdata_a, a_rdata_a, a_wdata_a;
  logic [LANES-1:0]      w_sign;
  logic [LANES-1:0][6:0] w_mag;
  word_t                 act_u8;

  // interconnect <-> TCMs
  logic  w_bwr, a_bwr, w_brd, a_brd;
  word_t w_wdata_b, a_wdata_b, w_rdata_b, a_rdata_b, w_rsp_bus, a_rsp_bus;
  logic  rd_q, first_q;
  tcm_sel_e sel_q;

  assign w_bwr = bus_req.valid &&  bus_req.we && (bus_sel == TCM_W);
  assign a_bwr = bus_req.valid &&  bus_req.we && (bus_sel == TCM_A);
  assign w_brd = bus_req.valid && !bus_req.we && (bus_sel == TCM_W);
  assign a_brd = bus_req.valid && !bus_req.we && (bus_sel == TCM_A);

  // Recoders on the write path: bus code -> memory code.
  xor_correlator #(.WIDTH(WORD_W), .XNOR(MEM_ONES)) u_w_corr (
    .clk, .rst_n, .valid(w_bwr), .first(bus_req.first), .x(bus_req.data), .y(w_wdata_b));
  xor_correlator #(.WIDTH(WORD_W), .XNOR(MEM_ONES)) u_a_corr (
    .clk, .rst_n, .valid(a_bwr), .first(bus_req.first), .x(bus_req.data), .y(a_wdata_b));

  // Read path: one-cycle TCM latency, then memory code -> bus code.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q    <= 1'b0;
      first_q <= 1'b0;
      sel_q   <= TCM_W;
    end else begin
      rd_q    <= w_brd || a_brd;
      first_q <= bus_req.first;
      sel_q   <= bus_sel;
    end
  end

  xor_decorrelator #(.WIDTH(WORD_W), .XNOR(MEM_ONES)) u_w_decorr (
    .clk, .rst_n, .valid(rd_q && sel_q == TCM_W), .first(first_q), .x(w_rdata_b), .y(w_rsp_bus));
  xor_decorrelator #(.WIDTH(WORD_W), .XNOR(MEM_ONES)) u_a_decorr (
    .clk, .rst_n, .valid(rd_q && sel_q == TCM_A), .first(first_q), .x(a_rdata_b), .y(a_rsp_bus));

  assign bus_rsp = '{valid: rd_q, first: first_q,
                     data: (sel_q == TCM_W) ? w_rsp_bus : a_rsp_bus};

  tcm #(.DEPTH(W_DEPTH), .WORD_W(WORD_W)) u_wtcm (
    .clk,
    .a_en(pw_en), .a_we(1'b0), .a_be('0), .a_addr(pw_addr), .a_wdata('0), .a_rdata(w_rdata_a),
    .b_en(w_bwr || w_brd), .b_we(w_bwr), .b_be('1), .b_addr(bus_req.addr[W_AW-1:0]),
    .b_wdata(w_wdata_b), .b_rdata(w_rdata_b));

  tcm #(.DEPTH(A_DEPTH), .WORD_W(WORD_W)) u_atcm (
    .clk,
    .a_en(pa_en), .a_we(pa_we), .a_be(pa_be), .a_addr(pa_addr), .a_wdata(a_wdata_a), .a_rdata(a_rdata_a),
    .b_en(a_bwr || a_brd), .b_we(a_bwr), .b_be('1), .b_addr(bus_req.addr[A_AW-1:0]),
    .b_wdata(a_wdata_b), .b_rdata(a_rdata_b));

  // Weight de-coder (W TCM -> PE).
  sm_weight_decoder #(.LANES(LANES), .ONES(MEM_ONES)) u_wdec (
    .word(w_rdata_a), .sign(w_sign), .mag(w_mag));

  // Activation en/de-coder (PE <-> A TCM).
  act_zp_codec #(.LANES(LANES), .ZP(8'h80), .ONES(MEM_ONES)) u_acodec (
    .enc_in ({LANES{pa_wbyte}}),
    .enc_out(a_wdata_a),
    .dec_in (a_rdata_a),
    .dec_out(act_u8));

  pe #(.W_AW(W_AW), .A_AW(A_AW)) u_pe (
    .clk, .rst_n,
    .cmd_valid, .cmd, .cmd_ready, .done,
    .w_en(pw_en), .w_addr(pw_addr), .w_rdata(w_rdata_a), .w_sign, .w_mag,
    .a_en(pa_en), .a_we(pa_we), .a_be(pa_be), .a_addr(pa_addr), .a_wbyte(pa_wbyte),
    .a_act(act_u8),
    .out_valid, .out_sat_hi, .out_sat_lo);
endmodule
