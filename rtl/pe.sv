// pe: processing element. Computes output activations as inner products of
// activation words and weight words, then requantises them to int8.
//
// A command (lp_pkg::pe_cmd_t) asks for n_out outputs o = 0..n_out-1. Each
// output has a block of 1 + n_words weight-TCM words starting at
// w_addr + o*(1+n_words): a header word {mult[31:0], bias[31:0]} (the per
// output rescale factor and the compile-time corrected bias), then n_words
// words of LANES sign-magnitude weights. All outputs use the same n_words
// activation words from a_addr (a fully connected layer or a 1x1
// convolution). Output o is written as one byte to byte address out_addr + o
// of the activation TCM.
//
// The PE sees decoded operands: activations as uint8 (XOR-ZP, processed
// without decoding) and weights as sign + uint7 magnitude; the coders that
// produce them, and the one that encodes the int8 result, sit in pe_tile
// between the PE and its TCMs. The header word is used as stored. The header
// layout, command format and sequencing are this design's choices; the paper
// describes the arithmetic (ipu, requantizer), not the control.
//
// Timing per output: 1 cycle header read, 1 cycle accumulator load, n_words
// cycles streaming one word pair per cycle into the IPU (LANES MACs per
// cycle), 3 cycles pipeline drain and rescale, 1 cycle write-back, so
// n_words + 6 cycles; `done` pulses for one cycle after the last write.
// `cmd_ready` is high in idle; a command is taken when cmd_valid && cmd_ready.
module pe
  import lp_pkg::*;
#(
  parameter int unsigned W_AW   = 10,
  parameter int unsigned A_AW   = 10
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command
  input  logic                  cmd_valid,
  input  pe_cmd_t               cmd,
  output logic                  cmd_ready,
  output logic                  done,
  // weight TCM, read only
  output logic                  w_en,
  output logic [W_AW-1:0]       w_addr,
  input  logic [LANES*8-1:0]    w_rdata,   // as stored (for the header)
  input  logic [LANES-1:0]      w_sign,    // decoded from w_rdata
  input  logic [LANES-1:0][6:0] w_mag,
  // activation TCM
  output logic                  a_en,
  output logic                  a_we,
  output logic [LANES-1:0]      a_be,
  output logic [A_AW-1:0]       a_addr,
  output logic [7:0]            a_wbyte,   // int8 result, before coding
  input  logic [LANES-1:0][7:0] a_act,     // decoded uint8 activations
  // status, one-cycle pulses per written output
  output logic                  out_valid,
  output logic                  out_sat_hi,
  output logic                  out_sat_lo
);
  typedef enum logic [2:0] {S_IDLE, S_HDR, S_LOAD, S_RUN, S_DRAIN, S_WB} state_e;

  state_e             state;
  pe_cmd_t            c;
  logic [15:0]        o_cnt, k_cnt;
  logic [15:0]        w_ptr;
  logic               rd_valid_q;
  logic signed [31:0] mult_q;
  logic [1:0]         drain_cnt;
  logic               acc_init;
  logic               rq_in_valid, rq_out_valid, rq_hi, rq_lo;
  logic signed [31:0] acc;
  logic signed [7:0]  rq_q;
  logic               ipu_busy;
  logic [15:0]        out_byte;

  assign cmd_ready = (state == S_IDLE);
  assign acc_init  = (state == S_LOAD);
  assign out_byte  = c.out_addr + o_cnt;

  ipu #(.LANES(LANES)) u_ipu (
    .clk, .rst_n,
    .in_valid   (rd_valid_q),
    .act        (a_act),
    .wmag       (w_mag),
    .wsign      (w_sign),
    .acc_init   (acc_init),
    .init_value (signed'(w_rdata[31:0])),
    .acc        (acc),
    .busy       (ipu_busy)
  );

  requantizer u_rq (
    .clk, .rst_n,
    .in_valid  (rq_in_valid),
    .acc       (acc),
    .mult      (mult_q),
    .shift     (c.shift),
    .out_valid (rq_out_valid),
    .q         (rq_q),
    .sat_hi    (rq_hi),
    .sat_lo    (rq_lo)
  );

  assign rq_in_valid = (state == S_DRAIN) && (drain_cnt == 2'd2);

  // TCM requests.
  always_comb begin
    w_en    = 1'b0;
    w_addr  = w_ptr[W_AW-1:0];
    a_en    = 1'b0;
    a_we    = 1'b0;
    a_be    = '0;
    a_addr  = A_AW'(c.a_addr + k_cnt);
    a_wbyte = rq_q;
    unique case (state)
      S_HDR: w_en = 1'b1;
      S_RUN: begin
        w_en = 1'b1;
        a_en = 1'b1;
      end
      S_WB: begin
        a_en   = 1'b1;
        a_we   = 1'b1;
        a_addr = A_AW'(out_byte >> $clog2(LANES));
        a_be   = LANES'(1) << out_byte[$clog2(LANES)-1:0];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      c          <= '0;
      o_cnt      <= '0;
      k_cnt      <= '0;
      w_ptr      <= '0;
      rd_valid_q <= 1'b0;
      mult_q     <= '0;
      drain_cnt  <= '0;
      done       <= 1'b0;
    end else begin
      done       <= 1'b0;
      rd_valid_q <= (state == S_RUN);
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c     <= cmd;
          o_cnt <= '0;
          w_ptr <= cmd.w_addr;
          state <= S_HDR;
        end
        S_HDR: begin
          w_ptr <= w_ptr + 16'd1;
          k_cnt <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin              // header on w_rdata: bias into IPU
          mult_q <= signed'(w_rdata[63:32]);
          state  <= S_RUN;
        end
        S_RUN: begin
          w_ptr <= w_ptr + 16'd1;
          k_cnt <= k_cnt + 16'd1;
          if (k_cnt + 16'd1 >= c.n_words) begin
            drain_cnt <= '0;
            state     <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 2'd1;
          if (drain_cnt == 2'd2) state <= S_WB;
        end
        S_WB: begin
          o_cnt <= o_cnt + 16'd1;
          if (o_cnt + 16'd1 >= c.n_out) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_HDR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign out_valid  = rq_out_valid;
  assign out_sat_hi = rq_out_valid && rq_hi;
  assign out_sat_lo = rq_out_valid && rq_lo;

  // The requantised result is written in the cycle it appears, and the
  // rescale only starts once the IPU pipeline is empty.
  assert property (@(posedge clk) disable iff (!rst_n) rq_out_valid |-> state == S_WB);
  assert property (@(posedge clk) disable iff (!rst_n) rq_in_valid |-> !ipu_busy && !rd_valid_q);
endmodule
