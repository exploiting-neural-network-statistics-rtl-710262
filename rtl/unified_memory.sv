// unified_memory: the shared on-chip memory of the AI engine, written as a
// dual-ported array of words in the memory code.
//
// It sits between the cluster interconnect (port C) and the system
// interconnect (port S), holding weights on their way to the PE TCMs and
// activations spilled from them. Like the TCMs it stores the memory code and
// does not interpret it; the recoders that change to the bus code sit outside.
//
// Interface and timing: each port takes a lp_pkg::bus_req_t. A valid request
// with `we` = 1 writes `data` to `addr`; with `we` = 0 it reads, and the
// bus_rsp_t response (valid, the request's `first` flag, data) follows one
// cycle later. Addresses are taken modulo DEPTH. Depth is this design's
// choice; the paper gives no memory sizes.
module unified_memory
  import lp_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t c_req,
  output bus_rsp_t c_rsp,
  input  bus_req_t s_req,
  output bus_rsp_t s_rsp
);
  word_t mem [DEPTH];
  word_t c_rdata, s_rdata;
  logic  c_rv, c_rf, s_rv, s_rf;

  always_ff @(posedge clk) begin
    if (c_req.valid) begin
      if (c_req.we) mem[c_req.addr[AW-1:0]] <= c_req.data;
      else          c_rdata <= mem[c_req.addr[AW-1:0]];
    end
    if (s_req.valid) begin
      if (s_req.we) mem[s_req.addr[AW-1:0]] <= s_req.data;
      else          s_rdata <= mem[s_req.addr[AW-1:0]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_rv <= 1'b0; c_rf <= 1'b0; s_rv <= 1'b0; s_rf <= 1'b0;
    end else begin
      c_rv <= c_req.valid && !c_req.we;
      c_rf <= c_req.first;
      s_rv <= s_req.valid && !s_req.we;
      s_rf <= s_req.first;
    end
  end

  assign c_rsp = '{valid: c_rv, first: c_rf, data: c_rdata};
  assign s_rsp = '{valid: s_rv, first: s_rf, data: s_rdata};
endmodule
