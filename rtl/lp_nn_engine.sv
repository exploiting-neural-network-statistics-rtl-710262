// lp_nn_engine: an edge-AI inference engine whose memories and interconnects
// carry 8-bit weights and ReLU activations in low-power codes.
//
// Structure (bottom to top): N_PE tiles, each a PE with a private weight TCM
// and activation TCM; a cluster interconnect moving word blocks between the
// tiles and a shared unified memory; and a system-side port through which the
// rest of the SoC (DDR, flash, RAM over an AHB/AXI bus or NoC, outside this
// module) fills and drains the unified memory.
//
// Every memory (TCMs, unified memory) stores the memory code: sign-magnitude
// weights, XOR-ZP activations, with every bit inverted when
// MEM_ONES = 1. Every interconnect (cluster interconnect, system port) carries
// the bus code: the memory code through a per-bit X(N)OR decorrelator. A
// recoder (correlator in, decorrelator out) sits at each boundary between a
// memory and an interconnect. Inside a tile the PE reads weights and
// activations without decoding them back to int8: its MACs take uint8
// activations and uint7 + sign weights.
//
// Ports: `sys_req`/`sys_rsp` is a word port into the unified memory in the
// bus code (reads answer one cycle later; `first` restarts the recoders, so
// the host's coder must restart on the same word). `x_*` starts a cluster
// transfer (see cluster_interconnect). `pe_cmd_*` starts a PE run in each
// tile (see pe). Status outputs are per tile. The hierarchy follows the
// paper's system overview; the port protocols, the transfer engine and all
// memory sizes are this design's choices.
module lp_nn_engine
  import lp_pkg::*;
#(
  parameter int unsigned N_PE     = 4,
  parameter int unsigned W_DEPTH  = 1024,
  parameter int unsigned A_DEPTH  = 1024,
  parameter int unsigned UM_DEPTH = 4096,
  parameter bit          MEM_ONES = 1'b1,
  localparam int unsigned TW      = (N_PE > 1) ? $clog2(N_PE) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // system interconnect side (bus code)
  input  bus_req_t             sys_req,
  output bus_rsp_t             sys_rsp,
  // cluster transfer command
  input  logic                 x_valid,
  input  xfer_dir_e            x_dir,
  input  logic [TW-1:0]        x_tile,
  input  tcm_sel_e             x_sel,
  input  logic [ADDR_W-1:0]    x_um_addr,
  input  logic [ADDR_W-1:0]    x_tcm_addr,
  input  logic [ADDR_W-1:0]    x_len,
  output logic                 x_ready,
  output logic                 x_done,
  // PE commands and status
  input  logic    [N_PE-1:0]   pe_cmd_valid,
  input  pe_cmd_t [N_PE-1:0]   pe_cmd,
  output logic    [N_PE-1:0]   pe_cmd_ready,
  output logic    [N_PE-1:0]   pe_done,
  output logic    [N_PE-1:0]   pe_out_valid,
  output logic    [N_PE-1:0]   pe_sat_hi,
  output logic    [N_PE-1:0]   pe_sat_lo
);
  bus_req_t            c_req_bus, c_req_mem, s_req_mem;
  bus_rsp_t            c_rsp_bus, c_rsp_mem, s_rsp_mem;
  bus_req_t [N_PE-1:0] tile_req;
  bus_rsp_t [N_PE-1:0] tile_rsp;
  tcm_sel_e            tile_sel;
  word_t               c_wdata, s_wdata, c_rdata_bus, s_rdata_bus;

  // Recoder between unified memory and system interconnect.
  xor_correlator #(.WIDTH(WORD_W), .XNOR(MEM_ONES)) u_sys_corr (
    .clk, .rst_n, .valid(sys_req.valid && sys_req.we), .first(sys_req.first),
    .x(sys_req.data), .y(s_wdata));
  xor_decorrelator #(.WIDTH(WORD_W), .XNOR(MEM_ONES)) u_sys_decorr (
    .clk, .rst_n, .valid(s_rsp_mem.valid), .first(s_rsp_mem.first),
    .x(s_rsp_mem.data), .y(s_rdata_bus));

  always_comb begin
    s_req_mem      = sys_req;
    s_req_mem.data = s_wdata;
    sys_rsp        = s_rsp_mem;
    sys_rsp.data   = s_rdata_bus;
  end

  // Recoder between unified memory and cluster interconnect.
  xor_correlator #(.WIDTH(WORD_W), .XNOR(MEM_ONES)) u_um_corr (
    .clk, .rst_n, .valid(c_req_bus.valid && c_req_bus.we), .first(c_req_bus.first),
    .x(c_req_bus.data), .y(c_wdata));
  xor_decorrelator #(.WIDTH(WORD_W), .XNOR(MEM_ONES)) u_um_decorr (
    .clk, .rst_n, .valid(c_rsp_mem.valid), .first(c_rsp_mem.first),
    .x(c_rsp_mem.data), .y(c_rdata_bus));

  always_comb begin
    c_req_mem      = c_req_bus;
    c_req_mem.data = c_wdata;
    c_rsp_bus      = c_rsp_mem;
    c_rsp_bus.data = c_rdata_bus;
  end

  unified_memory #(.DEPTH(UM_DEPTH)) u_um (
    .clk, .rst_n,
    .c_req(c_req_mem), .c_rsp(c_rsp_mem),
    .s_req(s_req_mem), .s_rsp(s_rsp_mem));

  cluster_interconnect #(.N_PE(N_PE)) u_noc (
    .clk, .rst_n,
    .cmd_valid(x_valid), .cmd_dir(x_dir), .cmd_tile(x_tile), .cmd_sel(x_sel),
    .cmd_um_addr(x_um_addr), .cmd_tcm_addr(x_tcm_addr), .cmd_len(x_len),
    .cmd_ready(x_ready), .done(x_done),
    .um_req(c_req_bus), .um_rsp(c_rsp_bus),
    .tile_req, .tile_sel, .tile_rsp);

  for (genvar t = 0; t < N_PE; t++) begin : g_tile
    pe_tile #(.W_DEPTH(W_DEPTH), .A_DEPTH(A_DEPTH), .MEM_ONES(MEM_ONES)) u_tile (
      .clk, .rst_n,
      .bus_req(tile_req[t]), .bus_sel(tile_sel), .bus_rsp(tile_rsp[t]),
      .cmd_valid(pe_cmd_valid[t]), .cmd(pe_cmd[t]), .cmd_ready(pe_cmd_ready[t]),
      .done(pe_done[t]), .out_valid(pe_out_valid[t]),
      .out_sat_hi(pe_sat_hi[t]), .out_sat_lo(pe_sat_lo[t]));
  end
endmodule
