// cluster_interconnect: the parallel interconnect between the unified memory
// and the PE tiles, with a block-transfer engine.
//
// All words on it are in the bus code (decorrelated), so long wires toggle
// only when the memory-code value differs from its frequent value. A transfer
// command moves `len` consecutive words between unified-memory address
// `um_addr` and TCM address `tcm_addr` of tile `tile` (TCM `sel`):
//  - XFER_TO_TCM: reads are issued to the unified-memory port one per cycle;
//    each response is forwarded, in the cycle it arrives, as a write to the
//    tile.
//  - XFER_TO_UM: reads are issued to the tile one per cycle; each response is
//    forwarded as a write to the unified-memory port.
// The first word of a transfer carries `first`, so the decorrelator at the
// source and the correlator at the destination restart together; this lets
// one shared decorrelator at the memory feed many tiles.
//
// The paper only names this interconnect ("parallel / high-bandwidth"); the
// transfer engine, its command and the one-transfer-at-a-time bus are this
// design's own, simplest choice.
//
// Timing: one word per cycle. For a transfer of len words (len = 0 is taken
// as 1) accepted at clock edge 0, reads are issued in cycles 1..len, the last
// word is written at the end of cycle len + 1 and `done` is high for one
// cycle, cycle len + 2, when the engine is idle again (`cmd_ready`).
module cluster_interconnect
  import lp_pkg::*;
#(
  parameter int unsigned N_PE = 4,
  localparam int unsigned TW  = (N_PE > 1) ? $clog2(N_PE) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // transfer command
  input  logic                  cmd_valid,
  input  xfer_dir_e             cmd_dir,
  input  logic [TW-1:0]         cmd_tile,
  input  tcm_sel_e              cmd_sel,
  input  logic [ADDR_W-1:0]     cmd_um_addr,
  input  logic [ADDR_W-1:0]     cmd_tcm_addr,
  input  logic [ADDR_W-1:0]     cmd_len,
  output logic                  cmd_ready,
  output logic                  done,
  // unified-memory side (bus code)
  output bus_req_t              um_req,
  input  bus_rsp_t              um_rsp,
  // tile side (bus code)
  output bus_req_t [N_PE-1:0]   tile_req,
  output tcm_sel_e              tile_sel,
  input  bus_rsp_t [N_PE-1:0]   tile_rsp
);
  typedef enum logic [1:0] {X_IDLE, X_ISSUE, X_FINISH} xstate_e;

  xstate_e           state;
  xfer_dir_e         dir;
  logic [TW-1:0]     tile;
  tcm_sel_e          sel;
  logic [ADDR_W-1:0] um_base, tcm_base, len, n_iss, n_fwd;
  bus_rsp_t          src_rsp;

  assign cmd_ready = (state == X_IDLE);
  assign tile_sel  = sel;
  assign src_rsp   = (dir == XFER_TO_TCM) ? um_rsp : tile_rsp[tile];

  always_comb begin
    um_req   = '0;
    tile_req = '0;
    if (dir == XFER_TO_TCM) begin
      // source: unified memory
      um_req.valid = (state == X_ISSUE);
      um_req.we    = 1'b0;
      um_req.first = (n_iss == '0);
      um_req.addr  = um_base + n_iss;
      // destination: tile
      tile_req[tile].valid = src_rsp.valid;
      tile_req[tile].we    = 1'b1;
      tile_req[tile].first = src_rsp.first;
      tile_req[tile].addr  = tcm_base + n_fwd;
      tile_req[tile].data  = src_rsp.data;
    end else begin
      tile_req[tile].valid = (state == X_ISSUE);
      tile_req[tile].we    = 1'b0;
      tile_req[tile].first = (n_iss == '0);
      tile_req[tile].addr  = tcm_base + n_iss;
      um_req.valid = src_rsp.valid;
      um_req.we    = 1'b1;
      um_req.first = src_rsp.first;
      um_req.addr  = um_base + n_fwd;
      um_req.data  = src_rsp.data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= X_IDLE;
      dir      <= XFER_TO_TCM;
      tile     <= '0;
      sel      <= TCM_W;
      um_base  <= '0;
      tcm_base <= '0;
      len      <= '0;
      n_iss    <= '0;
      n_fwd    <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (state != X_IDLE && src_rsp.valid) n_fwd <= n_fwd + 1'b1;
      unique case (state)
        X_IDLE: if (cmd_valid) begin
          dir      <= cmd_dir;
          tile     <= cmd_tile;
          sel      <= cmd_sel;
          um_base  <= cmd_um_addr;
          tcm_base <= cmd_tcm_addr;
          len      <= (cmd_len == '0) ? ADDR_W'(1) : cmd_len;
          n_iss    <= '0;
          n_fwd    <= '0;
          state    <= X_ISSUE;
        end
        X_ISSUE: begin
          n_iss <= n_iss + 1'b1;
          if (n_iss + 1'b1 >= len) state <= X_FINISH;
        end
        X_FINISH: if (src_rsp.valid) begin  // last word forwarded
          state <= X_IDLE;
          done  <= 1'b1;
        end
        default: state <= X_IDLE;
      endcase
    end
  end
endmodule
