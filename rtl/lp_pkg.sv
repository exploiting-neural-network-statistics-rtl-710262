// lp_pkg: shared constants and types of the low-power coded DNN engine.
//
// The engine keeps 8-bit weights and activations in a "memory code" that
// minimises (or, with MEM_ONES, maximises) the 1-bit probability in SRAM, and
// moves them over interconnects in a "bus code" produced by a per-bit XOR
// decorrelator. A memory/bus word carries LANES bytes, one byte per MAC lane;
// every byte lane is treated as its own 8-bit stream by the coders.
//
// Bus transfers use the bus_req_t / bus_rsp_t structs below. The `first` flag
// marks the first word of a transfer: both ends of a link restart their coder
// state on it, so the decorrelator and correlator of a link stay in step even
// when a shared interconnect interleaves transfers to different endpoints.
// The struct layout is this design's own choice.
package lp_pkg;

  localparam int unsigned B      = 8;          // bits per weight / activation
  localparam int unsigned LANES  = 8;          // MACs of the inner-product unit
  localparam int unsigned WORD_W = B * LANES;  // one memory / bus word
  localparam int unsigned ADDR_W = 16;         // address field of bus structs

  typedef logic [WORD_W-1:0] word_t;

  // Request on a word-wide memory/bus port.
  typedef struct packed {
    logic              valid;
    logic              we;
    logic              first;   // first word of a transfer: restart coders
    logic [ADDR_W-1:0] addr;    // word address
    word_t             data;    // write data
  } bus_req_t;

  // Read response, one cycle after the read request.
  typedef struct packed {
    logic  valid;
    logic  first;
    word_t data;
  } bus_rsp_t;

  // Which TCM of a tile a transfer addresses.
  typedef enum logic {TCM_W = 1'b0, TCM_A = 1'b1} tcm_sel_e;

  // Direction of a cluster-interconnect transfer.
  typedef enum logic {XFER_TO_TCM = 1'b0, XFER_TO_UM = 1'b1} xfer_dir_e;

  // Command for one PE run: N_OUT outputs, each the inner product of N_WORDS
  // activation words with N_WORDS weight words, followed by requantisation.
  typedef struct packed {
    logic [15:0] a_addr;    // first activation word in the A TCM
    logic [15:0] w_addr;    // first header word of output 0 in the W TCM
    logic [15:0] n_words;   // words (of LANES MACs) per output
    logic [15:0] n_out;     // number of outputs
    logic [15:0] out_addr;  // byte address in the A TCM of output 0
    logic [5:0]  shift;     // right shift of the rescale product
  } pe_cmd_t;

endpackage
