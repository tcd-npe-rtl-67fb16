// tcd_pkg: sizes and types shared by the TCD-NPE modules.
//
// The numeric defaults are those of the implemented engine: a 16 x 8 array of
// temporal-carry-deferring MACs working on signed 16-bit fixed-point data, a
// 36-bit accumulator (the quantiser input I(35:0)), a weight memory of 2048 rows
// of 128 words (512 KB) and two feature-map banks of 512 rows of 64 words
// (2 x 64 KB). The schedule-entry layout, the schedule depth and the run-length
// token format are choices of this design; the original work leaves them open.
package tcd_pkg;

  localparam int DW          = 16;    // data word: signed 16-bit fixed point
  localparam int ACC_W       = 36;    // accumulator / MAC result width
  localparam int NTG         = 16;    // TCD-MAC groups (rows of the PE array)
  localparam int TGS         = 8;     // TCD-MACs per group (columns)
  localparam int W_ROWS      = 2048;  // W-Mem rows
  localparam int W_WORDS     = 128;   // W-Mem row width in words (256 bytes)
  localparam int FM_ROWS     = 512;   // rows per FM-Mem bank (64 KB per bank)
  localparam int FM_WORDS    = 64;    // FM-Mem row width in words
  localparam int SCHED_DEPTH = 64;    // schedule entries held by the controller
  localparam int RUN_W       = 8;     // zero-run field of a run-length token
  localparam int TOK_W       = RUN_W + DW;

  // One roll of the PE array in a configuration NPE(K,N), N = NTG*TGS/K.
  // Produced off chip by the mapper; addresses already resolved.
  typedef struct packed {
    logic [2:0]  kcfg;     // log2(K): batches processed side by side
    logic [15:0] n_in;     // I: input features per neuron (>= 1)
    logic [10:0] w_base;   // first W-Mem row of this roll's weights
    logic [2:0]  ki;       // log2 of the partitions of the input FM layout
    logic [4:0]  rd_seg;   // input partition holding the roll's first batch
    logic [8:0]  rd_base;  // first FM row of the input features
    logic [2:0]  ko;       // log2 of the partitions of the output FM layout
    logic [4:0]  wr_seg;   // output partition for the roll's first batch
    logic [8:0]  wr_base;  // first FM row of the output layout
    logic [15:0] n_base;   // index of the roll's first neuron within the layer
    logic [4:0]  nb_act;   // batches actually present (<= K)
    logic [7:0]  nn_act;   // neurons actually present per batch (<= N)
    logic        relu;     // apply ReLU after quantisation
    logic        swap;     // last roll of a layer: swap the FM ping-pong banks
    logic        last;     // last roll of the schedule
  } sched_entry_t;

  localparam int SCHED_W = $bits(sched_entry_t);

  typedef enum logic [2:0] {
    C_IDLE  = 3'd0,
    C_FETCH = 3'd1,
    C_COMP  = 3'd2,   // carry-deferring mode, one input per cycle
    C_DRAIN = 3'd5,   // last input in the MACs
    C_PROP  = 3'd3,   // carry-propagation mode (PCPA), one cycle
    C_WB    = 3'd4    // quantise / activate / write back, one neuron per cycle
  } ctrl_state_t;

endpackage
