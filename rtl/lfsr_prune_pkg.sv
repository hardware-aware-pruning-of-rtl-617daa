// lfsr_prune_pkg -- types and default sizes shared by the LFSR-indexed sparse
// fully connected layer engine.
//
// The 8-bit datapath width follows the published hardware parameters. The
// memory depths (4096 entries, the largest bank size listed for the design),
// the 24-bit LFSR, its polynomial and the 32-bit accumulator are this
// design's own choices.
package lfsr_prune_pkg;

  localparam int unsigned DATA_W  = 8;      // activations and weights
  localparam int unsigned ACC_W   = 32;     // output-buffer partial sums
  localparam int unsigned LFSR_W  = 24;     // LFSR state width
  // x^24 + x^23 + x^22 + x^17 + 1, bit i = coefficient c_i (bit 0 = constant
  // term). Primitive: period 2^24-1 = 16,777,215 steps, longer than the
  // largest layer (a 2048x2048 layer at 40% sparsity stores 2.5M weights).
  localparam logic [23:0] LFSR24_TAPS = 24'hC2_0001;
  localparam int unsigned MEM_DEPTH = 4096; // entries of each memory

  // Phases of one pass of the layer engine.
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,  // waiting for start
    ST_CLEAR = 2'd1,  // writing zeros into the output buffer
    ST_RUN   = 2'd2,  // one stored weight per cycle
    ST_DRAIN = 2'd3   // last operations leaving the pipeline
  } ctrl_state_e;

endpackage
