// oobleck_pkg: types and constants shared by the Oobleck modular accelerator.
//
// The two-bit stage configuration follows the paper: the high bit says whether a
// sub-accelerator takes its input from its consumer queue (software) instead of from
// the previous stage, the low bit whether it pushes its output to its producer queue
// (software) instead of to the next stage. The stage kinds and the data widths of the
// case-study accelerators are this design's own encoding.
package oobleck_pkg;

  // Two-bit sub-accelerator configuration: {from_consumer_queue, to_producer_queue}.
  typedef struct packed {
    logic from_cq;  // 1: wait for data from the consumer queue; 0: take it from stage i-1
    logic to_pq;    // 1: push the result to the producer queue; 0: hand it to stage i+1
  } stage_cfg_t;

  // Function computed by the sub-accelerators of one tile.
  typedef enum logic [2:0] {
    KIND_PASS     = 3'd0,  // pass-through with emulated latency
    KIND_CHECKSUM = 3'd1,  // Viscosity pipelined_checksum example
    KIND_AES      = 3'd2,  // AES-128, rounds split evenly or as the 3-stage split
    KIND_FFT      = 3'd3,  // one radix-2 butterfly stage per sub-accelerator
    KIND_DCT      = 3'd4   // one step of the 8x8 AAN DCT per sub-accelerator
  } stage_kind_e;

  // FFT case study: 6 stages -> 64-point radix-2 transform.
  localparam int unsigned FFT_STAGES = 6;
  localparam int unsigned FFT_POINTS = 1 << FFT_STAGES;
  localparam int unsigned FFT_CW     = 16;              // bits per real/imaginary part
  localparam int unsigned FFT_DW     = FFT_POINTS * 2 * FFT_CW;

  // AES case study: {state, current round key}.
  localparam int unsigned AES_DW     = 256;
  localparam int unsigned AES_ROUNDS = 10;              // AES-128

  // Pass-through tile: up to 12 stages, the most the paper's sweeps use.
  localparam int unsigned PASS_STAGES = 12;

  // Pass-through and checksum sub-accelerators carry one 64-bit word.
  localparam int unsigned WORD_DW    = 64;

  // DCT case study: 8x8 block of 32-bit signed elements.
  localparam int unsigned DCT_STAGES = 10;
  localparam int unsigned DCT_DW     = 64 * 32;

endpackage
