// oobleck_bypass: the latency-insensitive routing around one sub-accelerator.
//
// Each sub-accelerator has two sets of interfaces: one to its neighbours (the
// queue-bypass path) and one to software through its Cohort consumer and producer
// queues. The paper's two-bit configuration picks between them: the high bit
// (from_cq) makes the sub-accelerator wait for data from its consumer queue rather than
// the previous stage, the low bit (to_pq) makes it push its result to its producer
// queue rather than to the next stage. When a stage is found faulty, software sets
// to_pq on the stage before it and from_cq on the stage after it, runs the faulty
// stage's function itself, and the faulty stage receives nothing.
//
// All paths are valid/ready handshakes and the module is purely combinational: it adds
// no cycle. The side that is not selected sees valid = 0 and ready = 0, so a word is
// never duplicated or dropped. Reconfiguring while a word is in flight is left to
// software (the paper does not say how a stage is drained).
module oobleck_bypass
  import oobleck_pkg::*;
#(
  parameter int unsigned DW = 64
) (
  input  stage_cfg_t    cfg,
  // from the previous stage (bypass path)
  input  logic          prev_valid,
  output logic          prev_ready,
  input  logic [DW-1:0] prev_data,
  // from this stage's consumer queue (software)
  input  logic          cq_valid,
  output logic          cq_ready,
  input  logic [DW-1:0] cq_data,
  // into the sub-accelerator
  output logic          unit_in_valid,
  input  logic          unit_in_ready,
  output logic [DW-1:0] unit_in_data,
  // out of the sub-accelerator
  input  logic          unit_out_valid,
  output logic          unit_out_ready,
  input  logic [DW-1:0] unit_out_data,
  // to the next stage (bypass path)
  output logic          next_valid,
  input  logic          next_ready,
  output logic [DW-1:0] next_data,
  // to this stage's producer queue (software)
  output logic          pq_valid,
  input  logic          pq_ready,
  output logic [DW-1:0] pq_data
);
  always_comb begin
    unit_in_valid  = cfg.from_cq ? cq_valid : prev_valid;
    unit_in_data   = cfg.from_cq ? cq_data  : prev_data;
    cq_ready       = cfg.from_cq  && unit_in_ready;
    prev_ready     = !cfg.from_cq && unit_in_ready;

    pq_valid       = cfg.to_pq  && unit_out_valid;
    next_valid     = !cfg.to_pq && unit_out_valid;
    pq_data        = unit_out_data;
    next_data      = unit_out_data;
    unit_out_ready = cfg.to_pq ? pq_ready : next_ready;
  end
endmodule
