// cohort_engine: the accelerator-side end of the modified Cohort engine for one
// modular accelerator.
//
// Cohort connects software threads and accelerators through FIFO queues. The paper's
// modification gives every sub-accelerator its own pair of queues instead of one per
// tile, and lets software write each sub-accelerator's two-bit configuration. This
// module holds, for each of NSTAGES sub-accelerators, a consumer queue (software to
// hardware), a producer queue (hardware to software) and a configuration register.
// Software reaches them through three ports: a push port that names the stage whose
// consumer queue receives the word, a pop port that returns words from the producer
// queues in round-robin order together with the stage they came from, and a
// configuration write port. At reset the chain is configured fault-free: stage 0 reads
// its consumer queue, the last stage writes its producer queue, and all other links
// are direct. In the paper the queues live in cache-coherent memory and are moved by
// Cohort's memory engine; here they are on-chip FIFOs of CQ_DEPTH words, and the
// memory side is left to whatever drives the software ports.
module cohort_engine
  import oobleck_pkg::*;
#(
  parameter int unsigned DW       = 64,
  parameter int unsigned NSTAGES  = 6,
  parameter int unsigned CQ_DEPTH = 4,
  parameter int unsigned SW       = (NSTAGES > 1) ? $clog2(NSTAGES) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // software: push into a consumer queue
  input  logic                sw_cq_valid,
  output logic                sw_cq_ready,
  input  logic [SW-1:0]       sw_cq_stage,
  input  logic [DW-1:0]       sw_cq_data,
  // software: pop from the producer queues
  output logic                sw_pq_valid,
  input  logic                sw_pq_ready,
  output logic [SW-1:0]       sw_pq_stage,
  output logic [DW-1:0]       sw_pq_data,
  // software: configuration write
  input  logic                cfg_we,
  input  logic [SW-1:0]       cfg_stage,
  input  stage_cfg_t          cfg_wdata,
  output stage_cfg_t          cfg       [NSTAGES],
  // sub-accelerator side
  output logic [NSTAGES-1:0]  cq_valid,
  input  logic [NSTAGES-1:0]  cq_ready,
  output logic [DW-1:0]       cq_data   [NSTAGES],
  input  logic [NSTAGES-1:0]  pq_valid,
  output logic [NSTAGES-1:0]  pq_ready,
  input  logic [DW-1:0]       pq_data   [NSTAGES]
);
  logic [NSTAGES-1:0] cq_in_ready, pq_out_valid;
  logic [DW-1:0]      pq_out_data [NSTAGES];
  logic               any;
  logic [SW-1:0]      grant;

  for (genvar i = 0; i < int'(NSTAGES); i++) begin : g_q
    cohort_queue #(.DW(DW), .DEPTH(CQ_DEPTH)) u_cq (
      .clk, .rst_n,
      .in_valid (sw_cq_valid && (sw_cq_stage == SW'(i))),
      .in_ready (cq_in_ready[i]),
      .in_data  (sw_cq_data),
      .out_valid(cq_valid[i]),
      .out_ready(cq_ready[i]),
      .out_data (cq_data[i])
    );
    cohort_queue #(.DW(DW), .DEPTH(CQ_DEPTH)) u_pq (
      .clk, .rst_n,
      .in_valid (pq_valid[i]),
      .in_ready (pq_ready[i]),
      .in_data  (pq_data[i]),
      .out_valid(pq_out_valid[i]),
      .out_ready(sw_pq_ready && any && (grant == SW'(i))),
      .out_data (pq_out_data[i])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cfg[i].from_cq <= (i == 0);
        cfg[i].to_pq   <= (i == int'(NSTAGES) - 1);
      end else if (cfg_we && cfg_stage == SW'(i)) begin
        cfg[i] <= cfg_wdata;
      end
    end
  end

  assign sw_cq_ready = (int'(sw_cq_stage) < int'(NSTAGES)) && cq_in_ready[sw_cq_stage];

  rr_arbiter #(.N(NSTAGES), .IW(SW)) u_arb (
    .clk, .rst_n,
    .req(pq_out_valid), .out_ready(sw_pq_ready),
    .any, .grant
  );

  assign sw_pq_valid = any;
  assign sw_pq_stage = grant;
  assign sw_pq_data  = pq_out_data[grant];
endmodule
