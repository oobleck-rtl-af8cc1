// oobleck_tile: one modular fault-tolerant accelerator.
//
// The accelerator computing f is split into NSTAGES sub-accelerators f_1..f_n with
// f = f_n o ... o f_1. Each sub-accelerator sits between an oobleck_bypass router and
// a pair of Cohort queues in the cohort_engine. With the reset configuration the chain
// is fault-free: software pushes a word into stage 0's consumer queue, it flows through
// every stage over the direct latency-insensitive links, and the last stage's result
// appears in its producer queue. When stage k is faulty, software writes to_pq on stage
// k-1 and from_cq on stage k+1; the word then leaves the chain after stage k-1, software
// runs f_k on it and pushes the result into stage k+1's consumer queue, and the chain
// carries on from there. Any set of stages can be bypassed in this way.
//
// KIND picks the function of the sub-accelerators (pass-through, checksum, AES, FFT,
// DCT) and DW the width of the word that flows between them; pass_latency sets the
// cycles per stage of a pass-through tile and is ignored by the others. For AES the eleven cipher
// rounds (round 0 = initial key addition) are split over the stages as evenly as
// integer division allows: stage i runs rounds floor(11i/n) .. floor(11(i+1)/n)-1,
// which gives one round per stage for 11 stages and rounds 0-2, 3-6, 7-10 for three.
// The tile has no clock-domain crossing and adds no cycles beyond those of its queues
// and stages.
module oobleck_tile
  import oobleck_pkg::*;
#(
  parameter stage_kind_e KIND         = KIND_PASS,
  parameter int unsigned NSTAGES      = 6,
  parameter int unsigned DW           = WORD_DW,
  parameter int unsigned LW           = 20,
  parameter int unsigned CQ_DEPTH     = 4,
  parameter int unsigned SW           = (NSTAGES > 1) ? $clog2(NSTAGES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sw_cq_valid,
  output logic          sw_cq_ready,
  input  logic [SW-1:0] sw_cq_stage,
  input  logic [DW-1:0] sw_cq_data,
  output logic          sw_pq_valid,
  input  logic          sw_pq_ready,
  output logic [SW-1:0] sw_pq_stage,
  output logic [DW-1:0] sw_pq_data,
  input  logic          cfg_we,
  input  logic [SW-1:0] cfg_stage,
  input  stage_cfg_t    cfg_wdata,
  // cycles per pass-through stage (used only when KIND == KIND_PASS)
  input  logic [LW-1:0] pass_latency,
  // per-stage handshake of the sub-accelerator inputs, for observation
  output logic [NSTAGES-1:0] stage_fire
);
  stage_cfg_t         cfg [NSTAGES];
  logic [NSTAGES-1:0] cq_valid, cq_ready, pq_valid, pq_ready;
  logic [DW-1:0]      cq_data [NSTAGES];
  logic [DW-1:0]      pq_data [NSTAGES];

  // link[i]: stage i -> stage i+1
  logic [NSTAGES-1:0] link_valid, link_ready;
  logic [DW-1:0]      link_data [NSTAGES];

  cohort_engine #(.DW(DW), .NSTAGES(NSTAGES), .CQ_DEPTH(CQ_DEPTH), .SW(SW)) u_cohort (
    .clk, .rst_n,
    .sw_cq_valid, .sw_cq_ready, .sw_cq_stage, .sw_cq_data,
    .sw_pq_valid, .sw_pq_ready, .sw_pq_stage, .sw_pq_data,
    .cfg_we, .cfg_stage, .cfg_wdata, .cfg,
    .cq_valid, .cq_ready, .cq_data,
    .pq_valid, .pq_ready, .pq_data
  );

  for (genvar i = 0; i < int'(NSTAGES); i++) begin : g_stage
    logic          u_in_valid, u_in_ready, u_out_valid, u_out_ready;
    logic [DW-1:0] u_in_data, u_out_data;
    logic          prev_valid, prev_ready;
    logic [DW-1:0] prev_data;

    if (i == 0) begin : g_first
      assign prev_valid = 1'b0;
      assign prev_data  = '0;
    end else begin : g_mid
      assign prev_valid        = link_valid[i-1];
      assign prev_data         = link_data[i-1];
      assign link_ready[i-1]   = prev_ready;
    end
    if (i == int'(NSTAGES) - 1) begin : g_last
      assign link_ready[i] = 1'b0;     // no stage after the last one
    end

    oobleck_bypass #(.DW(DW)) u_bypass (
      .cfg           (cfg[i]),
      .prev_valid, .prev_ready, .prev_data,
      .cq_valid      (cq_valid[i]), .cq_ready(cq_ready[i]), .cq_data(cq_data[i]),
      .unit_in_valid (u_in_valid),  .unit_in_ready(u_in_ready), .unit_in_data(u_in_data),
      .unit_out_valid(u_out_valid), .unit_out_ready(u_out_ready), .unit_out_data(u_out_data),
      .next_valid    (link_valid[i]), .next_ready(link_ready[i]), .next_data(link_data[i]),
      .pq_valid      (pq_valid[i]), .pq_ready(pq_ready[i]), .pq_data(pq_data[i])
    );

    assign stage_fire[i] = u_in_valid && u_in_ready;

    if (KIND == KIND_AES) begin : g_aes
      localparam int unsigned FIRST = (i * (AES_ROUNDS + 1)) / NSTAGES;
      localparam int unsigned LAST  = ((i + 1) * (AES_ROUNDS + 1)) / NSTAGES;
      aes_stage #(.DW(DW), .FIRST_ROUND(FIRST), .NUM_ROUNDS(LAST - FIRST)) u_unit (
        .clk, .rst_n,
        .in_valid(u_in_valid), .in_ready(u_in_ready), .in_data(u_in_data),
        .out_valid(u_out_valid), .out_ready(u_out_ready), .out_data(u_out_data));
    end else if (KIND == KIND_FFT) begin : g_fft
      fft_stage #(.DW(DW), .STAGE(i)) u_unit (
        .clk, .rst_n,
        .in_valid(u_in_valid), .in_ready(u_in_ready), .in_data(u_in_data),
        .out_valid(u_out_valid), .out_ready(u_out_ready), .out_data(u_out_data));
    end else if (KIND == KIND_DCT) begin : g_dct
      dct_stage #(.DW(DW), .STAGE(i)) u_unit (
        .clk, .rst_n,
        .in_valid(u_in_valid), .in_ready(u_in_ready), .in_data(u_in_data),
        .out_valid(u_out_valid), .out_ready(u_out_ready), .out_data(u_out_data));
    end else if (KIND == KIND_CHECKSUM) begin : g_sum
      checksum_stage #(.DW(DW)) u_unit (
        .clk, .rst_n,
        .in_valid(u_in_valid), .in_ready(u_in_ready), .in_data(u_in_data),
        .out_valid(u_out_valid), .out_ready(u_out_ready), .out_data(u_out_data));
    end else begin : g_pass
      passthrough_stage #(.DW(DW), .LW(LW)) u_unit (
        .clk, .rst_n, .latency(pass_latency),
        .in_valid(u_in_valid), .in_ready(u_in_ready), .in_data(u_in_data),
        .out_valid(u_out_valid), .out_ready(u_out_ready), .out_data(u_out_data));
    end
  end
endmodule
