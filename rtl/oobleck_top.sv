// oobleck_top: the accelerator complex of an Oobleck system.
//
// It holds the modular accelerators the paper evaluates, each an oobleck_tile with its
// own Cohort queues and stage configuration:
//   tile 0  FFT,          6 stages (64-point radix-2, one butterfly stage each)
//   tile 1  AES-128,     11 stages (one round each)
//   tile 2  AES-128,      3 stages (rounds 0-2, 3-6, 7-10)
//   tile 3  pass-through, 12 stages of pass_latency cycles each (shorter chains are
//           run by taking the result from an earlier stage's producer queue)
//   tile 4  checksum,     1 stage (the Viscosity pipelined_checksum example)
//   tile 5  2-D DCT,     10 stages (8x8 AAN DCT: five steps on rows, five on columns)
// Software, which in the paper runs on the host cores and reaches the queues through
// cache-coherent memory, is outside this module: it sees one push port and one pop
// port, both addressed by tile and stage, and one configuration write port. Words are
// DW = 2048 bits wide at this boundary, the FFT and DCT word; narrower tiles use the
// low bits.
// The pop port takes words from the tiles in round-robin order. The tile set and the
// shared port are this design's arrangement; the paper describes each accelerator on
// its own.
module oobleck_top
  import oobleck_pkg::*;
#(
  parameter int unsigned CQ_DEPTH = 4,
  parameter int unsigned LW       = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  // software push into a consumer queue
  input  logic              sw_cq_valid,
  output logic              sw_cq_ready,
  input  logic [2:0]        sw_cq_tile,
  input  logic [3:0]        sw_cq_stage,
  input  logic [FFT_DW-1:0] sw_cq_data,
  // software pop from the producer queues
  output logic              sw_pq_valid,
  input  logic              sw_pq_ready,
  output logic [2:0]        sw_pq_tile,
  output logic [3:0]        sw_pq_stage,
  output logic [FFT_DW-1:0] sw_pq_data,
  // software configuration write
  input  logic              cfg_we,
  input  logic [2:0]        cfg_tile,
  input  logic [3:0]        cfg_stage,
  input  stage_cfg_t        cfg_wdata,
  // cycles spent in each pass-through stage
  input  logic [LW-1:0]     pass_latency,
  // input handshakes of every sub-accelerator, tile t in stage_fire[t]
  output logic [15:0]       stage_fire [6]
);
  localparam int unsigned NT = 6;
  localparam int unsigned DW = FFT_DW;

  logic [NT-1:0] cq_sel, cq_rdy, pq_vld, pq_rdy, cfg_sel;
  logic [3:0]    pq_stg [NT];
  logic [DW-1:0] pq_dat [NT];
  logic          any;
  logic [2:0]    grant;

  for (genvar t = 0; t < int'(NT); t++) begin : g_sel
    assign cq_sel[t]  = sw_cq_valid && (sw_cq_tile == 3'(t));
    assign cfg_sel[t] = cfg_we && (cfg_tile == 3'(t));
    assign pq_rdy[t]  = sw_pq_ready && any && (grant == 3'(t));
  end

  // ---- tile 0: FFT, 6 stages ----
  logic [2:0]        fft_pq_stg;
  logic [FFT_DW-1:0] fft_pq_dat;
  oobleck_tile #(.KIND(KIND_FFT), .NSTAGES(FFT_STAGES), .DW(FFT_DW), .CQ_DEPTH(CQ_DEPTH)) u_fft (
    .clk, .rst_n,
    .sw_cq_valid(cq_sel[0]), .sw_cq_ready(cq_rdy[0]), .sw_cq_stage(sw_cq_stage[2:0]),
    .sw_cq_data(sw_cq_data),
    .sw_pq_valid(pq_vld[0]), .sw_pq_ready(pq_rdy[0]), .sw_pq_stage(fft_pq_stg),
    .sw_pq_data(fft_pq_dat),
    .cfg_we(cfg_sel[0]), .cfg_stage(cfg_stage[2:0]), .cfg_wdata, .pass_latency,
    .stage_fire(stage_fire[0][5:0]));
  assign stage_fire[0][15:6] = '0;
  assign pq_stg[0] = {1'b0, fft_pq_stg};
  assign pq_dat[0] = fft_pq_dat;

  // ---- tile 1: AES, 11 stages ----
  logic [3:0]        aes11_pq_stg;
  logic [AES_DW-1:0] aes11_pq_dat;
  oobleck_tile #(.KIND(KIND_AES), .NSTAGES(11), .DW(AES_DW), .CQ_DEPTH(CQ_DEPTH)) u_aes11 (
    .clk, .rst_n,
    .sw_cq_valid(cq_sel[1]), .sw_cq_ready(cq_rdy[1]), .sw_cq_stage(sw_cq_stage),
    .sw_cq_data(sw_cq_data[AES_DW-1:0]),
    .sw_pq_valid(pq_vld[1]), .sw_pq_ready(pq_rdy[1]), .sw_pq_stage(aes11_pq_stg),
    .sw_pq_data(aes11_pq_dat),
    .cfg_we(cfg_sel[1]), .cfg_stage(cfg_stage), .cfg_wdata, .pass_latency,
    .stage_fire(stage_fire[1][10:0]));
  assign stage_fire[1][15:11] = '0;
  assign pq_stg[1] = aes11_pq_stg;
  assign pq_dat[1] = DW'(aes11_pq_dat);

  // ---- tile 2: AES, 3 stages ----
  logic [1:0]        aes3_pq_stg;
  logic [AES_DW-1:0] aes3_pq_dat;
  oobleck_tile #(.KIND(KIND_AES), .NSTAGES(3), .DW(AES_DW), .CQ_DEPTH(CQ_DEPTH)) u_aes3 (
    .clk, .rst_n,
    .sw_cq_valid(cq_sel[2]), .sw_cq_ready(cq_rdy[2]), .sw_cq_stage(sw_cq_stage[1:0]),
    .sw_cq_data(sw_cq_data[AES_DW-1:0]),
    .sw_pq_valid(pq_vld[2]), .sw_pq_ready(pq_rdy[2]), .sw_pq_stage(aes3_pq_stg),
    .sw_pq_data(aes3_pq_dat),
    .cfg_we(cfg_sel[2]), .cfg_stage(cfg_stage[1:0]), .cfg_wdata, .pass_latency,
    .stage_fire(stage_fire[2][2:0]));
  assign stage_fire[2][15:3] = '0;
  assign pq_stg[2] = {2'b0, aes3_pq_stg};
  assign pq_dat[2] = DW'(aes3_pq_dat);

  // ---- tile 3: pass-through, 6 stages ----
  logic [3:0]         pass_pq_stg;
  logic [WORD_DW-1:0] pass_pq_dat;
  oobleck_tile #(.KIND(KIND_PASS), .NSTAGES(PASS_STAGES), .DW(WORD_DW), .LW(LW),
                 .CQ_DEPTH(CQ_DEPTH)) u_pass (
    .clk, .rst_n,
    .sw_cq_valid(cq_sel[3]), .sw_cq_ready(cq_rdy[3]), .sw_cq_stage(sw_cq_stage),
    .sw_cq_data(sw_cq_data[WORD_DW-1:0]),
    .sw_pq_valid(pq_vld[3]), .sw_pq_ready(pq_rdy[3]), .sw_pq_stage(pass_pq_stg),
    .sw_pq_data(pass_pq_dat),
    .cfg_we(cfg_sel[3]), .cfg_stage(cfg_stage), .cfg_wdata, .pass_latency,
    .stage_fire(stage_fire[3][PASS_STAGES-1:0]));
  assign stage_fire[3][15:PASS_STAGES] = '0;
  assign pq_stg[3] = pass_pq_stg;
  assign pq_dat[3] = DW'(pass_pq_dat);

  // ---- tile 4: checksum, 1 stage ----
  logic               sum_pq_stg;
  logic [WORD_DW-1:0] sum_pq_dat;
  oobleck_tile #(.KIND(KIND_CHECKSUM), .NSTAGES(1), .DW(WORD_DW), .CQ_DEPTH(CQ_DEPTH)) u_sum (
    .clk, .rst_n,
    .sw_cq_valid(cq_sel[4]), .sw_cq_ready(cq_rdy[4]), .sw_cq_stage(sw_cq_stage[0]),
    .sw_cq_data(sw_cq_data[WORD_DW-1:0]),
    .sw_pq_valid(pq_vld[4]), .sw_pq_ready(pq_rdy[4]), .sw_pq_stage(sum_pq_stg),
    .sw_pq_data(sum_pq_dat),
    .cfg_we(cfg_sel[4]), .cfg_stage(cfg_stage[0]), .cfg_wdata, .pass_latency,
    .stage_fire(stage_fire[4][0:0]));
  assign stage_fire[4][15:1] = '0;
  assign pq_stg[4] = {3'b0, sum_pq_stg};
  assign pq_dat[4] = DW'(sum_pq_dat);

  // ---- tile 5: DCT, 10 stages ----
  logic [3:0]        dct_pq_stg;
  logic [DCT_DW-1:0] dct_pq_dat;
  oobleck_tile #(.KIND(KIND_DCT), .NSTAGES(DCT_STAGES), .DW(DCT_DW), .CQ_DEPTH(CQ_DEPTH)) u_dct (
    .clk, .rst_n,
    .sw_cq_valid(cq_sel[5]), .sw_cq_ready(cq_rdy[5]), .sw_cq_stage(sw_cq_stage),
    .sw_cq_data(sw_cq_data[DCT_DW-1:0]),
    .sw_pq_valid(pq_vld[5]), .sw_pq_ready(pq_rdy[5]), .sw_pq_stage(dct_pq_stg),
    .sw_pq_data(dct_pq_dat),
    .cfg_we(cfg_sel[5]), .cfg_stage(cfg_stage), .cfg_wdata, .pass_latency,
    .stage_fire(stage_fire[5][9:0]));
  assign stage_fire[5][15:10] = '0;
  assign pq_stg[5] = dct_pq_stg;
  assign pq_dat[5] = DW'(dct_pq_dat);

  // push: only the addressed tile sees valid
  assign sw_cq_ready = (int'(sw_cq_tile) < int'(NT)) && cq_rdy[sw_cq_tile];

  // pop: round robin over tiles
  rr_arbiter #(.N(NT), .IW(3)) u_arb (
    .clk, .rst_n, .req(pq_vld), .out_ready(sw_pq_ready), .any, .grant);

  assign sw_pq_valid = any;
  assign sw_pq_tile  = grant;
  assign sw_pq_stage = pq_stg[grant];
  assign sw_pq_data  = pq_dat[grant];
endmodule
