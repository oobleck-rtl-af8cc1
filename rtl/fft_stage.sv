// fft_stage: one butterfly stage of the FFT sub-accelerator chain.
//
// The paper's FFT accelerator has six stages, one stage of butterflies each, which is
// a 64-point radix-2 transform. This design uses decimation in frequency: stage s
// pairs points a and a+H, with H = 32 >> s, and computes
//     a' = (x[a] + x[a+H]) / 2
//     b' = ((x[a] - x[a+H]) * W^(p * 2^s)) / 2,   W = exp(-2*pi*i/64), p = a mod H.
// Halving in every stage keeps the numbers in range, so six stages give DFT/64. The
// last stage also undoes the bit-reversed order, so the chain's output is in natural
// order. A word is 64 complex points of two 16-bit signed parts; point k sits in bits
// [32k +: 32], real part in the upper half. Twiddle factors are Q1.14 constants
// worked out at elaboration (Taylor series of cos and sin). Point count, number
// format, scaling and DIF ordering are this design's choices: the paper says only that
// each stage of butterflies is one stage. One word per cycle, one cycle of latency.
module fft_stage
  import oobleck_pkg::*;
#(
  parameter int unsigned DW    = FFT_DW,
  parameter int unsigned STAGE = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data
);
  localparam int unsigned N    = FFT_POINTS;
  localparam int unsigned LOGN = FFT_STAGES;
  localparam int unsigned H    = N >> (STAGE + 1);
  localparam int unsigned CW   = FFT_CW;

  // cos and sin of 2*pi*k/N scaled by 2^14, rounded to nearest.
  function automatic int twiddle(input int k, input bit want_sin);
    real x, term, c, s;
    x    = 2.0 * 3.14159265358979323846 * real'(k) / real'(N);
    c    = 1.0;
    s    = x;
    term = 1.0;
    for (int n = 1; n < 24; n++) begin
      term = -term * x * x / real'((2*n - 1) * (2*n));
      c    = c + term;
    end
    term = x;
    for (int n = 1; n < 24; n++) begin
      term = -term * x * x / real'((2*n) * (2*n + 1));
      s    = s + term;
    end
    return want_sin ? int'(s * 16384.0) : int'(c * 16384.0);
  endfunction

  function automatic int unsigned bitrev(input int unsigned k);
    int unsigned r;
    r = 0;
    for (int i = 0; i < int'(LOGN); i++) r = (r << 1) | ((k >> i) & 1);
    return r;
  endfunction

  logic [DW-1:0] bfly, result;

  for (genvar j = 0; j < int'(N / 2); j++) begin : g_bfly
    localparam int unsigned P = j % H;
    localparam int unsigned A = (j / H) * 2 * H + P;
    localparam int unsigned B = A + H;
    localparam logic signed [CW-1:0] TC = CW'(twiddle(int'(P << STAGE), 1'b0));
    localparam logic signed [CW-1:0] TS = CW'(twiddle(int'(P << STAGE), 1'b1));

    logic signed [CW-1:0]   ar, ai, br, bi;
    logic signed [CW:0]     sr, si, dr, di;
    logic signed [2*CW+1:0] pr, pi_;

    assign ar = in_data[32*A+16 +: 16];
    assign ai = in_data[32*A    +: 16];
    assign br = in_data[32*B+16 +: 16];
    assign bi = in_data[32*B    +: 16];
    assign sr = (CW+1)'(ar) + (CW+1)'(br);
    assign si = (CW+1)'(ai) + (CW+1)'(bi);
    assign dr = (CW+1)'(ar) - (CW+1)'(br);
    assign di = (CW+1)'(ai) - (CW+1)'(bi);
    // (dr + i di) * (TC - i TS)
    assign pr  = (2*CW+2)'(dr * TC) + (2*CW+2)'(di * TS);
    assign pi_ = (2*CW+2)'(di * TC) - (2*CW+2)'(dr * TS);

    assign bfly[32*A+16 +: 16] = sr[CW:1];
    assign bfly[32*A    +: 16] = si[CW:1];
    assign bfly[32*B+16 +: 16] = pr[CW+14:15];
    assign bfly[32*B    +: 16] = pi_[CW+14:15];
  end

  for (genvar k = 0; k < int'(N); k++) begin : g_order
    if (STAGE == LOGN - 1) begin : g_rev
      assign result[32*k +: 32] = bfly[32*bitrev(k) +: 32];
    end else begin : g_keep
      assign result[32*k +: 32] = bfly[32*k +: 32];
    end
  end

  li_reg #(.DW(DW)) u_out (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(result),
    .out_valid, .out_ready, .out_data
  );
endmodule
