// dct_stage: one stage of the 10-stage 2-D DCT sub-accelerator chain for JPEG.
//
// The paper's DCT accelerator is a 10-stage butterfly design built on the fastest known
// DCT algorithm for JPEG. This design reads that as the Arai-Agui-Nakajima (AAN) scaled
// DCT, whose one-dimensional flow graph on eight points is cut here into five steps of
// at most eight live values each; stages 0-4 apply the five steps to every row of the
// 8x8 block and stages 5-9 apply them to every column. The steps on a vector d0..d7:
//   1: t0=d0+d7 t7=d0-d7 t1=d1+d6 t6=d1-d6 t2=d2+d5 t5=d2-d5 t3=d3+d4 t4=d3-d4
//   2: a10=t0+t3 a13=t0-t3 a11=t1+t2 a12=t1-t2 o10=t4+t5 o11=t5+t6 o12=t6+t7 (t7 kept)
//   3: y0=a10+a11 y4=a10-a11 z1=(a12+a13)c4 (a13 kept) z3=o11 c4 (t7 kept)
//      z2=o10(c2-c6)+(o10-o12)c6  z4=o12(c2+c6)+(o10-o12)c6
//   4: y2=a13+z1 y6=a13-z1 z11=t7+z3 z13=t7-z3 (y0 y4 z2 z4 kept)
//   5: y5=z13+z2 y3=z13-z2 y1=z11+z4 y7=z11-z4, output in natural order
// with c4=cos(pi/4), c6=cos(3pi/8), c2=cos(pi/8). The slots used between steps are
// listed in slot_step(). As in JPEG encoders, the result is the DCT scaled per
// coefficient: out(u,v) = 8 s(u) s(v) F(u,v) with s(0)=1, s(k)=sqrt(2)cos(k pi/16),
// a scale that an encoder folds into its quantisation table. A word holds the 64
// elements as 32-bit signed integers, element (row r, column c) in bits
// [32(8r+c) +: 32]; inputs are level-shifted samples and outputs are integers.
// Between stages 0 and 9 the elements carry FRAC = 4 fraction bits (stage 0 shifts
// them in, stage 9 rounds them away), and multiplications use Q1.14 constants with
// rounding. The cut into steps, the number format and the output
// scaling are this design's choices. One word per cycle, one cycle of latency.
module dct_stage
  import oobleck_pkg::*;
#(
  parameter int unsigned DW    = DCT_DW,
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
  typedef logic signed [31:0] elem_t;
  typedef elem_t vec_t [8];

  localparam int unsigned STEP = STAGE % 5;
  localparam bit          COLS = (STAGE >= 5);
  localparam int unsigned FRAC = 4;   // fraction bits carried between stages 0 and 9

  localparam logic signed [15:0] C4   = 16'sd11585;  // 0.707106781 * 2^14
  localparam logic signed [15:0] C6   = 16'sd6270;   // 0.382683433 * 2^14
  localparam logic signed [15:0] C2M6 = 16'sd8867;   // 0.541196100 * 2^14
  localparam logic signed [15:0] C2P6 = 16'sd21407;  // 1.306562965 * 2^14

  function automatic elem_t qmul(input elem_t x, input logic signed [15:0] c);
    logic signed [47:0] p;
    p = 48'(x) * 48'(c) + 48'sd8192;
    return elem_t'(p >>> 14);
  endfunction

  // One step of the 1-D flow graph. Slot contents before step s:
  //   s=1: d0..d7          s=2: t0..t7
  //   s=3: a10 a11 a12 a13 o10 o11 o12 t7
  //   s=4: y0 y4 z1 a13 z2 z3 z4 t7
  //   s=5: y0 y4 y2 y6 z2 z11 z4 z13
  function automatic vec_t slot_step(input vec_t v, input int unsigned s);
    vec_t o;
    elem_t z5;
    o = v;
    unique case (s)
      0: begin
        o[0] = v[0] + v[7]; o[7] = v[0] - v[7];
        o[1] = v[1] + v[6]; o[6] = v[1] - v[6];
        o[2] = v[2] + v[5]; o[5] = v[2] - v[5];
        o[3] = v[3] + v[4]; o[4] = v[3] - v[4];
      end
      1: begin
        o[0] = v[0] + v[3]; o[3] = v[0] - v[3];
        o[1] = v[1] + v[2]; o[2] = v[1] - v[2];
        o[4] = v[4] + v[5]; o[5] = v[5] + v[6]; o[6] = v[6] + v[7]; o[7] = v[7];
      end
      2: begin
        z5   = qmul(v[4] - v[6], C6);
        o[0] = v[0] + v[1];
        o[1] = v[0] - v[1];
        o[2] = qmul(v[2] + v[3], C4);
        o[3] = v[3];
        o[4] = qmul(v[4], C2M6) + z5;
        o[5] = qmul(v[5], C4);
        o[6] = qmul(v[6], C2P6) + z5;
        o[7] = v[7];
      end
      3: begin
        o[0] = v[0]; o[1] = v[1];
        o[2] = v[3] + v[2]; o[3] = v[3] - v[2];
        o[4] = v[4]; o[6] = v[6];
        o[5] = v[7] + v[5]; o[7] = v[7] - v[5];
      end
      default: begin
        o[0] = v[0];          o[4] = v[1];
        o[2] = v[2];          o[6] = v[3];
        o[5] = v[7] + v[4];   o[3] = v[7] - v[4];
        o[1] = v[5] + v[6];   o[7] = v[5] - v[6];
      end
    endcase
    return o;
  endfunction

  logic [DW-1:0] result;

  always_comb begin
    vec_t v, o;
    result = in_data;
    for (int l = 0; l < 8; l++) begin
      for (int k = 0; k < 8; k++) v[k] = in_data[32*(COLS ? 8*k + l : 8*l + k) +: 32];
      if (STAGE == 0) for (int k = 0; k < 8; k++) v[k] = v[k] <<< FRAC;
      o = slot_step(v, STEP);
      if (STAGE == 9) for (int k = 0; k < 8; k++) o[k] = (o[k] + elem_t'(1 << (FRAC - 1))) >>> FRAC;
      for (int k = 0; k < 8; k++) result[32*(COLS ? 8*k + l : 8*l + k) +: 32] = o[k];
    end
  end

  li_reg #(.DW(DW)) u_out (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(result),
    .out_valid, .out_ready, .out_data
  );
endmodule
