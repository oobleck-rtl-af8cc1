// aes_stage: one AES-128 sub-accelerator, computing rounds FIRST_ROUND ..
// FIRST_ROUND+NUM_ROUNDS-1 of the cipher.
//
// Round 0 is the initial AddRoundKey with the cipher key; rounds 1..9 are SubBytes,
// ShiftRows, MixColumns and AddRoundKey; round 10 leaves out MixColumns. The word that
// travels between stages (and through software when a stage is bypassed) is 256 bits:
// the state in [255:128] and the round key last used in [127:0]. Each stage expands the
// key for its own rounds from the key it receives, so that any stage can be replaced by
// a software routine that sees only its input word.
//
// The paper builds an 11-stage accelerator (one round per stage: FIRST_ROUND = i,
// NUM_ROUNDS = 1) and a 3-stage one whose first stage does the key expansion and the
// first two rounds and the next two stages four rounds each (here: rounds 0-2, 3-6,
// 7-10). Carrying the round key with the state instead of expanding the whole key
// schedule in the first stage is this design's choice. The rounds are combinational
// and the result is registered: one word per cycle, one cycle of latency.
module aes_stage
  import aes_pkg::*;
#(
  parameter int unsigned DW          = 256,
  parameter int unsigned FIRST_ROUND = 0,
  parameter int unsigned NUM_ROUNDS  = 1
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
  logic [DW-1:0] result;

  always_comb begin
    logic [127:0] st, key;
    st  = in_data[255:128];
    key = in_data[127:0];
    for (int r = int'(FIRST_ROUND); r < int'(FIRST_ROUND + NUM_ROUNDS); r++) begin
      if (r == 0) begin
        st = st ^ key;
      end else begin
        key = next_key(key, r);
        st  = sub_shift(st);
        if (r != 10) st = mix_columns(st);
        st  = st ^ key;
      end
    end
    result = DW'({st, key});
  end

  li_reg #(.DW(DW)) u_out (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(result),
    .out_valid, .out_ready, .out_data
  );
endmodule
