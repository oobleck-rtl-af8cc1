// checksum_stage: the paper's pipelined_checksum Viscosity example in SystemVerilog.
//
// The module counts the set bits of a 64-bit word in two cycles. In the first cycle
// the word is reduced to eight byte-wide partial counts (pairs, nibbles, bytes) that are
// stored in the state variable checksum_reg; in the next cycle checksum_reg is folded to
// the final count y. Following the listing, the output is valid when y != 0 and the
// input is always ready, so one word can enter every cycle and its count leaves one
// cycle later. A word whose count is zero therefore produces no output word, and a word
// offered while the consumer is not ready is lost, exactly as the listing's
// <(y != 0); true> says. checksum_reg is updated every cycle as a Viscosity state
// variable is; loading zero when no input is valid, and resetting to zero (the
// listing's initial value), are how this design keeps idle cycles silent.
module checksum_stage #(
  parameter int unsigned DW = 64
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
  logic [63:0] checksum_reg;
  logic [63:0] x, y, inp;

  assign inp = 64'(in_data);

  always_comb begin
    x = (inp & 64'h5555555555555555) + ((inp >> 1) & 64'h5555555555555555);
    x = (x & 64'h3333333333333333) + ((x >> 2) & 64'h3333333333333333);
    x = (x & 64'h0f0f0f0f0f0f0f0f) + ((x >> 4) & 64'h0f0f0f0f0f0f0f0f);

    y = (checksum_reg & 64'h00ff00ff00ff00ff) + ((checksum_reg >> 8) & 64'h00ff00ff00ff00ff);
    y = (y & 64'h0000ffff0000ffff) + ((y >> 16) & 64'h0000ffff0000ffff);
    y = (y & 64'h00000000ffffffff) + ((y >> 32) & 64'h00000000ffffffff);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) checksum_reg <= '0;
    else        checksum_reg <= in_valid ? x : '0;
  end

  assign in_ready  = 1'b1;
  assign out_valid = (y != '0);
  assign out_data  = DW'(y);

  // out_ready is not used: the listing's valid expression ignores back-pressure.
  logic unused_ok;
  assign unused_ok = out_ready;
endmodule
