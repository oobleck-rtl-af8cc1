// li_reg: one-entry valid/ready output register for a sub-accelerator.
//
// A stage computes its function combinationally from its input word and stores the
// result here. The register accepts a new word whenever it is empty or its current word
// is leaving in the same cycle, so a chain of stages built on it moves one word per
// cycle with one cycle of latency per stage. Reset empties it.
module li_reg #(
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
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) out_data <= in_data;
  end
endmodule
