// cohort_queue: a valid/ready FIFO used as one Cohort queue endpoint.
//
// In the paper a Cohort queue is a FIFO between a software thread and an accelerator,
// backed by cache-coherent memory. This module is the hardware end of such a queue: a
// circular buffer of DEPTH entries with a write (push) side and a read (pop) side, both
// latency-insensitive valid/ready handshakes. A word moves when valid and ready are both
// high on a rising clock edge. The output is registered storage, so a pushed word can be
// popped one cycle later at the earliest; push and pop may happen in the same cycle.
// The depth and width are this design's choice; the paper gives neither.
module cohort_queue #(
  parameter int unsigned DW    = 64,
  parameter int unsigned DEPTH = 4
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
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= inc(wptr);
      if (pop)  rptr <= inc(rptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

`ifndef SYNTHESIS
  // Handshake rule: once valid is raised it holds, with stable data, until accepted.
  property p_out_stable;
    @(posedge clk) disable iff (!rst_n) (out_valid && !out_ready) |=> out_valid && $stable(out_data);
  endproperty
  a_out_stable: assert property (p_out_stable);
`endif
endmodule
