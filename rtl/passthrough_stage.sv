// passthrough_stage: the paper's pass-through sub-accelerator.
//
// It emulates the latency of a hardware stage while letting the data through
// unchanged, so that the cost of falling back to software can be measured for any
// number of stages and any operation size. The latency is an input, set by software
// at run time as the paper's sweeps require (its profiling assumes 100 cycles per
// hardware stage; its 300,000-cycle operation at 100x speedup needs 3,000 cycles in all).
// A word is accepted when the stage is idle; exactly `latency` cycles after the
// accepting clock edge (at least one) it appears at the output, and it stays there
// until taken. `latency` is sampled when the word is accepted. The stage holds one
// word at a time (in_ready is low while it is busy); that a stage is not pipelined,
// and the LW-bit latency input, are this design's choices.
module passthrough_stage #(
  parameter int unsigned DW = 64,
  parameter int unsigned LW = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [LW-1:0] latency,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data
);
  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_DONE} state_e;
  state_e        state;
  logic [LW-1:0] remaining;
  logic [DW-1:0] word;

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_DONE);
  assign out_data  = word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      remaining <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          remaining <= latency - LW'(1);
          state     <= (latency <= LW'(1)) ? S_DONE : S_BUSY;
        end
        S_BUSY: begin
          remaining <= remaining - LW'(1);
          if (remaining == LW'(1)) state <= S_DONE;
        end
        S_DONE: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && in_valid) word <= in_data;
  end
endmodule
