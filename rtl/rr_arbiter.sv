// rr_arbiter: round-robin choice among N requesters for one valid/ready output.
//
// The grant goes to the first requester after the one granted last. Once the granted
// word is offered and not yet taken, the grant is held, so the output keeps the
// handshake rule that a valid word stays valid and unchanged until it is accepted.
// grant is the index of the chosen requester and is meaningful while any is high.
module rr_arbiter #(
  parameter int unsigned N  = 4,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  input  logic          out_ready,
  output logic          any,
  output logic [IW-1:0] grant
);
  logic [IW-1:0] last, held, pick;
  logic          hold;

  logic [IW:0] cand;  // last + i, wrapped modulo N
  always_comb begin
    pick = last;
    cand = '0;
    for (int i = int'(N); i >= 1; i--) begin
      cand = {1'b0, last} + (IW+1)'(i);
      if (cand >= (IW+1)'(N)) cand = cand - (IW+1)'(N);
      if (req[cand[IW-1:0]]) pick = cand[IW-1:0];
    end
  end

  assign any   = |req;
  assign grant = hold ? held : pick;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= IW'(N - 1);
      held <= '0;
      hold <= 1'b0;
    end else begin
      hold <= any && !out_ready;
      held <= grant;
      if (any && out_ready) last <= grant;
    end
  end
endmodule
