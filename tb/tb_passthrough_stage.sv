// tb_passthrough_stage: sends words through the pass-through stage with a latency
// input of 100 cycles (the paper's per-stage figure) and then of random values from
// 0 to 300 (0 and 1 both mean one cycle). Checks that each word comes out unchanged
// exactly that many cycles after it was accepted, that the stage refuses input while
// busy, and that a word held by a stalled consumer is kept until taken.
module tb_passthrough_stage;
  localparam int DW = 64, LW = 20;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [DW-1:0] in_data, out_data;
  logic [LW-1:0] latency;
  int checks = 0, failures = 0;
  int cycle = 0;

  passthrough_stage #(.DW(DW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s @%0d", what, cycle); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_in, busy_refused, want;
    logic [DW-1:0] w;
    in_valid = 0; out_ready = 0; in_data = '0; latency = 100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      latency = (n < 8) ? LW'(100) : LW'($urandom_range(0, 300));
      want = (latency == 0) ? 1 : int'(latency);
      w = {$urandom, $urandom};
      in_valid = 1; in_data = w;
      check(in_ready, "ready when idle");
      @(posedge clk); t_in = cycle;
      @(negedge clk);
      latency = LW'($urandom);  // sampled only on acceptance
      in_valid = 1; in_data = ~w;  // must be refused while busy
      busy_refused = 0;
      while (!out_valid) begin
        if (!in_ready) busy_refused++;
        @(negedge clk);
      end
      in_valid = 0;
      check(cycle - t_in == want, $sformatf("latency %0d", cycle - t_in));
      check(busy_refused == want - 1, "busy while computing");
      check(out_data == w, "data unchanged");
      // stall the consumer for a few cycles
      repeat (n % 8) begin
        @(negedge clk);
        check(out_valid && out_data == w, "held while stalled");
      end
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
      check(!out_valid, "released after handshake");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
