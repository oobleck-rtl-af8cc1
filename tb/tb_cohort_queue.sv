// tb_cohort_queue: random push/pop traffic against a reference queue.
// Checks order and contents of every popped word, that in_ready drops exactly when
// DEPTH words are held and out_valid exactly when none are, and that a word pushed
// into an empty queue can be popped on the next cycle.
module tb_cohort_queue;
  localparam int DW = 16, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [DW-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [DW-1:0] model[$];

  cohort_queue #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid && in_ready, "empty after reset");
    // fill up
    for (int i = 0; i < DEPTH + 2; i++) begin
      in_valid = 1; in_data = DW'(16'h100 + i);
      @(negedge clk);
      if (i < DEPTH) model.push_back(DW'(16'h100 + i));
    end
    check(!in_ready, "full after DEPTH pushes");
    check(out_valid && out_data == 16'h100, "head word while full");
    in_valid = 0;
    // drain
    while (model.size() > 0) begin
      out_ready = 1;
      check(out_valid && out_data == model[0], "drain order");
      @(negedge clk);
      void'(model.pop_front());
    end
    out_ready = 0;
    check(!out_valid, "empty after drain");
    // one-cycle latency
    in_valid = 1; in_data = 16'hBEEF;
    @(negedge clk);
    in_valid = 0;
    check(out_valid && out_data == 16'hBEEF, "pop next cycle");
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      in_valid  = $urandom_range(0, 1);
      in_data   = DW'($urandom);
      out_ready = $urandom_range(0, 1);
      #1;
      check(in_ready == (model.size() < DEPTH), "in_ready vs occupancy");
      check(out_valid == (model.size() > 0), "out_valid vs occupancy");
      if (out_valid && model.size() > 0) check(out_data == model[0], "random order");
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
