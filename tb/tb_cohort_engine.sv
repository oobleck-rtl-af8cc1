// tb_cohort_engine: software pushes words into the consumer queues of all stages;
// the testbench plays the sub-accelerators, taking each stage's consumer-queue word
// and returning it, tagged with the stage number, into that stage's producer queue.
// Checks the reset configuration (first stage reads software, last stage writes
// software), configuration writes, routing of pushes by stage, that every word comes
// back once through the round-robin pop port with the right stage, that the pop port
// serves waiting stages in turn, and that a full consumer queue refuses pushes.
module tb_cohort_engine;
  import oobleck_pkg::*;
  localparam int DW = 32, NS = 4, SW = 2, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic sw_cq_valid, sw_cq_ready, sw_pq_valid, sw_pq_ready, cfg_we;
  logic [SW-1:0] sw_cq_stage, sw_pq_stage, cfg_stage;
  logic [DW-1:0] sw_cq_data, sw_pq_data;
  stage_cfg_t cfg_wdata;
  stage_cfg_t cfg [NS];
  logic [NS-1:0] cq_valid, cq_ready, pq_valid, pq_ready;
  logic [DW-1:0] cq_data [NS];
  logic [DW-1:0] pq_data [NS];
  int checks = 0, failures = 0;

  cohort_engine #(.DW(DW), .NSTAGES(NS), .CQ_DEPTH(DEPTH), .SW(SW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sub-accelerator models: loop consumer queue -> producer queue, mark the stage
  bit loop_en = 0;
  for (genvar i = 0; i < NS; i++) begin : g_loop
    assign pq_valid[i] = loop_en && cq_valid[i];
    assign cq_ready[i] = loop_en && pq_ready[i];
    assign pq_data[i]  = cq_data[i] ^ (DW'(i) << 28);
  end

  int expected [NS] = '{default: 0};
  int returned [NS] = '{default: 0};
  int switches = 0;
  logic [SW-1:0] last_stage;

  initial begin
    sw_cq_valid = 0; sw_pq_ready = 0; cfg_we = 0; sw_cq_stage = 0; sw_cq_data = 0;
    cfg_stage = 0; cfg_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cfg[0] == 2'b10 && cfg[1] == 2'b00 && cfg[2] == 2'b00 && cfg[3] == 2'b01, "reset configuration");
    // write a fault configuration for stage 1: stage 0 to software, stage 2 from software
    cfg_we = 1; cfg_stage = 0; cfg_wdata = 2'b11; @(negedge clk);
    cfg_stage = 2; cfg_wdata = 2'b10; @(negedge clk);
    cfg_we = 0;
    check(cfg[0] == 2'b11 && cfg[1] == 2'b00 && cfg[2] == 2'b10 && cfg[3] == 2'b01, "configuration writes");
    // fill stage 2's consumer queue while the loop is off: routing and back-pressure
    for (int n = 0; n < DEPTH + 1; n++) begin
      sw_cq_valid = 1; sw_cq_stage = 2; sw_cq_data = 32'h0200_0000 + n;
      #1;
      check(sw_cq_ready == (n < DEPTH), "consumer queue full after DEPTH words");
      @(negedge clk);
    end
    sw_cq_valid = 0;
    check(cq_valid == 4'b0100, "push routed to stage 2 only");
    expected[2] = DEPTH;
    // fill the other stages
    for (int s = 0; s < NS; s++) if (s != 2) begin
      for (int n = 0; n < 3; n++) begin
        sw_cq_valid = 1; sw_cq_stage = SW'(s); sw_cq_data = (s << 24) + n;
        @(negedge clk);
      end
      expected[s] = 3;
    end
    sw_cq_valid = 0;
    loop_en = 1;
    repeat (6) @(negedge clk);
    // drain the pop port with random back-pressure
    last_stage = '1;
    for (int c = 0; c < 200; c++) begin
      sw_pq_ready = $urandom_range(0, 1);
      #1;
      if (sw_pq_valid && sw_pq_ready) begin
        check(sw_pq_data[29:28] == sw_pq_stage, "word returned with its stage");
        check(sw_pq_data[25:24] == sw_pq_stage, "word came from the stage it was pushed to");
        returned[sw_pq_stage]++;
        if (sw_pq_stage != last_stage) switches++;
        last_stage = sw_pq_stage;
      end
      @(negedge clk);
    end
    for (int s = 0; s < NS; s++) check(returned[s] == expected[s], $sformatf("stage %0d count %0d", s, returned[s]));
    check(switches >= 10, $sformatf("round-robin interleaving (%0d switches)", switches));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
