// tb_oobleck_bypass: drives all four configurations with random handshake inputs and
// checks where each word goes: the sub-accelerator input must carry the consumer-queue
// word when from_cq is set and the previous stage's word otherwise, with ready returned
// only to the chosen source; the output must reach the producer queue when to_pq is
// set and the next stage otherwise, with the other side seeing no valid.
module tb_oobleck_bypass;
  import oobleck_pkg::*;
  localparam int DW = 32;
  stage_cfg_t cfg;
  logic prev_valid, prev_ready, cq_valid, cq_ready, unit_in_valid, unit_in_ready;
  logic unit_out_valid, unit_out_ready, next_valid, next_ready, pq_valid, pq_ready;
  logic [DW-1:0] prev_data, cq_data, unit_in_data, unit_out_data, next_data, pq_data;
  int checks = 0, failures = 0;

  oobleck_bypass #(.DW(DW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s cfg=%b", what, cfg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      cfg = stage_cfg_t'(n % 4);
      {prev_valid, cq_valid, unit_in_ready, unit_out_valid, next_ready, pq_ready} = 6'($urandom);
      prev_data = $urandom; cq_data = $urandom; unit_out_data = $urandom;
      #1;
      if (cfg.from_cq) begin
        check(unit_in_valid == cq_valid && unit_in_data == cq_data, "input from consumer queue");
        check(cq_ready == unit_in_ready && !prev_ready, "ready to consumer queue only");
      end else begin
        check(unit_in_valid == prev_valid && unit_in_data == prev_data, "input from previous stage");
        check(prev_ready == unit_in_ready && !cq_ready, "ready to previous stage only");
      end
      if (cfg.to_pq) begin
        check(pq_valid == unit_out_valid && !next_valid && pq_data == unit_out_data,
              "output to producer queue");
        check(unit_out_ready == pq_ready, "ready from producer queue");
      end else begin
        check(next_valid == unit_out_valid && !pq_valid && next_data == unit_out_data,
              "output to next stage");
        check(unit_out_ready == next_ready, "ready from next stage");
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
