// tb_checksum_stage: streams one random word per cycle into the checksum stage and
// compares each output with $countones of the word sent one cycle earlier. A zero
// word must produce no valid output, as the valid expression (y != 0) says.
module tb_checksum_stage;
  localparam int DW = 64;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [DW-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  int zeros = 0;

  checksum_stage #(.DW(DW)) dut (.*);

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

  initial begin
    logic [DW-1:0] prev;
    logic          prev_v;
    in_valid = 0; out_ready = 1; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid, "idle after reset");
    prev_v = 0; prev = '0;
    for (int n = 0; n < 2000; n++) begin
      in_valid = ($urandom_range(0, 7) != 0);
      case ($urandom_range(0, 9))
        0: in_data = '0;
        1: in_data = '1;
        2: in_data = DW'(1) << $urandom_range(0, 63);
        default: in_data = {$urandom, $urandom};
      endcase
      check(in_ready, "always ready");
      @(negedge clk);
      prev_v = in_valid; prev = in_data;
      if (prev_v && prev != '0) begin
        check(out_valid && out_data == DW'($countones(prev)),
              $sformatf("count of %h: got %0d", prev, out_data));
      end else begin
        check(!out_valid, "no output for idle or zero word");
        if (prev_v) zeros++;
      end
    end
    check(zeros > 0, "zero word exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
