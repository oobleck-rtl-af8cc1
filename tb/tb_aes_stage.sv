// tb_aes_stage: builds the two AES stage splits out of aes_stage instances, the
// 11-stage chain (one round each) and the 3-stage chain (rounds 0-2, 3-6, 7-10), and
// encrypts the FIPS-197 example blocks (Appendix B and Appendix C.1) with both. It
// checks the ciphertexts, the final round key (FIPS-197 A.1 for the Appendix B key),
// the state after round 1 of Appendix B, one cycle of latency per stage, and that a
// stream of back-to-back words leaves at one word per cycle.
module tb_aes_stage;
  localparam int DW = 256;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int cycle = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // 11-stage chain
  logic [11:0]   v11, r11;
  logic [DW-1:0] d11 [12];
  for (genvar i = 0; i < 11; i++) begin : g11
    aes_stage #(.DW(DW), .FIRST_ROUND(i), .NUM_ROUNDS(1)) u (
      .clk, .rst_n, .in_valid(v11[i]), .in_ready(r11[i]), .in_data(d11[i]),
      .out_valid(v11[i+1]), .out_ready(r11[i+1]), .out_data(d11[i+1]));
  end
  // 3-stage chain
  localparam int F3 [4] = '{0, 3, 7, 11};
  logic [3:0]    v3, r3;
  logic [DW-1:0] d3 [4];
  for (genvar i = 0; i < 3; i++) begin : g3
    aes_stage #(.DW(DW), .FIRST_ROUND(F3[i]), .NUM_ROUNDS(F3[i+1] - F3[i])) u (
      .clk, .rst_n, .in_valid(v3[i]), .in_ready(r3[i]), .in_data(d3[i]),
      .out_valid(v3[i+1]), .out_ready(r3[i+1]), .out_data(d3[i+1]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [127:0] KEY_B  = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam logic [127:0] PT_B   = 128'h3243f6a8885a308d313198a2e0370734;
  localparam logic [127:0] CT_B   = 128'h3925841d02dc09fbdc118597196a0b32;
  localparam logic [127:0] RK10_B = 128'hd014f9a8c9ee2589e13f0cc8b6630ca6;
  localparam logic [127:0] R1_B   = 128'ha49c7ff2689f352b6b5bea43026a5049; // state after round 1
  localparam logic [127:0] KEY_C  = 128'h000102030405060708090a0b0c0d0e0f;
  localparam logic [127:0] PT_C   = 128'h00112233445566778899aabbccddeeff;
  localparam logic [127:0] CT_C   = 128'h69c4e0d86a7b0430d8cdb78070b4c55a;

  // output monitor for the streaming phase
  bit streaming = 0;
  int got11 = 0, got3 = 0, first3 = 0, last3 = 0, first11 = 0, last11 = 0;
  always @(negedge clk) if (streaming) begin
    if (v3[3]) begin
      check(d3[3][255:128] == (got3 % 2 == 1 ? CT_C : CT_B), $sformatf("3-stage stream word %0d", got3));
      if (got3 == 0) first3 = cycle;
      last3 = cycle;
      got3++;
    end
    if (v11[11]) begin
      check(d11[11][255:128] == (got11 % 2 == 1 ? CT_C : CT_B), $sformatf("11-stage stream word %0d", got11));
      if (got11 == 0) first11 = cycle;
      last11 = cycle;
      got11++;
    end
  end

  initial begin
    int t0;
    v11[0] = 0; v3[0] = 0; r11[11] = 1; r3[3] = 1;
    d11[0] = '0; d3[0] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // single word through each chain, latency check
    @(negedge clk);
    v11[0] = 1; d11[0] = {PT_B, KEY_B};
    v3[0]  = 1; d3[0]  = {PT_B, KEY_B};
    @(posedge clk); t0 = cycle;
    @(negedge clk);
    v11[0] = 0; v3[0] = 0;
    check(v11[1] && !v11[2], "one word in stage 0");
    @(negedge clk);
    check(v11[2] && d11[2][255:128] == R1_B, "state after round 1 (FIPS-197 App. B)");
    while (!v3[3]) @(negedge clk);
    check(cycle - t0 == 3, $sformatf("3-stage latency %0d", cycle - t0));
    check(d3[3][255:128] == CT_B, "3-stage ciphertext, App. B");
    check(d3[3][127:0] == RK10_B, "3-stage last round key");
    while (!v11[11]) @(negedge clk);
    check(cycle - t0 == 11, $sformatf("11-stage latency %0d", cycle - t0));
    check(d11[11][255:128] == CT_B, "11-stage ciphertext, App. B");
    check(d11[11][127:0] == RK10_B, "11-stage last round key");
    @(negedge clk);
    // back-to-back stream of 8 words alternating the two examples
    streaming = 1;
    for (int n = 0; n < 8; n++) begin
      v11[0] = 1; d11[0] = n[0] ? {PT_C, KEY_C} : {PT_B, KEY_B};
      v3[0]  = 1; d3[0]  = n[0] ? {PT_C, KEY_C} : {PT_B, KEY_B};
      check(r11[0] && r3[0], "ready every cycle");
      @(negedge clk);
    end
    v11[0] = 0; v3[0] = 0;
    repeat (20) @(negedge clk);
    check(got11 == 8 && got3 == 8, "all stream words out");
    check(last3 - first3 == 7 && last11 - first11 == 7, "one word per cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
