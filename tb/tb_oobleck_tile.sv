// tb_oobleck_tile: an 11-stage AES tile used the way the methodology prescribes.
// The testbench is the software side: it configures the stages for a set of faulty
// sub-accelerators, runs the rounds of the faulty ones itself (its own AES round code,
// written here independently of the RTL), and moves words between producer and
// consumer queues. For each fault set it encrypts the FIPS-197 Appendix B and C.1
// blocks and checks the ciphertext, that no faulty stage ever accepted a word, how
// many trips through software were needed, and for the fault-free case the latency.
module tb_oobleck_tile;
  import oobleck_pkg::*;
  import aes_ref_pkg::*;
  localparam int NS = 11, DW = 256, SW = 4;
  logic clk = 0, rst_n = 0;
  logic sw_cq_valid, sw_cq_ready, sw_pq_valid, sw_pq_ready, cfg_we;
  logic [SW-1:0] sw_cq_stage, sw_pq_stage, cfg_stage;
  logic [DW-1:0] sw_cq_data, sw_pq_data;
  stage_cfg_t cfg_wdata;
  logic [19:0] pass_latency = 100;  // unused by an AES tile
  logic [NS-1:0] stage_fire;
  int checks = 0, failures = 0, cycle = 0;

  oobleck_tile #(.KIND(KIND_AES), .NSTAGES(NS), .DW(DW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  int fired [NS] = '{default: 0};
  always @(posedge clk) if (rst_n) for (int i = 0; i < NS; i++) if (stage_fire[i]) fired[i]++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- software driver ----------------
  task automatic configure(input bit [NS-1:0] faulty);
    for (int i = 0; i < NS; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_stage = SW'(i);
      cfg_wdata.from_cq = (i == 0) || faulty[i-1];
      cfg_wdata.to_pq   = (i == NS - 1) || faulty[i+1];
    end
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic push(input int stage, input logic [DW-1:0] w);
    sw_cq_valid = 1; sw_cq_stage = SW'(stage); sw_cq_data = w;
    @(posedge clk);
    while (!sw_cq_ready) @(posedge clk);
    @(negedge clk);
    sw_cq_valid = 0;
  endtask

  task automatic pop(output int stage, output logic [DW-1:0] w);
    sw_pq_ready = 1;
    @(posedge clk);
    while (!sw_pq_valid) @(posedge clk);
    stage = int'(sw_pq_stage); w = sw_pq_data;
    @(negedge clk);
    sw_pq_ready = 0;
  endtask

  // Encrypt one block with the given faulty stages; returns the ciphertext word.
  task automatic run(input bit [NS-1:0] faulty, input logic [DW-1:0] in, output logic [DW-1:0] w,
                     output int trips);
    int s, t;
    w = in; s = 0; trips = 0;
    while (s < NS) begin
      if (faulty[s]) begin
        w = sw_round(w, s);
        s++;
      end else begin
        push(s, w);
        pop(t, w);
        trips++;
        check(t >= s && (t == NS - 1 || faulty[t+1]), $sformatf("word left at stage %0d", t));
        s = t + 1;
      end
    end
  endtask

  localparam logic [127:0] KEY_B = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam logic [127:0] PT_B  = 128'h3243f6a8885a308d313198a2e0370734;
  localparam logic [127:0] CT_B  = 128'h3925841d02dc09fbdc118597196a0b32;
  localparam logic [127:0] KEY_C = 128'h000102030405060708090a0b0c0d0e0f;
  localparam logic [127:0] PT_C  = 128'h00112233445566778899aabbccddeeff;
  localparam logic [127:0] CT_C  = 128'h69c4e0d86a7b0430d8cdb78070b4c55a;

  initial begin
    bit [NS-1:0] fault_sets [6];
    int          trips_exp  [6];
    logic [DW-1:0] w;
    int trips, t0;
    logic [DW-1:0] sw_only;
    fault_sets = '{11'b0, 11'b000_0001_0000, 11'b000_1001_0000, 11'b000_0011_0000,
                   11'b000_0000_0001, 11'b100_0000_0000};
    trips_exp  = '{1, 2, 3, 2, 1, 1};
    sw_cq_valid = 0; sw_pq_ready = 0; cfg_we = 0; sw_cq_stage = 0; sw_cq_data = '0;
    cfg_stage = 0; cfg_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the software round code itself reproduces the standard
    sw_only = {PT_B, KEY_B};
    for (int r = 0; r <= 10; r++) sw_only = sw_round(sw_only, r);
    check(sw_only[255:128] == CT_B, "software rounds alone");
    // fault-free latency with the reset configuration
    @(negedge clk);
    t0 = cycle;
    run('0, {PT_B, KEY_B}, w, trips);
    check(w[255:128] == CT_B, "reset configuration ciphertext");
    $display("fault-free round trip through the tile: %0d cycles", cycle - t0);
    check(cycle - t0 <= 16, "fault-free round trip latency");
    for (int f = 0; f < 6; f++) begin
      for (int i = 0; i < NS; i++) fired[i] = 0;
      configure(fault_sets[f]);
      run(fault_sets[f], {PT_B, KEY_B}, w, trips);
      check(w[255:128] == CT_B, $sformatf("fault set %b, App. B", fault_sets[f]));
      check(trips == trips_exp[f], $sformatf("fault set %b trips %0d", fault_sets[f], trips));
      run(fault_sets[f], {PT_C, KEY_C}, w, trips);
      check(w[255:128] == CT_C, $sformatf("fault set %b, App. C.1", fault_sets[f]));
      for (int i = 0; i < NS; i++)
        check(fault_sets[f][i] ? fired[i] == 0 : fired[i] == 2,
              $sformatf("fault set %b stage %0d accepted %0d words", fault_sets[f], i, fired[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
