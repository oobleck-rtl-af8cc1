// tb_dct_stage: chains the ten dct_stage instances (STAGE 0..9) and sends random,
// flat and single-pattern 8x8 blocks of level-shifted samples (-128..127) through
// them. Each output coefficient is compared with 8 s(u) s(v) F(u,v), where F is the
// JPEG forward DCT F(u,v) = 1/4 C(u) C(v) sum f(x,y) cos((2x+1)u pi/16) cos((2y+1)v pi/16)
// computed here in floating point, and s(0)=1, s(k)=sqrt(2) cos(k pi/16) are the AAN
// scale factors. Tolerance: 1 unit. Also checks ten cycles of latency and one block
// per cycle throughput.
module tb_dct_stage;
  import oobleck_pkg::*;
  localparam int DW = DCT_DW;
  localparam real PI = 3.141592653589793;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cycle = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  logic [10:0]   v, r;
  logic [DW-1:0] d [11];
  for (genvar s = 0; s < 10; s++) begin : g_s
    dct_stage #(.DW(DW), .STAGE(s)) u (
      .clk, .rst_n, .in_valid(v[s]), .in_ready(r[s]), .in_data(d[s]),
      .out_valid(v[s+1]), .out_ready(r[s+1]), .out_data(d[s+1]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [DW-1:0] make_block(input int kind);
    logic [DW-1:0] w;
    for (int i = 0; i < 64; i++) begin
      int s;
      case (kind)
        0: s = 127;                                            // flat: DC only
        1: s = (i % 8 < 4) ? -128 : 127;                       // vertical edge
        default: s = $urandom_range(0, 255) - 128;
      endcase
      w[32*i +: 32] = 32'(s);
    end
    return w;
  endfunction

  task automatic compare(input logic [DW-1:0] x, input logic [DW-1:0] y, input int idx);
    int bad = 0;
    for (int u = 0; u < 8; u++)
      for (int vv = 0; vv < 8; vv++) begin
        real f, cu, cv, su, sv, want, got;
        f = 0;
        for (int xr = 0; xr < 8; xr++)
          for (int yc = 0; yc < 8; yc++)
            f += real'($signed(x[32*(8*xr+yc) +: 32])) *
                 $cos((2*xr+1) * u * PI / 16.0) * $cos((2*yc+1) * vv * PI / 16.0);
        cu = (u == 0) ? 1.0 / $sqrt(2.0) : 1.0;
        cv = (vv == 0) ? 1.0 / $sqrt(2.0) : 1.0;
        su = (u == 0) ? 1.0 : $sqrt(2.0) * $cos(u * PI / 16.0);
        sv = (vv == 0) ? 1.0 : $sqrt(2.0) * $cos(vv * PI / 16.0);
        want = 8.0 * su * sv * 0.25 * cu * cv * f;
        got  = real'($signed(y[32*(8*u+vv) +: 32]));
        if (got - want > 1.0 || want - got > 1.0) begin
          bad++;
          if (bad < 4) $display("block %0d (%0d,%0d): got %0.1f want %0.2f", idx, u, vv, got, want);
        end
      end
    check(bad == 0, $sformatf("block %0d: %0d coefficients off", idx, bad));
  endtask

  logic [DW-1:0] sent [$];
  int got = 0, first_out = 0, last_out = 0;
  always @(negedge clk) if (rst_n && v[10]) begin
    compare(sent[got], d[10], got);
    if (got == 0) first_out = cycle;
    last_out = cycle;
    got++;
  end

  initial begin
    int t0;
    v[0] = 0; r[10] = 1; d[0] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 10; n++) begin
      v[0] = 1; d[0] = make_block(n < 2 ? n : 2);
      sent.push_back(d[0]);
      check(r[0], "ready every cycle");
      @(posedge clk);
      if (n == 0) t0 = cycle;
      @(negedge clk);
    end
    v[0] = 0;
    repeat (14) @(negedge clk);
    check(got == 10, $sformatf("blocks out %0d", got));
    check(first_out - t0 == 10, $sformatf("latency %0d", first_out - t0));
    check(last_out - first_out == 9, "one block per cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
