// tb_fft_stage: chains the six fft_stage instances of the FFT accelerator (STAGE 0..5)
// and sends random, impulse and single-tone 64-point inputs through them. Each output
// point is compared with the DFT of the input divided by 64, computed here in floating
// point with $cos and $sin, allowing a rounding error of a few LSBs. It also checks
// the six-cycle latency of the chain and one word per cycle throughput.
module tb_fft_stage;
  import oobleck_pkg::*;
  localparam int N = FFT_POINTS, DW = FFT_DW, TOL = 4;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cycle = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  logic [6:0]    v, r;
  logic [DW-1:0] d [7];
  for (genvar s = 0; s < 6; s++) begin : g_s
    fft_stage #(.DW(DW), .STAGE(s)) u (
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

  logic [DW-1:0] sent [$];

  function automatic logic [DW-1:0] make_input(input int kind);
    logic [DW-1:0] w;
    for (int k = 0; k < N; k++) begin
      shortint re, im;
      case (kind)
        0: begin re = (k == 0) ? 16'sd16000 : 16'sd0; im = 0; end                 // impulse
        1: begin re = shortint'($rtoi(12000.0 * $cos(2.0 * 3.141592653589793 * 5 * k / N))); im = 0; end
        default: begin re = shortint'($signed(16'($urandom_range(0, 32000)) - 16'd16000));
                       im = shortint'($signed(16'($urandom_range(0, 32000)) - 16'd16000)); end
      endcase
      w[32*k+16 +: 16] = re;
      w[32*k +: 16]    = im;
    end
    return w;
  endfunction

  task automatic compare(input logic [DW-1:0] x, input logic [DW-1:0] y, input int idx);
    for (int m = 0; m < N; m++) begin
      real er, ei, gr, gi;
      er = 0; ei = 0;
      for (int k = 0; k < N; k++) begin
        real xr, xi, a;
        xr = real'($signed(x[32*k+16 +: 16]));
        xi = real'($signed(x[32*k +: 16]));
        a  = -2.0 * 3.141592653589793 * real'(m * k) / real'(N);
        er = er + xr * $cos(a) - xi * $sin(a);
        ei = ei + xr * $sin(a) + xi * $cos(a);
      end
      er = er / N; ei = ei / N;
      gr = real'($signed(y[32*m+16 +: 16]));
      gi = real'($signed(y[32*m +: 16]));
      check((gr - er < TOL) && (er - gr < TOL) && (gi - ei < TOL) && (ei - gi < TOL),
            $sformatf("word %0d bin %0d: got (%0.1f,%0.1f) want (%0.2f,%0.2f)", idx, m, gr, gi, er, ei));
    end
  endtask

  int got = 0, first_out = 0, last_out = 0;
  always @(negedge clk) if (rst_n && v[6]) begin
    compare(sent[got], d[6], got);
    if (got == 0) first_out = cycle;
    last_out = cycle;
    got++;
  end

  initial begin
    int t0;
    v[0] = 0; r[6] = 1; d[0] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 12; n++) begin
      v[0] = 1; d[0] = make_input(n < 2 ? n : 2);
      sent.push_back(d[0]);
      check(r[0], "ready every cycle");
      @(posedge clk);
      if (n == 0) t0 = cycle;
      @(negedge clk);
    end
    v[0] = 0;
    repeat (12) @(negedge clk);
    check(got == 12, $sformatf("words out %0d", got));
    check(first_out - t0 == 6, $sformatf("latency %0d", first_out - t0));
    check(last_out - first_out == 11, "one word per cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
