// tb_oobleck_top: end-to-end test of the whole accelerator complex at its default
// parameters. The testbench is the software thread: it configures stages, pushes
// words into consumer queues, pops results, and runs the software version of every
// stage it has declared faulty (AES rounds from aes_ref_pkg, FFT butterfly stages and
// the checksum written here, identity for the pass-through). It checks
//   - FFT (6 stages): random 64-point input, fault-free and with stage 2 faulty,
//     against a floating-point DFT / 64;
//   - AES 11-stage and 3-stage: FIPS-197 blocks, fault-free and with one fault;
//   - pass-through (12 x 100 cycles): data unchanged, fault-free latency, two faults,
//     a stream at 20 cycles per stage, and a 4-stage chain at 750 cycles per stage;
//   - checksum: popcount, and no output word for a zero input;
//   - DCT (10 stages): random 8x8 blocks against the floating-point JPEG DCT with the
//     AAN output scaling, fault-free, with stage 3 faulty and with stages 0 and 9 faulty.
// It counts each mechanism of the design and fails if one never happened: software
// fallback for a faulty stage, two faults in one chain, a full consumer queue refusing
// a push, back-pressure on the pop port, and the pop port choosing between tiles.
module tb_oobleck_top;
  import oobleck_pkg::*;
  import aes_ref_pkg::*;
  localparam int DW = FFT_DW, N = FFT_POINTS, TOL = 6;
  localparam int T_FFT = 0, T_AES11 = 1, T_AES3 = 2, T_PASS = 3, T_SUM = 4, T_DCT = 5;
  localparam int NSTG [6] = '{6, 11, 3, 12, 1, 10};

  logic clk = 0, rst_n = 0;
  logic sw_cq_valid, sw_cq_ready, sw_pq_valid, sw_pq_ready, cfg_we;
  logic [2:0] sw_cq_tile, sw_pq_tile, cfg_tile;
  logic [3:0] sw_cq_stage, sw_pq_stage, cfg_stage;
  logic [DW-1:0] sw_cq_data, sw_pq_data;
  stage_cfg_t cfg_wdata;
  logic [19:0] pass_latency;
  logic [15:0] stage_fire [6];
  int checks = 0, failures = 0, cycle = 0;

  oobleck_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_fallback = 0, n_multi = 0, n_cq_full = 0, n_pq_stall = 0, n_tile_choice = 0, n_zero = 0;
  always @(posedge clk) if (rst_n) begin
    if (sw_cq_valid && !sw_cq_ready) n_cq_full++;
    if (sw_pq_valid && !sw_pq_ready) n_pq_stall++;
    if ($countones(dut.pq_vld) > 1) n_tile_choice++;
  end
  int fired [6][16] = '{default: 0};
  always @(posedge clk) if (rst_n) for (int t = 0; t < 6; t++) for (int i = 0; i < 16; i++)
    if (stage_fire[t][i]) fired[t][i]++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- software versions of the stages ----------------
  function automatic int unsigned brev6(input int unsigned k);
    int unsigned r = 0;
    for (int i = 0; i < 6; i++) r = (r << 1) | ((k >> i) & 1);
    return r;
  endfunction

  function automatic logic [DW-1:0] sw_fft_stage(input logic [DW-1:0] x, input int s);
    logic [DW-1:0] y, z;
    int h;
    h = N >> (s + 1);
    y = x;
    for (int a = 0; a < N; a++) if ((a / h) % 2 == 0) begin
      int b, p, c, sn, ar, ai, br, bi, dr, di;
      b  = a + h; p = a % h;
      c  = $rtoi($floor(16384.0 * $cos(2.0 * 3.141592653589793 * real'(p << s) / N) + 0.5));
      sn = $rtoi($floor(16384.0 * $sin(2.0 * 3.141592653589793 * real'(p << s) / N) + 0.5));
      ar = $signed(x[32*a+16 +: 16]); ai = $signed(x[32*a +: 16]);
      br = $signed(x[32*b+16 +: 16]); bi = $signed(x[32*b +: 16]);
      dr = ar - br; di = ai - bi;
      y[32*a+16 +: 16] = 16'((ar + br) >>> 1);
      y[32*a    +: 16] = 16'((ai + bi) >>> 1);
      y[32*b+16 +: 16] = 16'((dr * c + di * sn) >>> 15);
      y[32*b    +: 16] = 16'((di * c - dr * sn) >>> 15);
    end
    if (s == 5) begin
      for (int k = 0; k < N; k++) z[32*k +: 32] = y[32*brev6(k) +: 32];
      return z;
    end
    return y;
  endfunction

  // One step of the AAN flow graph on every row (s < 5) or column (s >= 5) of the
  // block, with the same fixed-point conventions as the hardware.
  function automatic longint qm(input longint x, input longint c);
    return (x * c + 8192) >>> 14;
  endfunction
  function automatic logic [DW-1:0] sw_dct_stage(input logic [DW-1:0] w, input int s);
    logic [DW-1:0] r;
    r = w;
    for (int l = 0; l < 8; l++) begin
      longint v [8], o [8];
      int idx [8];
      for (int k = 0; k < 8; k++) begin
        idx[k] = (s >= 5) ? 8*k + l : 8*l + k;
        v[k] = longint'($signed(w[32*idx[k] +: 32]));
        if (s == 0) v[k] = v[k] * 16;
      end
      o = v;
      case (s % 5)
        0: for (int k = 0; k < 4; k++) begin o[k] = v[k] + v[7-k]; o[7-k] = v[k] - v[7-k]; end
        1: begin o[0] = v[0] + v[3]; o[3] = v[0] - v[3]; o[1] = v[1] + v[2]; o[2] = v[1] - v[2];
                 o[4] = v[4] + v[5]; o[5] = v[5] + v[6]; o[6] = v[6] + v[7]; end
        2: begin o[0] = v[0] + v[1]; o[1] = v[0] - v[1]; o[2] = qm(v[2] + v[3], 11585);
                 o[4] = qm(v[4], 8867) + qm(v[4] - v[6], 6270); o[5] = qm(v[5], 11585);
                 o[6] = qm(v[6], 21407) + qm(v[4] - v[6], 6270); end
        3: begin o[2] = v[3] + v[2]; o[3] = v[3] - v[2]; o[5] = v[7] + v[5]; o[7] = v[7] - v[5]; end
        default: begin o[4] = v[1]; o[6] = v[3]; o[5] = v[7] + v[4]; o[3] = v[7] - v[4];
                       o[1] = v[5] + v[6]; o[7] = v[5] - v[6]; end
      endcase
      for (int k = 0; k < 8; k++) begin
        if (s == 9) o[k] = (o[k] + 8) >>> 4;
        r[32*idx[k] +: 32] = 32'(o[k]);
      end
    end
    return r;
  endfunction

  task automatic dct_compare(input logic [DW-1:0] x, input logic [DW-1:0] y, input string tag);
    int bad = 0;
    for (int u = 0; u < 8; u++)
      for (int vv = 0; vv < 8; vv++) begin
        real f = 0, want, su, sv;
        for (int a = 0; a < 8; a++)
          for (int b = 0; b < 8; b++)
            f += real'($signed(x[32*(8*a+b) +: 32])) *
                 $cos((2*a+1) * u * 3.141592653589793 / 16.0) * $cos((2*b+1) * vv * 3.141592653589793 / 16.0);
        // 8 s(u) s(v) F(u,v), F = 1/4 C(u) C(v) f: C(0) s(0) = 1/sqrt(2), C(k) s(k) = sqrt(2) cos(k pi/16)
        su = (u == 0) ? 1.0 / $sqrt(2.0) : $sqrt(2.0) * $cos(u * 3.141592653589793 / 16.0);
        sv = (vv == 0) ? 1.0 / $sqrt(2.0) : $sqrt(2.0) * $cos(vv * 3.141592653589793 / 16.0);
        want = 8.0 * 0.25 * f * su * sv;
        if (real'($signed(y[32*(8*u+vv) +: 32])) - want > 1.0 || want - real'($signed(y[32*(8*u+vv) +: 32])) > 1.0) bad++;
      end
    check(bad == 0, $sformatf("%s: %0d coefficients off", tag, bad));
  endtask

  function automatic logic [DW-1:0] rand_block();
    logic [DW-1:0] w;
    for (int i = 0; i < 64; i++) w[32*i +: 32] = 32'($urandom_range(0, 255) - 128);
    return w;
  endfunction

  function automatic logic [DW-1:0] sw_stage(input int tile, input int s, input logic [DW-1:0] w);
    logic [DW-1:0] r;
    r = w;
    case (tile)
      T_FFT:   r = sw_fft_stage(w, s);
      T_AES11: r = DW'(sw_round(w[255:0], s));
      T_AES3: begin
        int f [4] = '{0, 3, 7, 11};
        for (int k = f[s]; k < f[s+1]; k++) r = DW'(sw_round(r[255:0], k));
      end
      T_SUM:   r = DW'($countones(w[63:0]));
      T_DCT:   r = sw_dct_stage(w, s);
      default: r = w;
    endcase
    return r;
  endfunction

  // ---------------- software driver ----------------
  task automatic configure(input int tile, input bit [15:0] faulty);
    for (int i = 0; i < NSTG[tile]; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_tile = 3'(tile); cfg_stage = 4'(i);
      cfg_wdata.from_cq = (i == 0) || faulty[i-1];
      cfg_wdata.to_pq   = (i == NSTG[tile] - 1) || faulty[i+1];
    end
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic push(input int tile, input int stage, input logic [DW-1:0] w);
    sw_cq_valid = 1; sw_cq_tile = 3'(tile); sw_cq_stage = 4'(stage); sw_cq_data = w;
    @(posedge clk);
    for (int n = 0; !sw_cq_ready; n++) begin
      if (n > 3000) begin check(0, "push timed out"); break; end
      @(posedge clk);
    end
    @(negedge clk);
    sw_cq_valid = 0;
  endtask

  // pops one word; the software is slow to take it now and then
  task automatic pop(output int tile, output int stage, output logic [DW-1:0] w);
    repeat ($urandom_range(0, 2)) @(negedge clk);
    sw_pq_ready = 1;
    @(posedge clk);
    for (int n = 0; !sw_pq_valid; n++) begin
      if (n > 6000) begin check(0, "pop timed out"); break; end
      @(posedge clk);
    end
    tile = int'(sw_pq_tile); stage = int'(sw_pq_stage); w = sw_pq_data;
    @(negedge clk);
    sw_pq_ready = 0;
  endtask

  task automatic run(input int tile, input bit [15:0] faulty, input logic [DW-1:0] in,
                     output logic [DW-1:0] w);
    int s, t, st;
    w = in; s = 0;
    if ($countones(faulty) > 1) n_multi++;
    while (s < NSTG[tile]) begin
      if (faulty[s]) begin
        w = sw_stage(tile, s, w);
        n_fallback++;
        s++;
      end else begin
        push(tile, s, w);
        pop(t, st, w);
        check(t == tile, "word came back from the tile it was sent to");
        check(st >= s && (st == NSTG[tile] - 1 || faulty[st+1]), $sformatf("word left at stage %0d", st));
        if (st < s) begin check(0, "stage tag went backwards"); break; end
        s = st + 1;
      end
    end
  endtask

  function automatic logic [DW-1:0] rand_fft();
    logic [DW-1:0] w;
    for (int k = 0; k < 2 * N; k++) w[16*k +: 16] = 16'($urandom_range(0, 32000)) - 16'd16000;
    return w;
  endfunction

  task automatic fft_compare(input logic [DW-1:0] x, input logic [DW-1:0] y, input string tag);
    int bad = 0;
    for (int m = 0; m < N; m++) begin
      real er = 0, ei = 0, gr, gi;
      for (int k = 0; k < N; k++) begin
        real xr, xi, a;
        xr = real'($signed(x[32*k+16 +: 16])); xi = real'($signed(x[32*k +: 16]));
        a  = -2.0 * 3.141592653589793 * real'(m * k) / real'(N);
        er += xr * $cos(a) - xi * $sin(a);
        ei += xr * $sin(a) + xi * $cos(a);
      end
      er /= N; ei /= N;
      gr = real'($signed(y[32*m+16 +: 16])); gi = real'($signed(y[32*m +: 16]));
      if (gr - er >= TOL || er - gr >= TOL || gi - ei >= TOL || ei - gi >= TOL) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d bins off", tag, bad));
  endtask

  localparam logic [127:0] KEY_B = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam logic [127:0] PT_B  = 128'h3243f6a8885a308d313198a2e0370734;
  localparam logic [127:0] CT_B  = 128'h3925841d02dc09fbdc118597196a0b32;
  localparam logic [127:0] KEY_C = 128'h000102030405060708090a0b0c0d0e0f;
  localparam logic [127:0] PT_C  = 128'h00112233445566778899aabbccddeeff;
  localparam logic [127:0] CT_C  = 128'h69c4e0d86a7b0430d8cdb78070b4c55a;

  initial begin
    logic [DW-1:0] x, y;
    int t0, lat, tl, st;
    int seen [6];
    int f2, f4;
    sw_cq_valid = 0; sw_pq_ready = 0; cfg_we = 0; sw_cq_tile = 0; sw_cq_stage = 0;
    sw_cq_data = '0; cfg_tile = 0; cfg_stage = 0; cfg_wdata = '0;
    pass_latency = 100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- FFT ----
    x = rand_fft();
    run(T_FFT, '0, x, y);                      fft_compare(x, y, "FFT fault-free");
    configure(T_FFT, 16'b00_0100);
    x = rand_fft();
    run(T_FFT, 16'b00_0100, x, y);             fft_compare(x, y, "FFT stage 2 faulty");
    check(fired[T_FFT][2] == 1, "faulty FFT stage 2 saw only the fault-free word");

    // ---- DCT ----
    x = rand_block();
    run(T_DCT, '0, x, y);                      dct_compare(x, y, "DCT fault-free");
    configure(T_DCT, 16'b00_0000_1000);
    x = rand_block();
    run(T_DCT, 16'b00_0000_1000, x, y);        dct_compare(x, y, "DCT stage 3 faulty");
    configure(T_DCT, 16'b10_0000_0001);
    x = rand_block();
    run(T_DCT, 16'b10_0000_0001, x, y);        dct_compare(x, y, "DCT stages 0 and 9 faulty");
    check(fired[T_DCT][3] == 2 && fired[T_DCT][0] == 2 && fired[T_DCT][9] == 2, "faulty DCT stages bypassed (one word each from the other runs)");

    // ---- AES, 11 stages ----
    run(T_AES11, '0, DW'({PT_B, KEY_B}), y);   check(y[255:128] == CT_B, "AES-11 fault-free");
    configure(T_AES11, 16'b000_0010_0000);
    run(T_AES11, 16'b000_0010_0000, DW'({PT_C, KEY_C}), y);
    check(y[255:128] == CT_C, "AES-11 stage 5 faulty");
    check(fired[T_AES11][5] == 1, "faulty AES-11 stage 5 bypassed");

    // ---- AES, 3 stages ----
    run(T_AES3, '0, DW'({PT_C, KEY_C}), y);    check(y[255:128] == CT_C, "AES-3 fault-free");
    configure(T_AES3, 16'b010);
    run(T_AES3, 16'b010, DW'({PT_B, KEY_B}), y);
    check(y[255:128] == CT_B, "AES-3 stage 1 faulty");
    check(fired[T_AES3][1] == 1, "faulty AES-3 stage 1 bypassed");

    // ---- both AES tiles finish together: the pop port picks between tiles ----
    configure(T_AES11, '0);
    configure(T_AES3, '0);
    push(T_AES11, 0, DW'({PT_B, KEY_B}));
    push(T_AES3, 0, DW'({PT_C, KEY_C}));
    repeat (20) @(negedge clk);
    seen = '{default: 0};
    for (int n = 0; n < 2; n++) begin
      pop(tl, st, y);
      seen[tl]++;
      check(y[255:128] == (tl == T_AES11 ? CT_B : CT_C), "concurrent AES results");
    end
    check(seen[T_AES11] == 1 && seen[T_AES3] == 1, "one result from each AES tile");

    // ---- pass-through: latency, full queue, two faults, shorter chains ----
    x = DW'(64'h0123_4567_89ab_cdef);
    t0 = cycle;
    run(T_PASS, '0, x, y);
    lat = cycle - t0;
    $display("pass-through 12 x 100 cycles round trip: %0d cycles", lat);
    check(y == x, "pass-through data unchanged");
    check(lat >= 12 * 100 && lat <= 12 * 100 + 20, $sformatf("pass-through latency %0d", lat));
    pass_latency = 20;
    for (int n = 0; n < 18; n++) push(T_PASS, 0, DW'(64'h1000 + n));  // later pushes wait for space
    for (int n = 0; n < 18; n++) begin
      pop(tl, st, y);
      check(tl == T_PASS && st == 11 && y == DW'(64'h1000 + n), $sformatf("pass-through stream word %0d", n));
    end
    pass_latency = 100;
    f2 = fired[T_PASS][2]; f4 = fired[T_PASS][4];
    configure(T_PASS, 16'b01_0100);
    run(T_PASS, 16'b01_0100, DW'(64'hfeed_f00d), y);
    check(y == DW'(64'hfeed_f00d), "pass-through with stages 2 and 4 faulty");
    check(fired[T_PASS][2] == f2 && fired[T_PASS][4] == f4, "faulty pass-through stages bypassed");
    // a 4-stage chain of 750 cycles per stage: a 300,000-cycle operation at 100x speedup
    pass_latency = 750;
    configure(T_PASS, 16'h0ff0);
    push(T_PASS, 0, DW'(64'h4444));
    t0 = cycle;
    pop(tl, st, y);
    lat = cycle - t0;
    $display("pass-through 4 x 750 cycles: %0d cycles", lat);
    check(st == 3 && y == DW'(64'h4444), "4-stage chain leaves at stage 3");
    check(lat >= 4 * 750 && lat <= 4 * 750 + 10, $sformatf("4-stage latency %0d", lat));
    pass_latency = 100;
    configure(T_PASS, '0);

    // ---- checksum ----
    for (int n = 0; n < 20; n++) begin
      x = DW'({$urandom, $urandom} | 64'h1);
      run(T_SUM, '0, x, y);
      check(y == DW'($countones(x[63:0])), "checksum value");
    end
    push(T_SUM, 0, '0);
    repeat (10) @(negedge clk);
    check(!sw_pq_valid, "zero word gives no checksum output");
    n_zero++;
    configure(T_SUM, 16'b1);                 // the only stage faulty: all in software
    run(T_SUM, 16'b1, DW'(64'hff), y);
    check(y == DW'(8), "checksum in software");

    // ---- mechanisms ----
    $display("fallbacks=%0d multi_fault_runs=%0d cq_full=%0d pq_stall=%0d tile_choice=%0d zero_suppress=%0d",
             n_fallback, n_multi, n_cq_full, n_pq_stall, n_tile_choice, n_zero);
    check(n_fallback > 0, "software fallback happened");
    check(n_multi > 0, "two-fault chain happened");
    check(n_cq_full > 0, "full consumer queue happened");
    check(n_pq_stall > 0, "pop-port back-pressure happened");
    check(n_tile_choice > 0, "pop-port choice between tiles happened");
    check(n_zero > 0, "checksum zero suppression happened");
    $display("simulated cycles: %0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
