// Self-checking testbench of core_realloc_predictor.
// Loads pairs of MPKI trends (shaped like the two example processes, random
// monotone ones, and ones that hit each of the three Rdesired cases), runs the
// heuristic and compares points A/B and the core split with a reference model
// written here in integer/real arithmetic from the same definitions. Also
// checks the latency bound of 4*NPTS+40 cycles and that the split sums to NPTS.
module core_realloc_predictor_tb;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, wr_proc = 0, start = 0;
  logic [5:0] wr_idx = 0;
  logic [15:0] wr_val = 0;
  logic busy, done;
  logic [6:0] sec, insec;
  logic [5:0] pa [2];
  logic [5:0] pb [2];

  core_realloc_predictor #(.NPTS(N)) dut (
    .clk, .rst_n, .wr_en, .wr_proc, .wr_idx, .wr_val, .start, .busy, .done,
    .secure_cores (sec), .insecure_cores (insec), .point_a (pa), .point_b (pb));

  int checks = 0, failures = 0;
  int m [2][N];
  int cnt_eq = 0, cnt_lt = 0, cnt_gt = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int slope_into(int p, int i);
    int d;
    d = m[p][i-1] - m[p][i];
    if (d < 0) d = -d;
    return d * N;
  endfunction

  // reference model
  task automatic reference(output int ra0, rb0, ra1, rb1, rs, ri);
    int a [2], b [2], c [2], rd, an, lg, af, rl, rsm;
    real s [2], sr;
    for (int p = 0; p < 2; p++) begin
      b[p] = 0;
      for (int i = N - 1; i >= 1; i--) if (slope_into(p, i) > 6554) begin b[p] = i; break; end
      a[p] = b[p];
      for (int i = 1; i < b[p]; i++) if (slope_into(p, i) < 32768) begin a[p] = i; break; end
      c[p] = b[p] + 1;
      s[p] = (b[p] == a[p] || m[p][a[p]] <= m[p][b[p]]) ? 0.0 :
             real'(m[p][a[p]] - m[p][b[p]]) / real'(b[p] - a[p]);
    end
    ra0 = a[0]; rb0 = b[0]; ra1 = a[1]; rb1 = b[1];
    rd = c[0] + c[1];
    if (rd == N) begin rs = c[0]; ri = c[1]; cnt_eq++; end
    else if (rd < N) begin an = N - rd; rs = c[0] + an / 2; ri = c[1] + an - an / 2; cnt_lt++; end
    else begin
      cnt_gt++;
      an = rd - N;
      lg = (s[1] > s[0]) ? 1 : 0;
      if (s[0] == 0.0 && s[1] == 0.0) af = (an + 1) / 2;
      else begin
        sr = s[1-lg] / s[lg];
        af = int'($ceil(real'(an) * sr - 1e-9));
      end
      if (af > an) af = an;
      rl = c[lg] - af; rsm = c[1-lg] - (an - af);
      if (rl < 1) begin rsm = rsm - (1 - rl); rl = 1; end
      if (rsm < 1) begin rl = rl - (1 - rsm); rsm = 1; end
      rs = lg ? rsm : rl; ri = lg ? rl : rsm;
    end
  endtask

  task automatic load_and_run(string tag);
    int ra0, rb0, ra1, rb1, rs, ri, cyc;
    for (int p = 0; p < 2; p++)
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        wr_en = 1; wr_proc = p[0]; wr_idx = i[5:0]; wr_val = m[p][i][15:0];
      end
    @(negedge clk); wr_en = 0; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    reference(ra0, rb0, ra1, rb1, rs, ri);
    checks += 4;
    if (pa[0] != ra0 || pb[0] != rb0 || pa[1] != ra1 || pb[1] != rb1) begin
      failures++;
      $display("%s: points A/B dut %0d/%0d %0d/%0d ref %0d/%0d %0d/%0d", tag,
               pa[0], pb[0], pa[1], pb[1], ra0, rb0, ra1, rb1);
    end
    if (sec != rs || insec != ri) begin
      failures++;
      $display("%s: split dut %0d/%0d ref %0d/%0d", tag, sec, insec, rs, ri);
    end
    if (int'(sec) + int'(insec) != N) begin
      failures++; $display("%s: split does not sum to %0d", tag, N);
    end
    if (cyc > 4 * N + 40) begin
      failures++; $display("%s: latency %0d cycles", tag, cyc);
    end
  endtask

  // Exponential-like decay to a floor: M(c) = fl + (1-fl)*exp(-(c-1)/tau)
  task automatic shape(int p, real fl, real tau);
    for (int i = 0; i < N; i++)
      m[p][i] = int'(65535.0 * (fl + (1.0 - fl) * $exp(-real'(i) / tau)));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // an ALEXNET-like slow decay against a VISION-like fast one
    shape(0, 0.22, 14.0); shape(1, 0.49, 2.0);
    load_and_run("alexnet/vision");
    // both slow: Rdesired > N
    shape(0, 0.1, 18.0); shape(1, 0.2, 16.0);
    load_and_run("both slow");
    // both fast: Rdesired < N
    shape(0, 0.5, 1.5); shape(1, 0.3, 2.5);
    load_and_run("both fast");
    // exactly N: linear ramps ending at chosen points
    for (int i = 0; i < N; i++) begin
      m[0][i] = (i <= 39) ? 60000 - i * 1000 : 21000;
      m[1][i] = (i <= 23) ? 60000 - i * 1500 : 25500;
    end
    load_and_run("exact");
    // flat trends
    for (int i = 0; i < N; i++) begin m[0][i] = 30000; m[1][i] = 40000; end
    load_and_run("flat");
    // random monotone trends
    for (int k = 0; k < 40; k++) begin
      for (int p = 0; p < 2; p++) begin
        int v;
        v = 65535;
        for (int i = 0; i < N; i++) begin
          m[p][i] = v;
          v = v - int'($urandom_range(0, (i < 10) ? 6000 : 900));
          if (v < 0) v = 0;
        end
      end
      load_and_run($sformatf("random %0d", k));
    end
    checks++;
    if (cnt_gt == 0 || cnt_lt == 0 || cnt_eq == 0) begin
      failures++;
      $display("case coverage: eq %0d lt %0d gt %0d", cnt_eq, cnt_lt, cnt_gt);
    end
    $display("cases: Rdesired==N %0d, <N %0d, >N %0d", cnt_eq, cnt_lt, cnt_gt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
