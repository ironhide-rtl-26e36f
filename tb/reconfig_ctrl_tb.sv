// Self-checking testbench of reconfig_ctrl. Models the cores (idle after a
// delay), the private caches (flush done after a per-tile random delay), the
// home table (remap done after a delay), the memory controllers and the
// cluster register with its once-per-invocation rule. Checks the order of a
// re-allocation (stall -> flush exactly the moved tiles -> re-home only after
// every flush -> commit only after re-homing -> release), the row-major mask
// built from the core count, refusal of a second request in one invocation,
// the no-change case, and a secure context switch (flush of all secure tiles
// and purge of the secure controllers, concurrently).
module reconfig_ctrl_tb;
  localparam int NT = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, ctx_switch = 0, cores_idle = 0, remap_done = 0;
  logic [6:0] req_cores = 0;
  logic busy, done, ctx_done, reject, cfg_valid, stall_all, remap_start;
  logic [NT-1:0] cur_mask, cfg_mask, flush_req, flush_done, moved, newm;
  logic cfg_allowed, cfg_accept;
  logic [3:0] purge_req, purge_done;

  reconfig_ctrl dut (.clk, .rst_n, .req_valid, .req_secure_cores (req_cores), .ctx_switch,
    .busy, .done, .ctx_done, .reject, .cur_mask, .cfg_allowed, .cfg_valid, .cfg_mask,
    .cfg_accept, .secure_mc_mask (4'b0011), .stall_all, .cores_idle, .flush_req, .flush_done,
    .remap_start, .moved_mask (moved), .new_mask (newm), .remap_done,
    .mc_purge_req (purge_req), .mc_purge_done (purge_done));

  int checks = 0, failures = 0;
  // environment state
  int fl_delay [NT];
  bit fl_pend [NT];
  int pg_delay [4];
  bit pg_pend [4];
  int rm_delay = -1;
  logic [NT-1:0] flushed;
  logic [3:0] purged;
  bit remapped;
  bit allowed_q;

  assign cfg_allowed = allowed_q;
  assign cfg_accept  = cfg_valid && allowed_q;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (!rst_n) begin
      cur_mask <= {32'h0, 32'hFFFF_FFFF}; allowed_q <= 1;
    end else if (cfg_accept) begin
      cur_mask <= cfg_mask; allowed_q <= 0;
    end
  end

  // caches, controllers and home table
  always @(posedge clk) begin
    flush_done <= '0;
    purge_done <= '0;
    remap_done <= 1'b0;
    if (!rst_n) begin
      // registers are not defined before the first reset edge
      fl_pend = '{default: 0}; pg_pend = '{default: 0}; rm_delay = -1;
    end else begin
    for (int t = 0; t < NT; t++) begin
      if (flush_req[t]) begin
        if (!stall_all || !cores_idle) begin failures++; $display("FAIL flush while running"); end
        fl_pend[t] = 1; fl_delay[t] = $urandom_range(1, 40);
      end else if (fl_pend[t]) begin
        if (fl_delay[t] == 0) begin fl_pend[t] = 0; flush_done[t] <= 1; flushed[t] = 1; end
        else fl_delay[t]--;
      end
    end
    for (int m = 0; m < 4; m++) begin
      if (purge_req[m]) begin pg_pend[m] = 1; pg_delay[m] = $urandom_range(1, 30); end
      else if (pg_pend[m]) begin
        if (pg_delay[m] == 0) begin pg_pend[m] = 0; purge_done[m] <= 1; purged[m] = 1; end
        else pg_delay[m]--;
      end
    end
    if (remap_start) begin
      checks++;
      for (int t = 0; t < NT; t++) if (fl_pend[t]) begin
        failures++; $display("FAIL re-home before flush of tile %0d", t); break;
      end
      rm_delay = $urandom_range(5, 50);
    end else if (rm_delay == 0) begin remap_done <= 1; remapped = 1; rm_delay = -1; end
    else if (rm_delay > 0) rm_delay--;
    if (cfg_valid) begin
      checks++;
      if (!remapped && moved != '0) begin failures++; $display("FAIL commit before re-home"); end
    end
    end
  end

  task automatic reallocate(int r, bit expect_ok);
    logic [NT-1:0] old, want;
    int w;
    old = cur_mask;
    want = '0; for (int i = 0; i < r; i++) want[i] = 1;
    flushed = '0; remapped = 0;
    @(negedge clk); req_valid = 1; req_cores = 7'(r);
    #1 if (!expect_ok) check(reject, "second request refused");
    @(negedge clk); req_valid = 0;
    if (!expect_ok) begin
      check(!busy && cur_mask == old, "refused request changes nothing"); return;
    end
    check(stall_all, "cores stalled first");
    repeat ($urandom_range(0, 5)) begin @(negedge clk); check(flush_req == '0, "no flush before idle"); end
    cores_idle = 1;
    w = 0;
    while (!done && w < 2000) begin @(negedge clk); w++; end
    check(done, "re-allocation completes");
    check(cur_mask == want, $sformatf("binding = first %0d tiles", r));
    check(flushed == (old ^ want), "exactly the moved tiles flushed");
    check(remapped == (old != want), "re-homed iff tiles moved");
    @(negedge clk);
    check(!stall_all, "cores released");
    cores_idle = 0;
  endtask

  initial begin
    int w;
    repeat (3) @(negedge clk); rst_n = 1;
    reallocate(46, 1);                     // secure cluster grows to 46 tiles
    reallocate(10, 0);                     // only once per invocation
    @(negedge clk); force_arm();
    reallocate(46, 1);                     // no change: no flush, no re-home
    @(negedge clk); force_arm();
    reallocate(2, 1);                      // shrink to two tiles
    // secure context switch
    flushed = '0; purged = '0;
    @(negedge clk); ctx_switch = 1; @(negedge clk); ctx_switch = 0;
    check(stall_all, "context switch stalls");
    @(negedge clk); cores_idle = 1;
    w = 0;
    while (!ctx_done && w < 2000) begin @(negedge clk); w++; end
    check(ctx_done, "context switch completes");
    check(flushed == cur_mask, "all secure tiles flushed");
    check(purged == 4'b0011, "secure controllers purged");
    @(negedge clk); cores_idle = 0;
    check(!stall_all, "released after context switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic force_arm();
    allowed_q = 1;   // a new application invocation
  endtask
endmodule
