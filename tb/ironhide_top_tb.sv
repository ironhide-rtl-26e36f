// End-to-end testbench of ironhide_top at its default size (64 tiles, 32 KB
// private caches, four controllers). Plays the cores, the shared L2, the
// DRAM channels and the secure kernel, and walks through one interactive
// application invocation:
//   1. pages are homed (one cross-cluster home refused); cores use memory:
//      hits, misses with refill and write-back, secure-core access to the
//      insecure IPC region, an insecure speculative access to a secure region
//      that stalls and is squashed, one that stalls and traps, a committed one
//      that traps at once;
//   2. network traffic inside each cluster, IPC traffic across, and a foreign
//      non-IPC packet that is refused;
//   3. L2 misses steered to the right controllers, a refused insecure miss to
//      a secure region, and back-pressure when a controller queue fills;
//   4. the heuristic runs on two MPKI trends and its result re-allocates
//      tiles: stall, flush of the moved tiles (dirty data reaches memory),
//      page re-homing through the unmap port, commit;
//   5. a second re-allocation in the same invocation is refused; a new
//      invocation then splits a row, and a packet in the split row is routed
//      Y-X;
//   6. a secure context switch flushes the secure tiles and purges the secure
//      controllers.
// Each mechanism is counted and must occur at least once.
module ironhide_top_tb;
  import ih_pkg::*;
  localparam int NT = 64, MX = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // core side
  logic [NT-1:0] core_req_valid, core_req_ready, core_resp_valid, core_resolve_valid,
                 core_resolve_squash, core_exc, core_squashed, core_check_stall;
  core_req_t core_req [NT];
  logic [63:0] core_resp_rdata [NT];
  logic stall_all, cores_idle;
  // L1 <-> L2
  logic [NT-1:0] l1v, l1r, l1rv;
  mem_req_t l1req [NT];
  logic [511:0] l1rd [NT];
  // network
  logic [NT-1:0] inj_valid, inj_ipc, inj_ready, ej_valid, ej_ready, noc_drop;
  logic [2:0] inj_dx [NT];
  logic [2:0] inj_dy [NT];
  logic [63:0] inj_pl [NT];
  flit_t ej_flit [NT];
  // homing
  logic [39:0] hl_addr, unmap_addr;
  logic [5:0] hl_home, hs_home, unmap_home;
  logic hl_hit, hs_valid, hs_err, unmap_valid, unmap_ack;
  logic [7:0] hs_idx;
  // memory controllers
  logic l2m_valid, l2m_ready, l2m_viol;
  mem_req_t l2m_req;
  logic [3:0] dram_valid, dram_ready, mc_purging;
  mem_req_t dram_req [4];
  // kernel
  logic app_start, ctx_switch, pw_en, pw_proc, pred_start, pred_done;
  logic [5:0] pw_idx;
  logic [15:0] pw_val;
  logic [6:0] psec, pinsec;
  logic rc_busy, rc_done, rc_reject, ctx_done;
  logic [NT-1:0] smask;

  ironhide_top dut (
    .clk, .rst_n,
    .core_req_valid, .core_req, .core_req_ready, .core_resp_valid, .core_resp_rdata,
    .core_resolve_valid, .core_resolve_squash, .core_exc, .core_squashed, .core_check_stall,
    .stall_all, .cores_idle,
    .l1_mem_req_valid (l1v), .l1_mem_req (l1req), .l1_mem_req_ready (l1r),
    .l1_mem_resp_valid (l1rv), .l1_mem_resp_data (l1rd),
    .inj_valid, .inj_dst_x (inj_dx), .inj_dst_y (inj_dy), .inj_ipc, .inj_payload (inj_pl),
    .inj_ready, .ej_valid, .ej_flit, .ej_ready, .noc_drop,
    .home_lookup_addr (hl_addr), .home_lookup_home (hl_home), .home_lookup_hit (hl_hit),
    .home_set_valid (hs_valid), .home_set_idx (hs_idx), .home_set_home (hs_home),
    .home_set_err (hs_err), .unmap_valid, .unmap_addr, .unmap_home, .unmap_ack,
    .l2m_valid, .l2m_req, .l2m_ready, .l2m_violation (l2m_viol),
    .dram_valid, .dram_req, .dram_ready,
    .app_start, .ctx_switch, .pred_wr_en (pw_en), .pred_wr_proc (pw_proc),
    .pred_wr_idx (pw_idx), .pred_wr_val (pw_val), .pred_start, .pred_done,
    .pred_secure_cores (psec), .pred_insecure_cores (pinsec),
    .reconfig_busy (rc_busy), .reconfig_done (rc_done), .reconfig_reject (rc_reject),
    .ctx_done, .secure_core_mask (smask), .mc_purging);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_hit = 0, n_fill = 0, n_wb = 0, n_ipc_access = 0, n_hold_squash = 0, n_hold_trap = 0,
      n_trap = 0, n_pkt = 0, n_ipc_pkt = 0, n_noc_drop = 0, n_yx = 0, n_mc = 0, n_mc_viol = 0,
      n_mc_full = 0, n_realloc = 0, n_reject = 0, n_flush_wb = 0, n_unmap = 0, n_ctx = 0,
      n_purge = 0;

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- L2 model behind the private caches ----------------
  logic [63:0] l2mem [logic [39:0]];
  int rsp_delay [NT];
  logic [39:0] rsp_addr [NT];
  bit in_flush = 0;
  function automatic logic [63:0] l2word(logic [39:0] a);
    return l2mem.exists(a) ? l2mem[a] : {24'h0, a};
  endfunction
  always @(posedge clk) begin
    for (int t = 0; t < NT; t++) begin
      l1rv[t] <= 1'b0;
      if (rst_n && l1v[t] && l1r[t]) begin
        if (l1req[t].we) begin
          n_wb++;
          if (in_flush) n_flush_wb++;
          for (int w = 0; w < 8; w++) l2mem[l1req[t].addr + 40'(8*w)] = l1req[t].wdata[64*w +: 64];
        end else begin
          n_fill++;
          rsp_delay[t] = 3; rsp_addr[t] = l1req[t].addr;
        end
      end else if (rsp_delay[t] > 0) begin
        rsp_delay[t]--;
        if (rsp_delay[t] == 0) begin
          l1rv[t] <= 1'b1;
          for (int w = 0; w < 8; w++) l1rd[t][64*w +: 64] <= l2word(rsp_addr[t] + 40'(8*w));
        end
      end
    end
  end

  // unmap port: acknowledge after two cycles
  int um_wait = 0;
  int unmapped_home [int];
  always @(posedge clk) begin
    unmap_ack <= 1'b0;
    if (unmap_valid && !unmap_ack) begin
      if (um_wait == 2) begin
        unmap_ack <= 1'b1; um_wait = 0; n_unmap++;
        unmapped_home[int'(unmap_addr[39:38]) * 64 + int'(unmap_addr[21:16])] = int'(unmap_home);
      end else um_wait++;
    end
  end

  // monitors
  always @(posedge clk) if (rst_n) begin
    if (|noc_drop) n_noc_drop++;
    if (rc_done) n_realloc++;
    if (rc_reject) n_reject++;
    if (ctx_done) n_ctx++;
    if (|mc_purging) n_purge++;
    for (int t = 0; t < NT; t++) if (ej_valid[t] && ej_ready[t]) begin
      n_pkt++;
      if (ej_flit[t].ipc) n_ipc_pkt++;
      if (ej_flit[t].yx_first) n_yx++;
      if (!ej_flit[t].ipc)
        check(smask[t] == (ej_flit[t].src_cl == CL_SECURE), "non-IPC packet stays in its cluster");
    end
  end

  // ---------------- helpers ----------------
  // 0 forwarded, 1 trapped at once, 2 held then squashed, 3 held then trapped
  task automatic core_access(int t, logic [39:0] a, bit we, logic [63:0] d, bit spec,
                             bit squash, output int outcome, output logic [63:0] rd);
    int w;
    @(negedge clk);
    core_req[t].addr = a; core_req[t].we = we; core_req[t].wdata = d; core_req[t].spec = spec;
    core_req_valid[t] = 1;
    #1;
    if (core_exc[t]) begin
      outcome = 1; @(negedge clk); core_req_valid[t] = 0; return;
    end
    while (!core_req_ready[t]) begin @(negedge clk); #1; end
    @(negedge clk); core_req_valid[t] = 0;
    #1;
    if (core_check_stall[t]) begin
      repeat (3) begin @(negedge clk); #1 check(core_check_stall[t] && !core_req_ready[t], "held request stalls the core"); end
      core_resolve_valid[t] = 1; core_resolve_squash[t] = squash;
      #1 outcome = core_squashed[t] ? 2 : (core_exc[t] ? 3 : -1);
      @(negedge clk); core_resolve_valid[t] = 0;
      return;
    end
    outcome = 0; w = 0;
    while (!core_resp_valid[t] && w < 100) begin @(negedge clk); w++; #1; end
    check(core_resp_valid[t], "access answered");
    if (w <= 1) n_hit++;
    rd = core_resp_rdata[t];
  endtask

  task automatic send_pkt(int t, int dx, int dy, bit ipc, logic [63:0] p);
    @(negedge clk);
    inj_valid[t] = 1; inj_dx[t] = 3'(dx); inj_dy[t] = 3'(dy); inj_ipc[t] = ipc; inj_pl[t] = p;
    #1 while (!inj_ready[t]) begin @(negedge clk); #1; end
    @(negedge clk); inj_valid[t] = 0;
  endtask

  function automatic logic [NT-1:0] first_n(int r);
    logic [NT-1:0] m;
    m = '0; for (int i = 0; i < r; i++) m[i] = 1;
    return m;
  endfunction

  // ---------------- the scenario ----------------
  initial begin
    int oc, r, mv, n_before;
    logic [63:0] rd;
    logic [39:0] a_sec, a_ins, a_mv;
    core_req_valid = '0; core_resolve_valid = '0; core_resolve_squash = '0; cores_idle = 0;
    for (int t = 0; t < NT; t++) begin
      core_req[t] = '0; inj_dx[t] = 0; inj_dy[t] = 0; inj_pl[t] = 0; rsp_delay[t] = 0;
    end
    l1r = '1; inj_valid = '0; inj_ipc = '0; ej_ready = '1;
    hl_addr = '0; hs_valid = 0; hs_idx = 0; hs_home = 0;
    l2m_valid = 0; l2m_req = '0; dram_ready = '1;
    app_start = 0; ctx_switch = 0; pw_en = 0; pw_proc = 0; pw_idx = 0; pw_val = 0; pred_start = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(smask == first_n(32), "reset binding 32/32");

    // ---- 1. homing and core accesses ----
    @(negedge clk); hs_valid = 1; hs_idx = 8'd5; hs_home = 6'd31; #1 check(!hs_err, "secure page on secure tile");
    @(negedge clk); hs_idx = 8'd130; hs_home = 6'd32; #1 check(!hs_err, "insecure page on insecure tile");
    @(negedge clk); hs_idx = 8'd6; hs_home = 6'd40; #1 check(hs_err, "secure page on insecure tile refused");
    @(negedge clk); hs_valid = 0;
    a_sec = {2'd0, 16'd0, 6'd5, 16'h0100};       // region 0 (secure), page 5
    a_ins = {2'd2, 16'd0, 6'd2, 16'h0200};       // region 2 (insecure), page 130
    core_access(0, a_sec, 1, 64'hC0FFEE, 0, 0, oc, rd);  check(oc == 0, "secure write forwarded");
    core_access(0, a_sec, 0, 0, 0, 0, oc, rd);           check(rd == 64'hC0FFEE, "secure read hits own write");
    core_access(0, a_sec ^ 40'h8000, 1, 64'h1, 0, 0, oc, rd);   // same set, other tag: write-back
    core_access(0, a_sec, 0, 0, 0, 0, oc, rd);           check(rd == 64'hC0FFEE, "data survives eviction");
    core_access(3, a_ins, 0, 0, 0, 0, oc, rd);           check(oc == 0 && rd == {24'h0, a_ins}, "secure core reads IPC region");
    n_ipc_access++;
    core_access(40, a_sec, 0, 0, 1, 1, oc, rd);          check(oc == 2, "insecure speculative: held then squashed");
    if (oc == 2) n_hold_squash++;
    core_access(41, a_sec, 0, 0, 1, 0, oc, rd);          check(oc == 3, "insecure speculative: held then trapped");
    if (oc == 3) n_hold_trap++;
    core_access(42, a_sec, 0, 0, 0, 0, oc, rd);          check(oc == 1, "insecure committed: trapped");
    if (oc == 1) n_trap++;
    core_access(42, a_ins, 1, 64'hBEEF, 0, 0, oc, rd);   check(oc == 0, "insecure core uses its own region");

    // ---- 2. network ----
    send_pkt(0, 7, 3, 0, 64'hA1);        // inside the secure cluster
    send_pkt(63, 0, 4, 0, 64'hA2);       // inside the insecure cluster
    send_pkt(9, 4, 6, 1, 64'hA3);        // IPC across
    send_pkt(10, 2, 7, 0, 64'hA4);       // foreign non-IPC: refused
    repeat (30) @(negedge clk);

    // ---- 3. memory controllers ----
    begin
      mem_req_t q;
      q = '0; q.cl = CL_SECURE;
      for (int k = 0; k < 8; k++) begin
        @(negedge clk); q.addr = {2'(k % 4), 32'd0, 6'(k)} ; q.addr[39:38] = 2'(k % 4);
        l2m_valid = 1; l2m_req = q; q.cl = (k % 4 >= 2) ? CL_INSECURE : CL_SECURE;
        l2m_req.cl = q.cl;
        #1;
        if (l2m_ready && !l2m_viol) n_mc++;
      end
      @(negedge clk); l2m_req.addr = {2'd1, 38'h40}; l2m_req.cl = CL_INSECURE; #1;
      check(l2m_viol, "insecure miss to a secure region refused");
      if (l2m_viol) n_mc_viol++;
      // back-pressure: DRAM channel 2 stops, its queue fills
      dram_ready = 4'b1011;
      for (int k = 0; k < 40; k++) begin
        @(negedge clk); l2m_req.addr = {2'd2, 32'd0, 6'd0}; l2m_req.cl = CL_INSECURE; #1;
        if (!l2m_ready) n_mc_full++;
      end
      @(negedge clk); l2m_valid = 0; dram_ready = '1;
      repeat (40) @(negedge clk);
      check(dram_valid == '0, "controller queues drained");
    end

    // ---- 4. heuristic and re-allocation ----
    for (int p = 0; p < 2; p++) for (int i = 0; i < NT; i++) begin
      real fl, tau;
      fl = p ? 0.49 : 0.22; tau = p ? 2.0 : 14.0;     // slow-saturating secure, fast insecure
      @(negedge clk); pw_en = 1; pw_proc = p[0]; pw_idx = 6'(i);
      pw_val = 16'(int'(65535.0 * (fl + (1.0 - fl) * $exp(-real'(i) / tau))));
    end
    @(negedge clk); pw_en = 0;
    // dirty data in the tile that will move: 31 if the secure cluster shrinks, 32 if it grows
    pred_start = 1; @(negedge clk); pred_start = 0;
    while (!pred_done) @(negedge clk);
    r = int'(psec);
    check(int'(psec) + int'(pinsec) == NT, "heuristic uses every tile");
    $display("heuristic: %0d secure tiles, %0d insecure", psec, pinsec);
    // the request is already with the sequencer; it waits for the cores to go idle
    mv = (r > 32) ? 32 : 31;
    @(negedge clk);
    check(stall_all, "cores stalled for re-allocation");
    cores_idle = 1;
    in_flush = 1;
    while (!rc_done && !rc_reject) @(negedge clk);
    in_flush = 0;
    @(negedge clk); cores_idle = 0;
    check(smask == first_n(r), "new binding committed");
    check(!stall_all, "cores released");
    if (r != 32) begin
      // the page homed on the moved tile was unmapped and re-homed in its cluster
      hl_addr = (mv == 31) ? a_sec : a_ins; #1;
      check(unmapped_home.exists((mv == 31) ? 5 : 130), "page of the moved tile unmapped");
      check(!hl_hit || smask[hl_home] == (mv == 31), "page re-homed inside its cluster");
    end

    // ---- 5. once per invocation; new invocation with a split row ----
    @(negedge clk); pred_start = 1; @(negedge clk); pred_start = 0;
    while (!pred_done) @(negedge clk);
    @(negedge clk); #1;
    check(n_reject >= 1 && smask == first_n(r), "second re-allocation refused");
    @(negedge clk); app_start = 1; @(negedge clk); app_start = 0;
    // new invocation: trends that give a split row (secure saturates at 20 cores)
    for (int p = 0; p < 2; p++) for (int i = 0; i < NT; i++) begin
      @(negedge clk); pw_en = 1; pw_proc = p[0]; pw_idx = 6'(i);
      if (p == 0) pw_val = (i <= 19) ? 16'(60000 - i * 1500) : 16'd31500;
      else        pw_val = (i <= 43) ? 16'(60000 - i * 1000) : 16'd17000;
    end
    @(negedge clk); pw_en = 0;
    // give tile 16 a dirty line so that the flush writes back
    core_access(16, a_sec ^ 40'h40, 1, 64'h5EC, 0, 0, oc, rd);
    n_before = n_flush_wb;
    pred_start = 1; @(negedge clk); pred_start = 0;
    while (!pred_done) @(negedge clk);
    $display("second invocation: %0d secure tiles", psec);
    @(negedge clk); cores_idle = 1; in_flush = 1;
    while (!rc_done && !rc_reject) @(negedge clk);
    in_flush = 0;
    @(negedge clk); cores_idle = 0;
    check(smask == first_n(int'(psec)), "split-row binding committed");
    if (smask[16] != (r > 16)) check(n_flush_wb > n_before, "flush wrote dirty data back");
    check(l2word(a_sec ^ 40'h40) == 64'h5EC || smask[16] == (r > 16), "dirty data reached the L2");
    // a packet inside the secure cluster that needs Y-X: from (3,2) to (5,1) with 20 secure tiles
    if (psec == 20) send_pkt(19, 5, 1, 0, 64'hB1);   // X-Y would cross tiles 20,21
    repeat (30) @(negedge clk);

    // ---- 6. secure context switch ----
    core_access(1, a_sec ^ 40'h80, 1, 64'h77, 0, 0, oc, rd);
    @(negedge clk); ctx_switch = 1; @(negedge clk); ctx_switch = 0;
    @(negedge clk); cores_idle = 1; in_flush = 1;
    while (!ctx_done) @(negedge clk);
    in_flush = 0;
    @(negedge clk); cores_idle = 0;
    check(l2word(a_sec ^ 40'h80) == 64'h77, "context switch flushed secure dirty data");
    n_before = n_fill;
    core_access(1, a_sec ^ 40'h80, 0, 0, 0, 0, oc, rd);
    check(n_fill == n_before + 1 && rd == 64'h77, "secure L1 empty after context switch");
    repeat (10) @(negedge clk);

    // ---- mechanism coverage ----
    check(n_hit > 0, "L1 hits");               check(n_fill > 0, "L1 refills");
    check(n_wb > 0, "L1 write-backs");         check(n_ipc_access > 0, "IPC-region access");
    check(n_hold_squash > 0, "held+squashed"); check(n_hold_trap > 0, "held+trapped");
    check(n_trap > 0, "trapped");              check(n_pkt >= 4, "packets delivered");
    check(n_ipc_pkt > 0, "IPC packets");       check(n_noc_drop > 0, "foreign packet refused");
    check(n_yx > 0, "Y-X routing");            check(n_mc > 0, "controller requests");
    check(n_mc_viol > 0, "controller refusal"); check(n_mc_full > 0, "controller back-pressure");
    check(n_realloc >= 2, "re-allocations");   check(n_reject > 0, "refused re-allocation");
    check(n_flush_wb > 0, "flush write-backs"); check(n_unmap > 0, "page unmaps");
    check(n_ctx > 0, "context switch");        check(n_purge > 0, "controller purge");
    $display("hits %0d fills %0d wbs %0d | held/squash %0d held/trap %0d trap %0d | pkts %0d ipc %0d drop %0d yx %0d",
             n_hit, n_fill, n_wb, n_hold_squash, n_hold_trap, n_trap, n_pkt, n_ipc_pkt, n_noc_drop, n_yx);
    $display("mc %0d viol %0d full %0d | realloc %0d reject %0d flushwb %0d unmap %0d ctx %0d purge %0d",
             n_mc, n_mc_viol, n_mc_full, n_realloc, n_reject, n_flush_wb, n_unmap, n_ctx, n_purge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
