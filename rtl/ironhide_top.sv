// ironhide_top: the cluster-isolation fabric of a secure multicore that runs
// secure and insecure processes side by side in two spatially separated
// clusters of tiles instead of time-sharing cores between them.
//
// Contents: NT tiles on an MX x MY cluster-isolated mesh (mesh_noc); in every
// tile a secure-region access check (sec_access_check) in front of the core's
// private L1 data cache (priv_cache); the cluster binding (cluster_config);
// the local-homing table of the shared L2 (home_table); four memory
// controller queues (mc_queue) behind a cluster-aware selector (mc_select);
// the re-allocation heuristic (core_realloc_predictor) and the sequencer that
// carries a re-allocation or a secure context switch out (reconfig_ctrl).
//
// What stays outside, as ports: the cores themselves (their memory port,
// speculation resolve and a global stall/idle handshake), the shared L2
// slices (the L1 refill/write-back ports of every tile, the home lookup port,
// the page-unmap port and the L2 miss port), the network endpoints, the DRAM
// channels behind the controllers, and the secure kernel's command ports
// (MPKI trend loading, start of an application invocation, context switch,
// page homing).
//
// Flow of a re-allocation: the kernel loads two MPKI trends and pulses
// pred_start; the predictor's result goes straight to reconfig_ctrl, which
// stalls all cores, flushes and invalidates the L1 of every tile that changes
// cluster, re-homes their pages in the home table (unmapping each through
// the unmap port), and commits the new binding, which all guards (routers,
// access checks, controllers, home table) then use. Only one such commit is
// accepted per application invocation (app_start). Memory-controller traffic
// does not use the mesh here: L2 misses arrive on one port and go to the
// controller directly. All resets are synchronous and active low.
module ironhide_top
  import ih_pkg::*;
#(
  parameter int unsigned MX           = MESH_X,
  parameter int unsigned MY           = MESH_Y,
  parameter int unsigned L1_BYTES     = 32768,
  parameter int unsigned MCQ_DEPTH    = 16,
  parameter int unsigned PG_PER_REGION = 64,
  localparam int unsigned NT  = MX * MY,
  localparam int unsigned HW  = $clog2(NT),
  localparam int unsigned CW  = $clog2(NT + 1),
  localparam int unsigned LXW = $clog2(MX),
  localparam int unsigned LYW = $clog2(MY),
  localparam int unsigned PGW = $clog2(PG_PER_REGION * NUM_REGIONS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // ---- cores ----
  input  logic [NT-1:0]     core_req_valid,
  input  core_req_t         core_req [NT],
  output logic [NT-1:0]     core_req_ready,
  output logic [NT-1:0]     core_resp_valid,
  output logic [WORD_W-1:0] core_resp_rdata [NT],
  input  logic [NT-1:0]     core_resolve_valid,
  input  logic [NT-1:0]     core_resolve_squash,
  output logic [NT-1:0]     core_exc,
  output logic [NT-1:0]     core_squashed,
  output logic [NT-1:0]     core_check_stall,
  output logic              stall_all,
  input  logic              cores_idle,
  // ---- L1 refill / write-back towards the shared L2 ----
  output logic [NT-1:0]     l1_mem_req_valid,
  output mem_req_t          l1_mem_req [NT],
  input  logic [NT-1:0]     l1_mem_req_ready,
  input  logic [NT-1:0]     l1_mem_resp_valid,
  input  logic [LINE_W-1:0] l1_mem_resp_data [NT],
  // ---- network endpoints ----
  input  logic [NT-1:0]     inj_valid,
  input  logic [LXW-1:0]    inj_dst_x [NT],
  input  logic [LYW-1:0]    inj_dst_y [NT],
  input  logic [NT-1:0]     inj_ipc,
  input  logic [WORD_W-1:0] inj_payload [NT],
  output logic [NT-1:0]     inj_ready,
  output logic [NT-1:0]     ej_valid,
  output flit_t             ej_flit [NT],
  input  logic [NT-1:0]     ej_ready,
  output logic [NT-1:0]     noc_drop,
  // ---- local homing ----
  input  logic [PADDR_W-1:0] home_lookup_addr,
  output logic [HW-1:0]     home_lookup_home,
  output logic              home_lookup_hit,
  input  logic              home_set_valid,
  input  logic [PGW-1:0]    home_set_idx,
  input  logic [HW-1:0]     home_set_home,
  output logic              home_set_err,
  output logic              unmap_valid,
  output logic [PADDR_W-1:0] unmap_addr,
  output logic [HW-1:0]     unmap_home,
  input  logic              unmap_ack,
  // ---- L2 misses to the memory controllers, and DRAM channels ----
  input  logic              l2m_valid,
  input  mem_req_t          l2m_req,
  output logic              l2m_ready,
  output logic              l2m_violation,
  output logic [NUM_MC-1:0] dram_valid,
  output mem_req_t          dram_req [NUM_MC],
  input  logic [NUM_MC-1:0] dram_ready,
  // ---- secure kernel ----
  input  logic              app_start,
  input  logic              ctx_switch,
  input  logic              pred_wr_en,
  input  logic              pred_wr_proc,
  input  logic [$clog2(NT)-1:0] pred_wr_idx,
  input  logic [15:0]       pred_wr_val,
  input  logic              pred_start,
  output logic              pred_done,
  output logic [CW-1:0]     pred_secure_cores,
  output logic [CW-1:0]     pred_insecure_cores,
  output logic              reconfig_busy,
  output logic              reconfig_done,
  output logic              reconfig_reject,
  output logic              ctx_done,
  output logic [NT-1:0]     secure_core_mask,
  output logic [NUM_MC-1:0] mc_purging
);

  // ---------------- cluster binding ----------------
  logic [NUM_MC-1:0]      sec_mc;
  logic [NUM_REGIONS-1:0] sec_reg;
  logic                   cfg_valid, cfg_accept, cfg_reject, cfg_allowed;
  logic [NT-1:0]          cfg_mask;

  cluster_config #(.NT(NT)) u_cfg (
    .clk (clk), .rst_n (rst_n), .app_start (app_start),
    .cfg_valid (cfg_valid), .cfg_core_mask (cfg_mask),
    .cfg_accept (cfg_accept), .cfg_reject (cfg_reject),
    .reconfig_allowed (cfg_allowed),
    .secure_core_mask (secure_core_mask),
    .secure_mc_mask (sec_mc), .secure_region_mask (sec_reg)
  );

  // ---------------- heuristic and sequencer ----------------
  logic [HW-1:0]  pa [2];
  logic [HW-1:0]  pb [2];
  logic           pred_busy;
  logic [NT-1:0]  flush_req, flush_done, moved, newm;
  logic           remap_start, remap_done, remap_busy;
  logic [NUM_MC-1:0] purge_req, purge_done;

  core_realloc_predictor #(.NPTS(NT)) u_pred (
    .clk (clk), .rst_n (rst_n),
    .wr_en (pred_wr_en), .wr_proc (pred_wr_proc), .wr_idx (pred_wr_idx),
    .wr_val (pred_wr_val), .start (pred_start),
    .busy (pred_busy), .done (pred_done),
    .secure_cores (pred_secure_cores), .insecure_cores (pred_insecure_cores),
    .point_a (pa), .point_b (pb)
  );

  reconfig_ctrl #(.NT(NT)) u_rc (
    .clk (clk), .rst_n (rst_n),
    .req_valid (pred_done), .req_secure_cores (pred_secure_cores),
    .ctx_switch (ctx_switch),
    .busy (reconfig_busy), .done (reconfig_done), .ctx_done (ctx_done),
    .reject (reconfig_reject),
    .cur_mask (secure_core_mask), .cfg_allowed (cfg_allowed),
    .cfg_valid (cfg_valid), .cfg_mask (cfg_mask), .cfg_accept (cfg_accept),
    .secure_mc_mask (sec_mc),
    .stall_all (stall_all), .cores_idle (cores_idle),
    .flush_req (flush_req), .flush_done (flush_done),
    .remap_start (remap_start), .moved_mask (moved), .new_mask (newm),
    .remap_done (remap_done),
    .mc_purge_req (purge_req), .mc_purge_done (purge_done)
  );

  // ---------------- tiles: access check + private cache ----------------
  for (genvar t = 0; t < int'(NT); t++) begin : g_tile
    logic      chk_valid, chk_ready, l1_ready, flush_busy;
    core_req_t chk_req;
    logic      in_valid;

    assign in_valid          = core_req_valid[t] && !stall_all;
    assign core_req_ready[t] = chk_ready && !stall_all;

    sec_access_check u_chk (
      .clk (clk), .rst_n (rst_n),
      .core_secure (secure_core_mask[t]), .secure_region_mask (sec_reg),
      .req_valid (in_valid), .req (core_req[t]), .req_ready (chk_ready),
      .resolve_valid (core_resolve_valid[t]), .resolve_squash (core_resolve_squash[t]),
      .fwd_valid (chk_valid), .fwd_req (chk_req), .fwd_ready (l1_ready),
      .stalled (core_check_stall[t]), .exc_pulse (core_exc[t]),
      .squash_pulse (core_squashed[t])
    );

    priv_cache #(.SIZE_BYTES(L1_BYTES)) u_l1 (
      .clk (clk), .rst_n (rst_n), .core_secure (secure_core_mask[t]),
      .req_valid (chk_valid), .req (chk_req), .req_ready (l1_ready),
      .resp_valid (core_resp_valid[t]), .resp_rdata (core_resp_rdata[t]),
      .mem_req_valid (l1_mem_req_valid[t]), .mem_req (l1_mem_req[t]),
      .mem_req_ready (l1_mem_req_ready[t]),
      .mem_resp_valid (l1_mem_resp_valid[t]), .mem_resp_data (l1_mem_resp_data[t]),
      .flush_req (flush_req[t]), .flush_busy (flush_busy), .flush_done (flush_done[t])
    );
  end

  // ---------------- network ----------------
  mesh_noc #(.MX(MX), .MY(MY)) u_noc (
    .clk (clk), .rst_n (rst_n), .secure_core_mask (secure_core_mask),
    .inj_valid (inj_valid), .inj_dst_x (inj_dst_x), .inj_dst_y (inj_dst_y),
    .inj_ipc (inj_ipc), .inj_payload (inj_payload), .inj_ready (inj_ready),
    .inj_blocked (),
    .ej_valid (ej_valid), .ej_flit (ej_flit), .ej_ready (ej_ready),
    .drop (noc_drop)
  );

  // ---------------- local homing ----------------
  home_table #(.PG_PER_REGION(PG_PER_REGION), .NT(NT)) u_home (
    .clk (clk), .rst_n (rst_n),
    .secure_core_mask (secure_core_mask), .secure_region_mask (sec_reg),
    .lookup_addr (home_lookup_addr), .lookup_home (home_lookup_home),
    .lookup_hit (home_lookup_hit),
    .set_valid (home_set_valid), .set_idx (home_set_idx), .set_home (home_set_home),
    .set_err (home_set_err),
    .remap_start (remap_start), .moved_mask (moved), .new_secure_mask (newm),
    .remap_busy (remap_busy), .remap_done (remap_done),
    .unmap_valid (unmap_valid), .unmap_addr (unmap_addr), .unmap_home (unmap_home),
    .unmap_ack (unmap_ack)
  );

  // ---------------- memory controllers ----------------
  logic [NUM_MC-1:0] mc_sel, mc_ready, mc_viol;
  logic              sel_viol;

  mc_select u_msel (
    .req_valid (l2m_valid), .req (l2m_req),
    .secure_mc_mask (sec_mc), .secure_region_mask (sec_reg),
    .mc_onehot (mc_sel), .violation (sel_viol)
  );

  for (genvar m = 0; m < int'(NUM_MC); m++) begin : g_mc
    mc_queue #(.DEPTH(MCQ_DEPTH)) u_mcq (
      .clk (clk), .rst_n (rst_n),
      .owner_secure (sec_mc[m]), .secure_region_mask (sec_reg),
      .req_valid (mc_sel[m]), .req (l2m_req), .req_ready (mc_ready[m]),
      .violation (mc_viol[m]),
      .dram_valid (dram_valid[m]), .dram_req (dram_req[m]), .dram_ready (dram_ready[m]),
      .purge_req (purge_req[m]), .purging (mc_purging[m]), .purge_done (purge_done[m])
    );
  end

  assign l2m_ready     = sel_viol || |(mc_sel & mc_ready);
  assign l2m_violation = sel_viol || |mc_viol;

endmodule
