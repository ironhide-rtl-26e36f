// cluster_config: the cluster binding register of the secure multicore.
//
// Holds one bit per tile saying whether the tile (core, private cache, shared
// cache slice and router) belongs to the secure cluster, plus the static
// partition of memory controllers and DRAM regions. At reset the chip comes up
// with the first half of the tiles (rows 0..MESH_Y/2-1, next to MC0 and MC1)
// secure and the rest insecure, and with MC0/MC1 and DRAM regions 0/1 secure:
// the same 32/32 split and MC0/MC1 "pos = 0b0011" assignment the design was
// evaluated with.
//
// Security rule enforced here: the core binding may change only once per
// interactive-application invocation. app_start (one cycle) opens a new
// invocation and re-arms the allowance; a cfg_valid request is then accepted
// once (cfg_accept, new mask visible the next cycle) and any further request
// in the same invocation is refused (cfg_reject). This bounds the scheduling
// leakage to one event per invocation. A mask of all zeros (single insecure
// cluster, for applications with no secure process) and a mask of all ones
// are both legal. The memory controller and region partitions are static
// parameters, because the controllers are statically partitioned between the
// clusters. Whether the allowance starts armed after reset is not specified;
// here reset counts as the start of an invocation.
module cluster_config
  import ih_pkg::*;
#(
  parameter int unsigned             NT                 = NUM_TILES,
  parameter logic [NUM_MC-1:0]       SECURE_MC_MASK     = 4'b0011,
  parameter logic [NUM_REGIONS-1:0]  SECURE_REGION_MASK = 4'b0011
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   app_start,
  input  logic                   cfg_valid,
  input  logic [NT-1:0]          cfg_core_mask,
  output logic                   cfg_accept,
  output logic                   cfg_reject,
  output logic                   reconfig_allowed,
  output logic [NT-1:0]          secure_core_mask,
  output logic [NUM_MC-1:0]      secure_mc_mask,
  output logic [NUM_REGIONS-1:0] secure_region_mask
);

  logic [NT-1:0] mask_q;
  logic          allowed_q;

  function automatic logic [NT-1:0] reset_mask();
    logic [NT-1:0] m;
    for (int i = 0; i < int'(NT); i++) m[i] = (i < int'(NT / 2));
    return m;
  endfunction

  always_comb begin
    cfg_accept = cfg_valid && allowed_q && !app_start;
    cfg_reject = cfg_valid && !cfg_accept;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mask_q    <= reset_mask();
      allowed_q <= 1'b1;
    end else begin
      if (app_start) allowed_q <= 1'b1;
      else if (cfg_accept) begin
        mask_q    <= cfg_core_mask;
        allowed_q <= 1'b0;
      end
    end
  end

  assign secure_core_mask   = mask_q;
  assign reconfig_allowed   = allowed_q;
  assign secure_mc_mask     = SECURE_MC_MASK;
  assign secure_region_mask = SECURE_REGION_MASK;

  // The two clusters must each own at least one memory controller.
  initial assert (SECURE_MC_MASK != '0 && SECURE_MC_MASK != '1)
    else $error("each cluster needs its own memory controller");

endmodule
