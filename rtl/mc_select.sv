// mc_select: steers a last-level-cache miss to a memory controller.
//
// Each DRAM region belongs to one cluster, and each cluster owns a fixed set
// of memory controllers (a bit mask, e.g. 0b0011 = MC0 and MC1 for the secure
// cluster, 0b1100 for the insecure one). A miss is served by the controllers
// of the cluster that owns the address's region, interleaved at cache-line
// granularity over the set bits of that cluster's mask: with k controllers,
// line number modulo k picks the k-th of them in ascending order. So a
// secure-cluster access to the insecure IPC buffer goes to an insecure
// controller, and an insecure cluster never reaches a secure controller: a
// request from the insecure cluster to a secure region is refused
// (valid_out low, violation high) as a second line of defence behind the core
// check. Line-granular interleaving is this design's choice; the partition
// by bit mask follows the evaluated configuration. Combinational.
module mc_select
  import ih_pkg::*;
(
  input  logic                   req_valid,
  input  mem_req_t               req,
  input  logic [NUM_MC-1:0]      secure_mc_mask,
  input  logic [NUM_REGIONS-1:0] secure_region_mask,
  output logic [NUM_MC-1:0]      mc_onehot,
  output logic                   violation
);

  logic                    owner_secure;
  logic [NUM_MC-1:0]       mask;
  logic [$clog2(NUM_MC+1)-1:0] cnt, k, seen;
  logic [7:0]              line_lo;

  assign owner_secure = secure_region_mask[region_of(req.addr)];
  assign mask         = owner_secure ? secure_mc_mask : ~secure_mc_mask;
  assign line_lo      = req.addr[OFF_W +: 8];
  assign violation    = req_valid && owner_secure && (req.cl == CL_INSECURE);

  always_comb begin
    cnt = '0;
    for (int m = 0; m < int'(NUM_MC); m++) cnt = cnt + mask[m];
    k = (cnt == '0) ? '0 : $bits(k)'(line_lo % 8'(cnt));
    seen      = '0;
    mc_onehot = '0;
    for (int m = 0; m < int'(NUM_MC); m++) begin
      if (mask[m]) begin
        if (seen == k && req_valid && !violation) mc_onehot[m] = 1'b1;
        seen = seen + 1'b1;
      end
    end
  end

endmodule
