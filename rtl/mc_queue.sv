// mc_queue: request queue of one memory controller, owned by one cluster.
//
// Line-granular read and write requests wait here in order before being
// issued to the DRAM channel (dram_valid/dram_ready). The controller belongs
// statically to one cluster (owner_secure) and serves only the DRAM regions
// of that cluster; a request for another region is refused and raises
// violation for one cycle.
//
// Purge: because the queue is shared state whose occupancy and timing an
// attacker could observe, the queues of the secure cluster's controllers are
// purged at each secure-process context switch. A purge_req pulse stops the
// queue from accepting new requests, every queued request (including
// buffered write data) is written out to DRAM, and purge_done pulses in the
// cycle after the queue becomes empty. Depth and the in-order drain are this
// design's choices.
module mc_queue
  import ih_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   owner_secure,
  input  logic [NUM_REGIONS-1:0] secure_region_mask,
  input  logic                   req_valid,
  input  mem_req_t               req,
  output logic                   req_ready,
  output logic                   violation,
  output logic                   dram_valid,
  output mem_req_t               dram_req,
  input  logic                   dram_ready,
  input  logic                   purge_req,
  output logic                   purging,
  output logic                   purge_done
);

  localparam int unsigned PW = $clog2(DEPTH);

  mem_req_t        q [DEPTH];
  logic [PW-1:0]   rd_q, wr_q;
  logic [PW:0]     cnt_q;
  logic            purging_q;
  logic            push, pop, ok_region;

  assign ok_region  = (secure_region_mask[region_of(req.addr)] == owner_secure);
  assign req_ready  = !purging_q && (int'(cnt_q) < int'(DEPTH));
  assign violation  = req_valid && req_ready && !ok_region;
  assign push       = req_valid && req_ready && ok_region;
  assign dram_valid = (cnt_q != '0);
  assign dram_req   = q[rd_q];
  assign pop        = dram_valid && dram_ready;
  assign purging    = purging_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
      purging_q  <= 1'b0;
      purge_done <= 1'b0;
    end else begin
      if (push) begin
        q[wr_q] <= req;
        wr_q    <= wr_q + 1'b1;
      end
      if (pop) rd_q <= rd_q + 1'b1;
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
      purge_done <= 1'b0;
      if (purge_req) purging_q <= 1'b1;
      else if (purging_q && cnt_q == '0) begin
        purging_q  <= 1'b0;
        purge_done <= 1'b1;
      end
    end
  end

  initial assert (DEPTH == 2 ** PW) else $error("DEPTH must be a power of two");

endmodule
