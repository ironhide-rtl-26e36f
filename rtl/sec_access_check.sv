// sec_access_check: per-core hardware check that keeps the insecure cluster
// out of the secure cluster's DRAM regions, including on speculative paths.
//
// Every memory request a core issues passes through this block before it
// reaches the private cache. A request from a core of the insecure cluster
// whose physical address lies in a DRAM region owned by the secure cluster is
// never forwarded:
//   * if it was issued on an unresolved (speculative) path, the block holds it
//     and stalls the core (req_ready low, stalled high) until the core reports
//     resolution on resolve_valid. A squashed request is then discarded
//     quietly (squash_pulse); a request that turns out to be on the committed
//     path is discarded and an exception is raised (exc_pulse).
//   * if it was already non-speculative, it is discarded with an exception at
//     once.
// No other request is delayed: it is passed through combinationally
// (fwd_valid = req_valid, req_ready = fwd_ready). Cores of the secure cluster
// may reach insecure regions, which is how they use the shared IPC buffer.
// The check itself follows the described mechanism; the valid/ready handshake,
// the resolve interface and the region decoding (top address bits) are this
// design's own choices.
module sec_access_check
  import ih_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   core_secure,
  input  logic [NUM_REGIONS-1:0] secure_region_mask,
  // from the core
  input  logic                   req_valid,
  input  core_req_t              req,
  output logic                   req_ready,
  input  logic                   resolve_valid,
  input  logic                   resolve_squash,
  // to the private cache
  output logic                   fwd_valid,
  output core_req_t              fwd_req,
  input  logic                   fwd_ready,
  // status
  output logic                   stalled,
  output logic                   exc_pulse,
  output logic                   squash_pulse
);

  typedef enum logic {S_PASS, S_HOLD} state_e;
  state_e state_q;
  logic   violates;

  assign violates = !core_secure && secure_region_mask[region_of(req.addr)];
  assign fwd_req  = req;
  assign stalled  = (state_q == S_HOLD);

  always_comb begin
    fwd_valid    = 1'b0;
    req_ready    = 1'b0;
    exc_pulse    = 1'b0;
    squash_pulse = 1'b0;
    if (state_q == S_PASS) begin
      if (violates) begin
        req_ready = 1'b1;                      // taken off the core's port
        exc_pulse = req_valid && !req.spec;    // committed: discard, trap
      end else begin
        fwd_valid = req_valid;
        req_ready = fwd_ready;
      end
    end else if (resolve_valid) begin
      squash_pulse = resolve_squash;
      exc_pulse    = !resolve_squash;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state_q <= S_PASS;
    else case (state_q)
      S_PASS: if (req_valid && violates && req.spec) state_q <= S_HOLD;
      S_HOLD: if (resolve_valid) state_q <= S_PASS;
      default: state_q <= S_PASS;
    endcase
  end

  // An insecure core's request to a secure region never reaches the cache.
  a_no_leak: assert property (@(posedge clk) disable iff (!rst_n)
    fwd_valid |-> !(!core_secure && secure_region_mask[region_of(fwd_req.addr)]));

endmodule
