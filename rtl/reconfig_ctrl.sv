// reconfig_ctrl: sequencer for dynamic hardware isolation and for secure
// context switches.
//
// Re-allocation (req_valid with the new number of secure tiles R): the new
// secure cluster is tiles 0..R-1 in row-major order, i.e. whole rows from
// the MC0/MC1 edge plus, when R is not a multiple of the row length, part
// of one row (which the network then serves with Y-X routing). A request is
// refused (reject pulse) when the once-per-invocation allowance is used up.
// Otherwise the sequence is
//   1. STALL  : stall_all is raised; wait for cores_idle.
//   2. FLUSH  : flush_req pulses for every re-allocated tile (old mask XOR new
//               mask); all run concurrently; wait for every flush_done.
//   3. REHOME : remap_start to the home table, which unmaps and re-homes the
//               pages of the re-allocated tiles' shared-cache slices; wait
//               for remap_done.
//   4. COMMIT : the new mask is written to cluster_config; stall_all drops and
//               done pulses.
// Steps 2 and 3 are skipped when no tile changes cluster.
// Secure context switch (ctx_switch pulse, between mutually distrusting
// secure applications): stall, flush the private caches of all secure tiles
// and purge the secure memory controllers' queues concurrently, then resume
// (ctx_done). The step order follows the described re-allocation event; the
// row-major placement of the secure tiles and the handshakes are this
// design's own choices.
module reconfig_ctrl
  import ih_pkg::*;
#(
  parameter int unsigned NT = NUM_TILES,
  localparam int unsigned CW = $clog2(NT + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // commands
  input  logic              req_valid,
  input  logic [CW-1:0]     req_secure_cores,
  input  logic              ctx_switch,
  output logic              busy,
  output logic              done,
  output logic              ctx_done,
  output logic              reject,
  // cluster binding
  input  logic [NT-1:0]     cur_mask,
  input  logic              cfg_allowed,
  output logic              cfg_valid,
  output logic [NT-1:0]     cfg_mask,
  input  logic              cfg_accept,
  input  logic [NUM_MC-1:0] secure_mc_mask,
  // cores
  output logic              stall_all,
  input  logic              cores_idle,
  output logic [NT-1:0]     flush_req,
  input  logic [NT-1:0]     flush_done,
  // home table
  output logic              remap_start,
  output logic [NT-1:0]     moved_mask,
  output logic [NT-1:0]     new_mask,
  input  logic              remap_done,
  // memory controllers
  output logic [NUM_MC-1:0] mc_purge_req,
  input  logic [NUM_MC-1:0] mc_purge_done
);

  typedef enum logic [2:0] {S_IDLE, S_STALL, S_FLUSH, S_REHOME, S_COMMIT,
                            S_CTX_STALL, S_CTX_WAIT} state_e;

  state_e            state_q;
  logic [NT-1:0]     new_q, moved_q, fpend_q;
  logic [NUM_MC-1:0] mpend_q;
  logic [NT-1:0]     fpend_n;
  logic [NUM_MC-1:0] mpend_n;

  function automatic logic [NT-1:0] mask_of(input logic [CW-1:0] r);
    logic [NT-1:0] m;
    for (int i = 0; i < int'(NT); i++) m[i] = (i < int'(r));
    return m;
  endfunction

  assign busy       = (state_q != S_IDLE);
  assign stall_all  = busy;
  assign moved_mask = moved_q;
  assign new_mask   = new_q;
  assign cfg_mask   = new_q;
  assign cfg_valid  = (state_q == S_COMMIT);
  assign fpend_n    = fpend_q & ~flush_done;
  assign mpend_n    = mpend_q & ~mc_purge_done;
  assign reject     = (state_q == S_IDLE && req_valid && !cfg_allowed) ||
                      (cfg_valid && !cfg_accept);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      new_q        <= '0;
      moved_q      <= '0;
      fpend_q      <= '0;
      mpend_q      <= '0;
      flush_req    <= '0;
      mc_purge_req <= '0;
      remap_start  <= 1'b0;
      done         <= 1'b0;
      ctx_done     <= 1'b0;
    end else begin
      flush_req    <= '0;
      mc_purge_req <= '0;
      remap_start  <= 1'b0;
      done         <= 1'b0;
      ctx_done     <= 1'b0;
      case (state_q)
        S_IDLE: begin
          if (req_valid && cfg_allowed) begin
            new_q   <= mask_of(req_secure_cores);
            moved_q <= mask_of(req_secure_cores) ^ cur_mask;
            state_q <= S_STALL;
          end else if (ctx_switch) state_q <= S_CTX_STALL;
        end
        S_STALL: if (cores_idle) begin
          if (moved_q != '0) begin
            flush_req <= moved_q;
            fpend_q   <= moved_q;
            state_q   <= S_FLUSH;
          end else state_q <= S_COMMIT;
        end
        S_FLUSH: begin
          fpend_q <= fpend_n;
          if (fpend_n == '0) begin
            remap_start <= 1'b1;
            state_q     <= S_REHOME;
          end
        end
        S_REHOME: if (remap_done) state_q <= S_COMMIT;
        S_COMMIT: begin
          done    <= cfg_accept;
          state_q <= S_IDLE;
        end
        S_CTX_STALL: if (cores_idle) begin
          flush_req    <= cur_mask;
          fpend_q      <= cur_mask;
          mc_purge_req <= secure_mc_mask;
          mpend_q      <= secure_mc_mask;
          state_q      <= S_CTX_WAIT;
        end
        S_CTX_WAIT: begin
          fpend_q <= fpend_n;
          mpend_q <= mpend_n;
          if (fpend_n == '0 && mpend_n == '0) begin
            ctx_done <= 1'b1;
            state_q  <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_count: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid |-> int'(req_secure_cores) <= int'(NT));

endmodule
