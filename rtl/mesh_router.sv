// mesh_router: one router of the cluster-isolated 2-D mesh network.
//
// Five ports (local, north, south, east, west), single-flit packets, a
// FIFO_DEPTH-entry buffer per input and round-robin arbitration per output.
// Routing is deterministic dimension order, per packet: X-Y (correct X first,
// then Y) or Y-X, as chosen by the sender (flit.yx_first). North is towards
// row 0, so a packet whose destination row is larger leaves south.
//
// Cluster guard: the router knows which cluster its tile belongs to
// (my_secure). A packet arriving from a neighbour that was sent by the other
// cluster is dropped at the input, unless it is marked as interaction (IPC)
// traffic, and drop_pulse is raised for one cycle. So ordinary request and
// data packets of one cluster can never occupy, or be observed in, a router
// of the other cluster.
//
// Link protocol: a sender drives out_valid only in a cycle in which
// out_ready is high, and a flit moves in every cycle in which out_valid is
// high. in_ready depends only on the input buffer's registered occupancy, so
// chaining routers creates no combinational loop. Latency: one cycle per hop
// when uncontended (buffer write, then forward from the buffer head).
// Buffer depth, arbitration and link protocol are this design's choices.
module mesh_router
  import ih_pkg::*;
#(
  parameter int unsigned MY_X       = 0,
  parameter int unsigned MY_Y       = 0,
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                my_secure,
  input  flit_t               in_flit  [NPORTS],
  input  logic [NPORTS-1:0]   in_valid,
  output logic [NPORTS-1:0]   in_ready,
  output flit_t               out_flit [NPORTS],
  output logic [NPORTS-1:0]   out_valid,
  input  logic [NPORTS-1:0]   out_ready,
  output logic                drop_pulse
);

  localparam int unsigned PW = $clog2(FIFO_DEPTH);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  flit_t        buf_q [NPORTS][FIFO_DEPTH];
  logic [PW-1:0] rd_q [NPORTS];
  logic [PW-1:0] wr_q [NPORTS];
  logic [CW-1:0] cnt_q [NPORTS];

  logic [NPORTS-1:0] keep;           // accepted into the buffer
  logic [NPORTS-1:0] pop;
  logic [NPORTS-1:0] head_valid;
  port_e             want [NPORTS];
  logic [2:0]        rr_q [NPORTS];  // round-robin pointer per output
  logic [2:0]        grant_in [NPORTS];
  logic [NPORTS-1:0] grant_any;

  function automatic port_e route(input flit_t f);
    logic x_done, y_done;
    x_done = (int'(f.dst_x) == int'(MY_X));
    y_done = (int'(f.dst_y) == int'(MY_Y));
    if (x_done && y_done) return P_LOCAL;
    if (!f.yx_first) begin
      if (!x_done) return (int'(f.dst_x) > int'(MY_X)) ? P_EAST : P_WEST;
      return (int'(f.dst_y) > int'(MY_Y)) ? P_SOUTH : P_NORTH;
    end
    if (!y_done) return (int'(f.dst_y) > int'(MY_Y)) ? P_SOUTH : P_NORTH;
    return (int'(f.dst_x) > int'(MY_X)) ? P_EAST : P_WEST;
  endfunction

  // Input side: buffer space, guard and head routing (kept apart so that the
  // ready path depends on registered state only).
  always_comb begin
    for (int p = 0; p < int'(NPORTS); p++) in_ready[p] = (int'(cnt_q[p]) < int'(FIFO_DEPTH));
  end

  always_comb begin
    for (int p = 0; p < int'(NPORTS); p++) begin
      head_valid[p] = (cnt_q[p] != '0);
      want[p]       = route(buf_q[p][rd_q[p]]);
    end
  end

  always_comb begin
    drop_pulse = 1'b0;
    for (int p = 0; p < int'(NPORTS); p++) begin
      keep[p] = in_valid[p] && in_ready[p];
      if (p != int'(P_LOCAL) && keep[p] && !in_flit[p].ipc &&
          (in_flit[p].src_cl == CL_SECURE) != my_secure) begin
        keep[p]    = 1'b0;
        drop_pulse = 1'b1;
      end
    end
  end

  // Output side: round-robin arbitration among the buffer heads.
  always_comb begin
    int i;
    i   = 0;
    pop = '0;
    for (int o = 0; o < int'(NPORTS); o++) begin
      grant_any[o] = 1'b0;
      grant_in[o]  = '0;
      for (int k = 0; k < int'(NPORTS); k++) begin
        i = (int'(rr_q[o]) + k) % int'(NPORTS);
        if (!grant_any[o] && head_valid[i] && want[i] == port_e'(o) && out_ready[o]) begin
          grant_any[o] = 1'b1;
          grant_in[o]  = 3'(i);
        end
      end
      out_valid[o] = grant_any[o];
      out_flit[o]  = buf_q[grant_in[o]][rd_q[grant_in[o]]];
      if (grant_any[o]) pop[grant_in[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < int'(NPORTS); p++) begin
        rd_q[p]  <= '0;
        wr_q[p]  <= '0;
        cnt_q[p] <= '0;
        rr_q[p]  <= '0;
        for (int d = 0; d < int'(FIFO_DEPTH); d++) buf_q[p][d] <= '0;
      end
    end else begin
      for (int p = 0; p < int'(NPORTS); p++) begin
        if (keep[p]) begin
          buf_q[p][wr_q[p]] <= in_flit[p];
          wr_q[p] <= (int'(wr_q[p]) == int'(FIFO_DEPTH) - 1) ? '0 : wr_q[p] + 1'b1;
        end
        if (pop[p])
          rd_q[p] <= (int'(rd_q[p]) == int'(FIFO_DEPTH) - 1) ? '0 : rd_q[p] + 1'b1;
        cnt_q[p] <= cnt_q[p] + CW'(keep[p]) - CW'(pop[p]);
        if (grant_any[p])
          rr_q[p] <= (int'(grant_in[p]) == int'(NPORTS) - 1) ? '0 : grant_in[p] + 1'b1;
      end
    end
  end

  // A flit is only offered where the receiver has room.
  for (genvar o = 0; o < int'(NPORTS); o++) begin : g_chk
    a_room: assert property (@(posedge clk) disable iff (!rst_n) out_valid[o] |-> out_ready[o]);
  end

endmodule
