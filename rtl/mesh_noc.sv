// mesh_noc: the cluster-isolated 2-D mesh network of MX x MY tiles.
//
// Each tile has an injection port (destination, IPC flag, payload) and an
// ejection port. At injection the network fills in the source coordinates
// and the sender's cluster and, through route_select, picks X-Y or Y-X order
// so that the packet stays within its cluster; a non-IPC packet for which
// neither order is contained is refused at the source (inj_blocked, counted
// as a drop) rather than sent. Every router also drops foreign non-IPC
// packets (mesh_router's guard), so a cluster boundary is enforced twice.
// Links at the mesh edge are tied off. Interfaces use valid/ready; inj_ready
// reflects the local input buffer's space. The cluster map comes from
// cluster_config and may change only while the network is idle (the
// reconfiguration sequence stalls all cores first).
module mesh_noc
  import ih_pkg::*;
#(
  parameter int unsigned MX = MESH_X,
  parameter int unsigned MY = MESH_Y,
  localparam int unsigned NT = MX * MY,
  localparam int unsigned LXW = $clog2(MX),
  localparam int unsigned LYW = $clog2(MY)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NT-1:0]     secure_core_mask,
  // injection, one per tile
  input  logic [NT-1:0]     inj_valid,
  input  logic [LXW-1:0]    inj_dst_x   [NT],
  input  logic [LYW-1:0]    inj_dst_y   [NT],
  input  logic [NT-1:0]     inj_ipc,
  input  logic [WORD_W-1:0] inj_payload [NT],
  output logic [NT-1:0]     inj_ready,
  output logic [NT-1:0]     inj_blocked,
  // ejection, one per tile
  output logic [NT-1:0]     ej_valid,
  output flit_t             ej_flit [NT],
  input  logic [NT-1:0]     ej_ready,
  // one pulse per tile per cycle in which its router dropped a foreign packet
  output logic [NT-1:0]     drop
);

  flit_t             rin  [NT][NPORTS];
  logic [NPORTS-1:0] rin_v  [NT];
  logic [NPORTS-1:0] rin_r  [NT];
  flit_t             rout [NT][NPORTS];
  logic [NPORTS-1:0] rout_v [NT];
  logic [NPORTS-1:0] rout_r [NT];
  logic [NT-1:0]     rdrop;

  for (genvar y = 0; y < int'(MY); y++) begin : g_row
    for (genvar x = 0; x < int'(MX); x++) begin : g_col
      localparam int T = y * int'(MX) + x;
      logic yx, ok;

      route_select #(.MX(MX), .MY(MY)) u_rs (
        .secure_core_mask (secure_core_mask),
        .src_x (LXW'(x)), .src_y (LYW'(y)),
        .dst_x (inj_dst_x[T]), .dst_y (inj_dst_y[T]),
        .yx_first (yx), .contained (ok)
      );

      always_comb begin
        flit_t f;
        f.dst_x    = inj_dst_x[T];
        f.dst_y    = inj_dst_y[T];
        f.src_x    = LXW'(x);
        f.src_y    = LYW'(y);
        f.yx_first = yx;
        f.ipc      = inj_ipc[T];
        f.src_cl   = secure_core_mask[T] ? CL_SECURE : CL_INSECURE;
        f.payload  = inj_payload[T];
        rin[T][P_LOCAL]   = f;
        inj_blocked[T]    = inj_valid[T] && !ok && !inj_ipc[T];
        rin_v[T][P_LOCAL] = inj_valid[T] && !inj_blocked[T];
        inj_ready[T]      = rin_r[T][P_LOCAL] || inj_blocked[T];
        ej_valid[T]       = rout_v[T][P_LOCAL];
        ej_flit[T]        = rout[T][P_LOCAL];
        rout_r[T][P_LOCAL] = ej_ready[T];
      end

      // North neighbour (row y-1): our north input is its south output.
      if (y > 0) begin : g_n
        assign rin[T][P_NORTH]   = rout[T-int'(MX)][P_SOUTH];
        assign rin_v[T][P_NORTH] = rout_v[T-int'(MX)][P_SOUTH];
        assign rout_r[T][P_NORTH] = rin_r[T-int'(MX)][P_SOUTH];
      end else begin : g_n0
        assign rin[T][P_NORTH]   = '0;
        assign rin_v[T][P_NORTH] = 1'b0;
        assign rout_r[T][P_NORTH] = 1'b1;
      end
      if (y < int'(MY) - 1) begin : g_s
        assign rin[T][P_SOUTH]   = rout[T+int'(MX)][P_NORTH];
        assign rin_v[T][P_SOUTH] = rout_v[T+int'(MX)][P_NORTH];
        assign rout_r[T][P_SOUTH] = rin_r[T+int'(MX)][P_NORTH];
      end else begin : g_s0
        assign rin[T][P_SOUTH]   = '0;
        assign rin_v[T][P_SOUTH] = 1'b0;
        assign rout_r[T][P_SOUTH] = 1'b1;
      end
      if (x < int'(MX) - 1) begin : g_e
        assign rin[T][P_EAST]   = rout[T+1][P_WEST];
        assign rin_v[T][P_EAST] = rout_v[T+1][P_WEST];
        assign rout_r[T][P_EAST] = rin_r[T+1][P_WEST];
      end else begin : g_e0
        assign rin[T][P_EAST]   = '0;
        assign rin_v[T][P_EAST] = 1'b0;
        assign rout_r[T][P_EAST] = 1'b1;
      end
      if (x > 0) begin : g_w
        assign rin[T][P_WEST]   = rout[T-1][P_EAST];
        assign rin_v[T][P_WEST] = rout_v[T-1][P_EAST];
        assign rout_r[T][P_WEST] = rin_r[T-1][P_EAST];
      end else begin : g_w0
        assign rin[T][P_WEST]   = '0;
        assign rin_v[T][P_WEST] = 1'b0;
        assign rout_r[T][P_WEST] = 1'b1;
      end

      mesh_router #(.MY_X(x), .MY_Y(y)) u_router (
        .clk (clk), .rst_n (rst_n),
        .my_secure (secure_core_mask[T]),
        .in_flit (rin[T]), .in_valid (rin_v[T]), .in_ready (rin_r[T]),
        .out_flit (rout[T]), .out_valid (rout_v[T]), .out_ready (rout_r[T]),
        .drop_pulse (rdrop[T])
      );
    end
  end

  assign drop = rdrop | inj_blocked;

endmodule
