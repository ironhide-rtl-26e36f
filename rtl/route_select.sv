// route_select: chooses the dimension order of a packet at injection so that
// its path stays inside the sending tile's cluster.
//
// The network routes deterministically, X-Y (first along the row, then along
// the column) or Y-X. With whole rows per cluster X-Y never leaves a cluster;
// when a row is split between the clusters the Y-X order reaches the target
// row first and so stays inside. This block walks both candidate paths over
// the cluster map and reports which one is contained. X-Y is preferred (the
// network's native order); Y-X is used when only it is contained; when neither
// is, X-Y is returned with contained = 0 and the routers' cluster guard will
// drop the packet unless it is interaction (IPC) traffic. The containment walk
// and this preference are this design's own choice: the paper only states
// that both orders are supported. Purely combinational.
module route_select
  import ih_pkg::*;
#(
  parameter int unsigned MX = MESH_X,
  parameter int unsigned MY = MESH_Y
) (
  input  logic [MX*MY-1:0]       secure_core_mask,
  input  logic [$clog2(MX)-1:0]  src_x,
  input  logic [$clog2(MY)-1:0]  src_y,
  input  logic [$clog2(MX)-1:0]  dst_x,
  input  logic [$clog2(MY)-1:0]  dst_y,
  output logic                   yx_first,
  output logic                   contained
);

  logic xy_ok, yx_ok, src_sec;

  always_comb begin
    int sx, sy, dx, dy;
    sx = int'(src_x); sy = int'(src_y); dx = int'(dst_x); dy = int'(dst_y);
    src_sec = secure_core_mask[sy*int'(MX) + sx];
    xy_ok = 1'b1;
    yx_ok = 1'b1;
    for (int x = 0; x < int'(MX); x++) begin
      if ((x >= sx && x <= dx) || (x <= sx && x >= dx)) begin
        // X-Y walks row sy first; Y-X walks row dy last.
        if (secure_core_mask[sy*int'(MX) + x] != src_sec) xy_ok = 1'b0;
        if (secure_core_mask[dy*int'(MX) + x] != src_sec) yx_ok = 1'b0;
      end
    end
    for (int y = 0; y < int'(MY); y++) begin
      if ((y >= sy && y <= dy) || (y <= sy && y >= dy)) begin
        // X-Y walks column dx last; Y-X walks column sx first.
        if (secure_core_mask[y*int'(MX) + dx] != src_sec) xy_ok = 1'b0;
        if (secure_core_mask[y*int'(MX) + sx] != src_sec) yx_ok = 1'b0;
      end
    end
    yx_first  = !xy_ok && yx_ok;
    contained = xy_ok || yx_ok;
  end

endmodule
