// Self-checking testbench of mesh_noc (8 x 8). Phase 1 checks the
// uncontended latency (hops + 1 cycles from injection to ejection). Then
// random traffic runs under two cluster bindings: whole rows (32/32) and a
// split row (20 secure tiles), with random destinations, some IPC packets and
// random ejection back-pressure. Every packet must arrive once, unchanged, at
// its destination; a non-IPC packet must never reach the other cluster and is
// refused at the source when no contained route exists; IPC packets do cross.
module mesh_noc_tb;
  import ih_pkg::*;
  localparam int MX = 8, MY = 8, NT = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NT-1:0] mask, inj_valid, inj_ipc, inj_ready, inj_blocked, ej_valid, ej_ready, drop;
  logic [2:0] dx [NT];
  logic [2:0] dy [NT];
  logic [63:0] pl [NT];
  flit_t ej_flit [NT];

  mesh_noc dut (.clk, .rst_n, .secure_core_mask (mask), .inj_valid, .inj_dst_x (dx),
    .inj_dst_y (dy), .inj_ipc, .inj_payload (pl), .inj_ready, .inj_blocked,
    .ej_valid, .ej_flit, .ej_ready, .drop);

  int checks = 0, failures = 0;
  int n_sent = 0, n_recv = 0, n_block = 0, n_ipc_cross = 0, n_yx = 0;
  int expected_at [longint unsigned];   // payload -> destination tile
  int cyc = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int t = 0; t < NT; t++) if (ej_valid[t] && ej_ready[t]) begin
      longint unsigned k;
      k = ej_flit[t].payload;
      checks++;
      if (!expected_at.exists(k) || expected_at[k] != t) begin
        failures++; $display("FAIL packet %h at tile %0d", k, t);
      end else begin
        expected_at.delete(k);
        n_recv++;
        if (!ej_flit[t].ipc && mask[t] != (ej_flit[t].src_cl == CL_SECURE)) begin
          failures++; $display("FAIL non-IPC packet crossed into tile %0d", t);
        end
        if (ej_flit[t].ipc && mask[t] != (ej_flit[t].src_cl == CL_SECURE)) n_ipc_cross++;
        if (ej_flit[t].yx_first) n_yx++;
      end
    end
  end

  task automatic traffic(int cycles);
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      for (int t = 0; t < NT; t++) begin
        ej_ready[t] = ($urandom_range(0, 3) != 0);
        inj_valid[t] = ($urandom_range(0, 9) == 0);
        dx[t] = 3'($urandom); dy[t] = 3'($urandom);
        inj_ipc[t] = ($urandom_range(0, 9) == 0);
        pl[t] = {32'(t), 32'(n_sent + t * 100000 + c * 7)};
        pl[t] = {$urandom, $urandom};
      end
      #1;
      for (int t = 0; t < NT; t++) if (inj_valid[t] && inj_ready[t]) begin
        if (inj_blocked[t]) n_block++;
        else begin
          expected_at[pl[t]] = int'(dy[t]) * MX + int'(dx[t]);
          n_sent++;
        end
      end
    end
    @(negedge clk); inj_valid = '0; ej_ready = '1;
    repeat (200) @(negedge clk);
    checks++;
    if (expected_at.size() != 0) begin
      failures++; $display("FAIL %0d packets never arrived", expected_at.size());
      expected_at.delete();
    end
  endtask

  initial begin
    int lat;
    mask = {32'h0, 32'hFFFF_FFFF};
    inj_valid = '0; inj_ipc = '0; ej_ready = '1;
    for (int t = 0; t < NT; t++) begin dx[t] = 0; dy[t] = 0; pl[t] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    // latency from tile (0,0) to (5,3): 8 hops
    @(negedge clk);
    inj_valid[0] = 1; dx[0] = 5; dy[0] = 3; pl[0] = 64'h1234; inj_ipc[0] = 1;
    expected_at[64'h1234] = 3 * MX + 5;
    @(negedge clk); inj_valid[0] = 0; inj_ipc[0] = 0;
    lat = 1;
    while (!ej_valid[3*MX+5] && lat < 50) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 8 + 1) begin failures++; $display("FAIL latency %0d for 8 hops", lat); end
    @(negedge clk);
    traffic(3000);
    mask = '0; for (int i = 0; i < 20; i++) mask[i] = 1;
    traffic(3000);
    checks++;
    if (n_block == 0 || n_ipc_cross == 0 || n_yx == 0) begin
      failures++; $display("FAIL coverage block %0d ipc %0d yx %0d", n_block, n_ipc_cross, n_yx);
    end
    $display("delivered %0d, refused at source %0d, IPC crossings %0d, Y-X routed %0d",
             n_recv, n_block, n_ipc_cross, n_yx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
