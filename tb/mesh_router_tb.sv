// Self-checking testbench of mesh_router at position (3,3). Random
// single-flit packets with random X-Y/Y-X order, IPC flag and source cluster
// enter on random ports while the outputs' ready signals toggle randomly.
// Checks: every kept flit leaves exactly once, on the port the dimension-order
// rule gives (computed here), in order per input/output pair; foreign non-IPC
// flits from neighbours are dropped and counted; a flit crosses the router in
// one cycle when uncontended.
module mesh_router_tb;
  import ih_pkg::*;
  localparam int RX = 3, RY = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t in_flit [NPORTS];
  flit_t out_flit [NPORTS];
  logic [NPORTS-1:0] in_valid, in_ready, out_valid, out_ready;
  logic drop_pulse;
  logic my_secure = 1'b1;

  mesh_router #(.MY_X(RX), .MY_Y(RY)) dut (.clk, .rst_n, .my_secure, .in_flit,
    .in_valid, .in_ready, .out_flit, .out_valid, .out_ready, .drop_pulse);

  int checks = 0, failures = 0, drops_exp = 0, drops_seen = 0, sent = 0, recv = 0;
  logic [63:0] expq [NPORTS][NPORTS][$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int ref_port(flit_t f);
    if (f.dst_x == RX && f.dst_y == RY) return P_LOCAL;
    if (!f.yx_first) begin
      if (f.dst_x != RX) return (f.dst_x > RX) ? P_EAST : P_WEST;
      return (f.dst_y > RY) ? P_SOUTH : P_NORTH;
    end
    if (f.dst_y != RY) return (f.dst_y > RY) ? P_SOUTH : P_NORTH;
    return (f.dst_x > RX) ? P_EAST : P_WEST;
  endfunction

  // output monitor
  always @(posedge clk) if (rst_n) begin
    if (drop_pulse) drops_seen++;
    for (int o = 0; o < NPORTS; o++) if (out_valid[o]) begin
      bit found;
      found = 0;
      checks++;
      for (int i = 0; i < NPORTS; i++)
        if (!found && expq[i][o].size() > 0 && expq[i][o][0] == out_flit[o].payload) begin
          void'(expq[i][o].pop_front());
          found = 1;
        end
      if (!found) begin
        failures++;
        $display("FAIL unexpected flit %h on port %0d", out_flit[o].payload, o);
      end
      recv++;
    end
  end

  initial begin
    int lat;
    in_valid = '0; out_ready = '1;
    for (int p = 0; p < NPORTS; p++) in_flit[p] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // latency: one flit from west to east, uncontended
    @(negedge clk);
    in_flit[P_WEST] = '0;
    in_flit[P_WEST].dst_x = 6; in_flit[P_WEST].dst_y = 3;
    in_flit[P_WEST].src_cl = CL_SECURE; in_flit[P_WEST].payload = 64'hABCD;
    expq[P_WEST][P_EAST].push_back(64'hABCD);
    in_valid[P_WEST] = 1;
    @(negedge clk); in_valid = '0;
    lat = 0;
    while (!out_valid[P_EAST] && lat < 10) begin #1; if (out_valid[P_EAST]) break; @(negedge clk); lat++; end
    checks++;
    if (lat != 0) begin failures++; $display("FAIL latency %0d extra cycles", lat); end
    @(negedge clk);
    // random traffic
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      out_ready = NPORTS'($urandom);
      for (int p = 0; p < NPORTS; p++) begin
        flit_t f;
        f = '0;
        f.dst_x = 3'($urandom); f.dst_y = 3'($urandom);
        f.yx_first = $urandom_range(0, 1);
        f.ipc = ($urandom_range(0, 7) == 0);
        f.src_cl = ($urandom_range(0, 5) == 0) ? CL_INSECURE : CL_SECURE;
        if (p == P_LOCAL) f.src_cl = CL_SECURE;
        f.payload = {32'(p), 32'(cyc)};
        in_flit[p] = f;
        in_valid[p] = ($urandom_range(0, 2) == 0);
      end
      #1;
      begin
        bit any_drop;
        any_drop = 0;
        for (int p = 0; p < NPORTS; p++)
          if (in_valid[p] && in_ready[p] && p != P_LOCAL && !in_flit[p].ipc &&
              in_flit[p].src_cl == CL_INSECURE) any_drop = 1;
        if (any_drop) drops_exp++;   // drop_pulse is one bit per cycle
      end
      for (int p = 0; p < NPORTS; p++) if (in_valid[p] && in_ready[p]) begin
        sent++;
        if (p != P_LOCAL && !in_flit[p].ipc && in_flit[p].src_cl == CL_INSECURE) ;
        else expq[p][ref_port(in_flit[p])].push_back(in_flit[p].payload);
      end
    end
    @(negedge clk); in_valid = '0; out_ready = '1;
    repeat (30) @(negedge clk);
    for (int i = 0; i < NPORTS; i++) for (int o = 0; o < NPORTS; o++) begin
      checks++;
      if (expq[i][o].size() != 0) begin
        failures++; $display("FAIL %0d flits lost from %0d to %0d", expq[i][o].size(), i, o);
      end
    end
    checks++;
    if (drops_exp == 0 || drops_exp != drops_seen) begin
      failures++; $display("FAIL drops expected %0d seen %0d", drops_exp, drops_seen);
    end
    $display("sent %0d received %0d dropped %0d", sent, recv, drops_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
