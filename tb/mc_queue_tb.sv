// Self-checking testbench of mc_queue (owner: secure cluster, regions 0/1).
// Random requests and DRAM back-pressure: accepted requests must leave in
// order and unchanged, requests for the other cluster's regions are refused
// with a violation, the queue reports full at DEPTH entries, and a purge
// stops intake, drains everything and pulses purge_done exactly once, right
// after the queue empties.
module mc_queue_tb;
  import ih_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, dram_ready = 0, purge_req = 0;
  mem_req_t req, dram_req;
  logic req_ready, viol, dram_valid, purging, purge_done;

  mc_queue #(.DEPTH(D)) dut (.clk, .rst_n, .owner_secure (1'b1), .secure_region_mask (4'b0011),
    .req_valid, .req, .req_ready, .violation (viol), .dram_valid, .dram_req, .dram_ready,
    .purge_req, .purging, .purge_done);

  int checks = 0, failures = 0, n_viol = 0, n_full = 0;
  mem_req_t q [$];

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && dram_valid && dram_ready) begin
    checks++;
    if (q.size() == 0 || dram_req != q[0]) begin failures++; $display("FAIL order/data"); end
    else void'(q.pop_front());
  end

  task automatic drive(int cycles, int p_ready);
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      dram_ready = ($urandom_range(0, 99) < p_ready);
      req_valid = $urandom_range(0, 1);
      req.addr = {1'b0, $urandom_range(0, 1) ? 1'b1 : 1'b0, 38'($urandom)};
      if ($urandom_range(0, 5) == 0) req.addr[39] = 1'b1;    // insecure region
      req.we = $urandom_range(0, 1);
      req.wdata = {16{$urandom}};
      req.cl = CL_SECURE;
      #1;
      if (req_valid && req_ready) begin
        if (req.addr[39]) begin
          checks++; if (!viol) begin failures++; $display("FAIL foreign region accepted"); end
          n_viol++;
        end else begin
          checks++; if (viol) begin failures++; $display("FAIL own region refused"); end
          q.push_back(req);
        end
      end
      if (!req_ready && !purging) begin
        checks++;
        if (q.size() != D) begin failures++; $display("FAIL not ready with %0d queued", q.size()); end
        n_full++;
      end
    end
    @(negedge clk); req_valid = 0;
  endtask

  initial begin
    int w;
    req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    drive(2000, 70);
    drive(300, 10);                          // back-pressure: fill up
    // purge with a full queue
    @(negedge clk); purge_req = 1; @(negedge clk); purge_req = 0;
    #1 checks++; if (!purging || req_ready) begin failures++; $display("FAIL purge not blocking intake"); end
    w = 0;
    while (!purge_done && w < 1000) begin
      @(negedge clk); dram_ready = $urandom_range(0, 1); req_valid = 1; #1;
      checks++; if (req_ready && !purge_done) begin failures++; $display("FAIL accepted during purge"); end
      w++;
    end
    req_valid = 0;
    checks++;
    if (!purge_done || q.size() != 0 || dram_valid) begin
      failures++; $display("FAIL purge did not drain (%0d left)", q.size());
    end
    @(negedge clk); #1;
    checks++; if (purge_done || purging || !req_ready) begin failures++; $display("FAIL purge end"); end
    drive(200, 80);
    dram_ready = 1; repeat (40) @(negedge clk);
    checks++;
    if (q.size() != 0 || n_viol == 0 || n_full == 0) begin failures++; $display("FAIL end/coverage"); end
    $display("violations %0d full cycles %0d", n_viol, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
