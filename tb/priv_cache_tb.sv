// Self-checking testbench of priv_cache (32 KB, direct-mapped). A memory
// model answers line refills after a random delay and absorbs write-backs.
// Random word reads/writes over a few conflicting tags are checked against a
// shadow copy of memory; hit latency (2 cycles from acceptance) is checked.
// After a flush-and-invalidate, the memory model must hold every written
// word, exactly the dirty lines must have been written back, and every line
// must miss afterwards (nothing of the previous owner is left in the cache).
module priv_cache_tb;
  import ih_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, mem_req_ready = 1, mem_resp_valid = 0, flush_req = 0;
  core_req_t req;
  logic req_ready, resp_valid, mem_req_valid, flush_busy, flush_done;
  logic [63:0] resp_rdata;
  mem_req_t mem_req;
  logic [511:0] mem_resp_data;

  priv_cache dut (.clk, .rst_n, .core_secure (1'b1), .req_valid, .req, .req_ready,
    .resp_valid, .resp_rdata, .mem_req_valid, .mem_req, .mem_req_ready,
    .mem_resp_valid, .mem_resp_data, .flush_req, .flush_busy, .flush_done);

  int checks = 0, failures = 0;
  logic [63:0] shadow [logic [39:0]];     // word address -> value
  logic [63:0] memw   [logic [39:0]];     // what the memory model holds
  int n_fill = 0, n_wb = 0, n_hit_lat = 0;
  logic [39:0] pend_addr;
  bit pend = 0;
  int delay = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [63:0] mem_word(logic [39:0] a);
    if (memw.exists(a)) return memw[a];
    return {24'h0, a};          // untouched memory holds its own address
  endfunction
  function automatic logic [63:0] exp_word(logic [39:0] a);
    if (shadow.exists(a)) return shadow[a];
    return {24'h0, a};
  endfunction

  // memory model
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    mem_req_ready  <= $urandom_range(0, 3) != 0;
    if (rst_n && mem_req_valid && mem_req_ready) begin
      if (mem_req.we) begin
        n_wb++;
        for (int w = 0; w < 8; w++) memw[mem_req.addr + 40'(8*w)] = mem_req.wdata[64*w +: 64];
      end else begin
        n_fill++;
        pend <= 1; pend_addr <= mem_req.addr; delay <= $urandom_range(1, 5);
      end
    end
    if (pend) begin
      if (delay == 0) begin
        pend <= 0;
        mem_resp_valid <= 1'b1;
        for (int w = 0; w < 8; w++) mem_resp_data[64*w +: 64] <= mem_word(pend_addr + 40'(8*w));
      end else delay <= delay - 1;
    end
  end

  task automatic access(logic [39:0] a, bit we, logic [63:0] d, output int lat);
    @(negedge clk);
    req.addr = a; req.we = we; req.wdata = d; req.spec = 0; req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(negedge clk); lat++; end
    checks++;
    if (resp_rdata != exp_word(a)) begin
      failures++; $display("FAIL data at %h: %h exp %h", a, resp_rdata, exp_word(a));
    end
    if (we) shadow[a] = d;
  endtask

  function automatic logic [39:0] rnd_addr();
    return {2'b00, 18'($urandom_range(0, 3)), 9'($urandom_range(0, 63)), 3'($urandom), 3'b000};
  endfunction

  initial begin
    int lat, fills0, wb0, dirty_lines;
    req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      logic [39:0] a;
      a = rnd_addr();
      access(a, $urandom_range(0, 1), {$urandom, $urandom}, lat);
      // immediate re-read of the same word must hit in 2 cycles
      if (k % 10 == 0) begin
        access(a, 0, '0, lat);
        checks++;
        if (lat != 2) begin failures++; $display("FAIL hit latency %0d", lat); end
        n_hit_lat++;
      end
    end
    // flush-and-invalidate
    dirty_lines = 0;
    for (int s = 0; s < 512; s++) if (dut.valid_q[s] && dut.dirty_q[s]) dirty_lines++;
    wb0 = n_wb;
    @(negedge clk); flush_req = 1; @(negedge clk); flush_req = 0;
    while (!flush_done) @(negedge clk);
    checks++;
    if (n_wb - wb0 != dirty_lines) begin
      failures++; $display("FAIL %0d write-backs for %0d dirty lines", n_wb - wb0, dirty_lines);
    end
    foreach (shadow[a]) begin
      checks++;
      if (mem_word(a) != shadow[a]) begin failures++; $display("FAIL memory stale at %h", a); end
    end
    // every line misses now
    fills0 = n_fill;
    for (int k = 0; k < 100; k++) begin
      logic [39:0] a;
      a = {2'b00, 18'd0, 9'(k), 3'd0, 3'b000};
      access(a, 0, '0, lat);
    end
    checks++;
    if (n_fill - fills0 != 100) begin failures++; $display("FAIL %0d fills after flush", n_fill - fills0); end
    $display("fills %0d write-backs %0d dirty at flush %0d", n_fill, n_wb, dirty_lines);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
