// Self-checking testbench of home_table (64 pages per region, regions 0/1
// secure). Pages are homed through the set port (with refused cross-cluster
// homes), looked up, and then re-homed twice: shrinking the secure cluster
// from 32 to 20 tiles, and then to no secure tiles at all. Checked: exactly
// the pages on re-allocated tiles are unmapped, once each and before their
// new home is set; every new home lies in the page owner's cluster under the
// new binding; other pages keep their home; a secure page with no secure tile
// left ends unmapped.
module home_table_tb;
  import ih_pkg::*;
  localparam int NT = 64, PAGES = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NT-1:0] cur_mask, moved, newm;
  logic [3:0] srm = 4'b0011;
  logic [39:0] lookup_addr = '0;
  logic [5:0] lookup_home, set_home = 0, unmap_home;
  logic lookup_hit, set_valid = 0, set_err, remap_start = 0, remap_busy, remap_done;
  logic [7:0] set_idx = 0;
  logic unmap_valid, unmap_ack = 0;
  logic [39:0] unmap_addr;

  home_table dut (.clk, .rst_n, .secure_core_mask (cur_mask), .secure_region_mask (srm),
    .lookup_addr, .lookup_home, .lookup_hit, .set_valid, .set_idx, .set_home, .set_err,
    .remap_start, .moved_mask (moved), .new_secure_mask (newm), .remap_busy, .remap_done,
    .unmap_valid, .unmap_addr, .unmap_home, .unmap_ack);

  int checks = 0, failures = 0;
  int home [PAGES];
  bit unmapped [PAGES];

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [39:0] page_addr(int p);
    return {2'(p / 64), 16'd0, 6'(p % 64), 16'($urandom)};
  endfunction

  // unmap handshake: ack after a random delay, record each unmap
  always @(posedge clk) begin
    unmap_ack <= 1'b0;
    if (unmap_valid && !unmap_ack && $urandom_range(0, 2) == 0) begin
      int p;
      p = int'(unmap_addr[39:38]) * 64 + int'(unmap_addr[21:16]);
      unmap_ack <= 1'b1;
      if (unmapped[p]) begin failures++; $display("FAIL page %0d unmapped twice", p); end
      if (int'(unmap_home) != home[p]) begin failures++; $display("FAIL unmap home of %0d", p); end
      unmapped[p] = 1;
    end
  end

  task automatic rehome(logic [NT-1:0] nm);
    int old [PAGES];
    bit was_valid [PAGES];
    for (int p = 0; p < PAGES; p++) begin
      old[p] = home[p]; unmapped[p] = 0;
      lookup_addr = page_addr(p); #1; was_valid[p] = lookup_hit;
    end
    @(negedge clk);
    moved = nm ^ cur_mask; newm = nm; remap_start = 1;
    @(negedge clk); remap_start = 0;
    while (!remap_done) @(negedge clk);
    cur_mask = nm;
    for (int p = 0; p < PAGES; p++) begin
      bit own_sec, mv;
      own_sec = srm[p / 64];
      mv = was_valid[p] && moved[old[p]];
      lookup_addr = page_addr(p); #1;
      check(unmapped[p] == mv, $sformatf("page %0d unmapped iff its home moved", p));
      if (!mv) check(lookup_hit == was_valid[p] && (!lookup_hit || int'(lookup_home) == old[p]),
                     $sformatf("page %0d kept", p));
      else if (lookup_hit) begin
        check(nm[lookup_home] == own_sec, $sformatf("page %0d new home in owner cluster", p));
        home[p] = int'(lookup_home);
      end else check(own_sec ? (nm == '0) : (nm == '1), $sformatf("page %0d left unmapped", p));
    end
  endtask

  initial begin
    cur_mask = {32'h0, 32'hFFFF_FFFF};
    moved = '0; newm = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // a cross-cluster home is refused
    @(negedge clk); set_valid = 1; set_idx = 8'd3; set_home = 6'd40;   // secure page on insecure tile
    #1 check(set_err, "cross-cluster home refused");
    @(negedge clk); set_valid = 0;
    lookup_addr = page_addr(3); #1 check(!lookup_hit, "refused page stays unmapped");
    // home every page on a tile of its owner cluster
    for (int p = 0; p < PAGES; p++) begin
      @(negedge clk);
      home[p] = srm[p / 64] ? $urandom_range(0, 31) : $urandom_range(32, 63);
      set_valid = 1; set_idx = 8'(p); set_home = 6'(home[p]);
      #1 check(!set_err, "legal home accepted");
    end
    @(negedge clk); set_valid = 0;
    for (int p = 0; p < PAGES; p++) begin
      lookup_addr = page_addr(p); #1;
      check(lookup_hit && int'(lookup_home) == home[p], "lookup after set");
    end
    rehome({44'h0, 20'hF_FFFF});     // secure cluster shrinks to 20 tiles
    rehome({NT{1'b0}});              // no secure process: one insecure cluster
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
