// Self-checking testbench of sec_access_check. Random requests from a
// secure or an insecure core to all four regions (0 and 1 secure), some
// speculative, with random downstream readiness and random resolution.
// A reference model decides for each request: forwarded unchanged, held then
// squashed, held then trapped, or trapped at once. Also checks that a held
// request stalls the core until the resolve arrives.
module sec_access_check_tb;
  import ih_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic core_secure = 0;
  logic [3:0] srm = 4'b0011;
  logic req_valid = 0, resolve_valid = 0, resolve_squash = 0, fwd_ready = 1;
  core_req_t req;
  logic req_ready, fwd_valid, stalled, exc_pulse, squash_pulse;
  core_req_t fwd_req;

  sec_access_check dut (.clk, .rst_n, .core_secure, .secure_region_mask (srm),
    .req_valid, .req, .req_ready, .resolve_valid, .resolve_squash,
    .fwd_valid, .fwd_req, .fwd_ready, .stalled, .exc_pulse, .squash_pulse);

  int checks = 0, failures = 0;
  int n_fwd = 0, n_sq = 0, n_exc_spec = 0, n_exc = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      bit bad;
      int hold;
      @(negedge clk);
      core_secure = $urandom_range(0, 1);
      req.addr = {2'($urandom), 38'($urandom)};
      req.we = $urandom_range(0, 1);
      req.wdata = {$urandom, $urandom};
      req.spec = $urandom_range(0, 1);
      fwd_ready = $urandom_range(0, 1);
      req_valid = 1;
      bad = !core_secure && srm[req.addr[39:38]];
      #1;
      if (!bad) begin
        check(fwd_valid && fwd_req == req && req_ready == fwd_ready && !exc_pulse,
              "allowed request passes unchanged");
        n_fwd++;
        @(negedge clk); req_valid = 0;
      end else if (!req.spec) begin
        check(!fwd_valid && req_ready && exc_pulse, "committed violation trapped at once");
        n_exc++;
        @(negedge clk); req_valid = 0;
      end else begin
        check(!fwd_valid && req_ready && !exc_pulse, "speculative violation taken, not sent");
        @(negedge clk); req_valid = 0;
        hold = $urandom_range(1, 6);
        for (int h = 0; h < hold; h++) begin
          #1 check(stalled && !req_ready && !fwd_valid, "core stalled while unresolved");
          @(negedge clk);
        end
        resolve_valid = 1; resolve_squash = $urandom_range(0, 1);
        #1;
        if (resolve_squash) begin
          check(squash_pulse && !exc_pulse, "squashed quietly"); n_sq++;
        end else begin
          check(exc_pulse && !squash_pulse, "resolved committed: exception"); n_exc_spec++;
        end
        @(negedge clk); resolve_valid = 0;
        #1 check(!stalled, "released after resolve");
      end
    end
    check(n_fwd > 0 && n_sq > 0 && n_exc > 0 && n_exc_spec > 0, "all four outcomes seen");
    $display("forwarded %0d squashed %0d trapped %0d trapped-after-hold %0d",
             n_fwd, n_sq, n_exc, n_exc_spec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
