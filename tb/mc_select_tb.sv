// Self-checking testbench of mc_select: for every mask split of the four
// controllers (except all-to-one-cluster) and random addresses and requester
// clusters, the chosen controller must belong to the region owner's cluster,
// follow line-interleaving over that cluster's controllers in ascending
// order, and an insecure request to a secure region must be refused.
module mc_select_tb;
  import ih_pkg::*;
  logic req_valid;
  mem_req_t req;
  logic [3:0] smc, srm, onehot;
  logic viol;
  int checks = 0, failures = 0, n_viol = 0;
  int used [4];

  mc_select dut (.req_valid, .req, .secure_mc_mask (smc), .secure_region_mask (srm),
    .mc_onehot (onehot), .violation (viol));

  initial begin
    #10000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    req = '0;
    for (int k = 0; k < 4000; k++) begin
      logic [3:0] own;
      int n, want, idx, line;
      bit osec, exp_v;
      smc = 4'($urandom_range(1, 14));
      srm = (k < 2000) ? 4'b0011 : 4'($urandom);
      req_valid = ($urandom_range(0, 9) != 0);
      req.addr = {$urandom, $urandom};
      req.cl = $urandom_range(0, 1) ? CL_SECURE : CL_INSECURE;
      #1;
      osec = srm[req.addr[39:38]];
      own = osec ? smc : ~smc;
      n = $countones(own);
      line = int'(req.addr[13:6]);
      exp_v = req_valid && osec && req.cl == CL_INSECURE;
      want = -1; idx = 0;
      for (int m = 0; m < 4; m++) if (own[m]) begin
        if (idx == line % n) want = m;
        idx++;
      end
      checks++;
      if (viol != exp_v) begin failures++; $display("FAIL violation flag"); end
      checks++;
      if (!req_valid || exp_v) begin
        if (onehot != 0) begin failures++; $display("FAIL request should not go out"); end
      end else if (onehot != 4'(1 << want)) begin
        failures++;
        $display("FAIL smc=%b srm=%b addr=%h sel=%b want MC%0d", smc, srm, req.addr, onehot, want);
      end else used[want]++;
      if (exp_v) n_viol++;
    end
    checks++;
    if (n_viol == 0 || used[0] == 0 || used[3] == 0) begin failures++; $display("FAIL coverage"); end
    $display("violations %0d, per controller %0d %0d %0d %0d", n_viol, used[0], used[1], used[2], used[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
