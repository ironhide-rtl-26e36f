// Self-checking testbench of cluster_config: reset binding (first half
// secure, MC0/MC1 and regions 0/1 secure), one accepted re-binding per
// invocation, refusal of a second one, re-arming by app_start, and the legal
// all-insecure and all-secure bindings.
module cluster_config_tb;
  localparam int NT = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic app_start = 0, cfg_valid = 0;
  logic [NT-1:0] cfg_core_mask = '0;
  logic cfg_accept, cfg_reject, allowed;
  logic [NT-1:0] mask;
  logic [3:0] mcm, rgm;
  int checks = 0, failures = 0;

  cluster_config dut (.clk, .rst_n, .app_start, .cfg_valid, .cfg_core_mask,
    .cfg_accept, .cfg_reject, .reconfig_allowed (allowed), .secure_core_mask (mask),
    .secure_mc_mask (mcm), .secure_region_mask (rgm));

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic request(logic [NT-1:0] m, bit expect_ok);
    @(negedge clk); cfg_valid = 1; cfg_core_mask = m;
    #1 check(cfg_accept == expect_ok && cfg_reject == !expect_ok, "accept/reject");
    @(negedge clk); cfg_valid = 0;
  endtask

  initial begin
    logic [NT-1:0] m1, m2;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(mask == {32'h0, 32'hFFFF_FFFF}, "reset binding 32/32");
    check(mcm == 4'b0011 && rgm == 4'b0011, "static MC/region partition");
    check(allowed, "allowed after reset");
    m1 = {{(NT-20){1'b0}}, {20{1'b1}}};
    request(m1, 1);
    check(mask == m1, "new binding visible");
    check(!allowed, "allowance used");
    m2 = {NT{1'b1}};
    request(m2, 0);
    check(mask == m1, "second request refused, binding kept");
    @(negedge clk); app_start = 1; @(negedge clk); app_start = 0;
    check(allowed, "re-armed by app_start");
    request(m2, 1);
    check(mask == m2, "all-secure binding");
    @(negedge clk); app_start = 1; @(negedge clk); app_start = 0;
    request('0, 1);
    check(mask == '0, "single insecure cluster");
    // a request in the same cycle as app_start is refused
    @(negedge clk); app_start = 1; cfg_valid = 1; cfg_core_mask = m1;
    #1 check(cfg_reject, "request coincident with app_start refused");
    @(negedge clk); app_start = 0; cfg_valid = 0;
    check(mask == '0 && allowed, "binding unchanged, allowance armed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
