// tb_security_monitor: self-checking test of the security monitor together
// with a small configuration bus (axil_xbar) and three real peripheral
// wrappers, so that every table change is checked where it matters: in the
// wrapper's ID field. Covers claim (granted, denied, busy), release (by the
// claimer, refused for others), status, withdraw (owner and unprivileged,
// graceful release by the claimer, forced release at timeout, interrupt to
// the right domain), privileged configuration, ownership transfer, invalid
// requests, and the command latency.
module tb_security_monitor;
  import hv_pkg::*;
  localparam int NP = 3;
  localparam int TO = 50;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] U(input logic c, input logic [3:0] p, input logic [9:0] q);
    return id_to_user('{core: c, proc: p, periph: q});
  endfunction
  function automatic logic [31:0] CMD(input sm_op_e op, input int k, input int slot,
                                      input logic v, input logic c, input logic [3:0] p, input logic [9:0] q);
    sm_cmd_t cm;
    cm = '0;
    cm.op = op; cm.periph = 4'(k); cm.slot = 2'(slot); cm.valid = v;
    cm.id = '{core: c, proc: p, periph: q};
    return 32'(cm);
  endfunction

  axil_req_t  ree_req, tee_req, cfg_req;
  axil_resp_t ree_resp, tee_resp, cfg_resp;
  axil_req_t  w_req [NP];
  axil_resp_t w_resp [NP];
  logic [NP-1:0] irq_ree, irq_tee, sm_claimed;
  hv_id_t owner;
  logic force_rel;

  security_monitor #(
    .NUM_PERIPH (NP), .NUM_ALLOWED (4), .WITHDRAW_TIMEOUT (TO),
    .OWNER_AT_RESET ('{core: 1'b1, proc: 4'd1, periph: 10'd0}), .CLAIMED_AT_RESET (3'b001)
  ) dut (
    .clk, .rst_n,
    .s_ree_req_i (ree_req), .s_ree_resp_o (ree_resp),
    .s_tee_req_i (tee_req), .s_tee_resp_o (tee_resp),
    .m_cfg_req_o (cfg_req), .m_cfg_resp_i (cfg_resp),
    .irq_ree_o (irq_ree), .irq_tee_o (irq_tee),
    .owner_o (owner), .claimed_o (sm_claimed), .force_release_o (force_rel)
  );

  axil_xbar #(.NUM_S (NP), .SLV_BASE ({32'h200, 32'h100, 32'h000}), .SLV_MASK (32'hFFFF_FF00)) u_x (
    .clk, .rst_n, .s_req_i (cfg_req), .s_resp_o (cfg_resp), .m_req_o (w_req), .m_resp_i (w_resp)
  );

  logic   wclaimed [NP];
  hv_id_t wid [NP];
  for (genvar k = 0; k < NP; k++) begin : g_w
    axi_req_t m_unused; axi_resp_t s_unused; logic a, b, dn;
    periph_wrapper #(.RESET_CLAIMED (k == 0), .RESET_ID ('{core: 1'b1, proc: 4'd1, periph: 10'd0})) u_w (
      .clk, .rst_n, .s_axi_req_i ('0), .s_axi_resp_o (s_unused),
      .m_axi_req_o (m_unused), .m_axi_resp_i ('0),
      .s_cfg_req_i (w_req[k]), .s_cfg_resp_o (w_resp[k]),
      .irq_i (1'b0), .irq_ree_o (a), .irq_tee_o (b),
      .claimed_o (wclaimed[k]), .id_o (wid[k]), .deny_o (dn)
    );
  end

  tb_axil_bfm ree (.clk, .req_o (ree_req), .resp_i (ree_resp));
  tb_axil_bfm tee (.clk, .req_o (tee_req), .resp_i (tee_resp));

  int forced = 0;
  always @(posedge clk) if (force_rel) forced++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // issue a command from port p (0 REE, 1 TEE) as `user`, wait for its result
  task automatic cmd(input int p, input logic [15:0] user, input logic [31:0] c,
                     output logic [31:0] res, output int cyc);
    logic [1:0] r; int t0;
    t0 = $time;
    if (p == 0) ree.write(32'h0, c, user, r); else tee.write(32'h0, c, user, r);
    do begin
      if (p == 0) ree.read(32'h4, user, res, r); else tee.read(32'h4, user, res, r);
    end while (res[31]);
    cyc = ($time - t0) / 10;
    if ($test$plusargs("trace")) $display("cmd p=%0d c=%h res=%h cyc=%0d", p, c, res, cyc);
  endtask

  localparam logic [15:0] REE = 16'h0000;   // {REE, process 0, periph 0}

  initial begin
    logic [31:0] res; int cyc, t0;
    logic [15:0] VC0, VC1;
    VC0 = U(1, 1, 10'h3A);   // the TEE's periph field carries some CFI state
    VC1 = U(1, 2, 10'h155);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(owner == '{core: 1'b1, proc: 4'd1, periph: 10'd0}, "VC0 is SM owner after reset");
    check(sm_claimed == 3'b001 && wclaimed[0], "reset unit entry claimed at reset");

    cmd(0, REE, CMD(SM_CLAIM, 1, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_DENIED, "claim by party not in list denied");
    cmd(0, REE, CMD(SM_CONFIG, 1, 0, 1, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_DENIED, "config by non-owner denied");
    cmd(1, VC0, CMD(SM_CONFIG, 1, 0, 1, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_OK && res[24], "config by owner OK");
    cmd(1, VC0, CMD(SM_CONFIG, 2, 3, 1, 1, 2, 0), res, cyc);
    check(res[30:28] == SM_RES_OK, "config slot 3 of entry 2");

    cmd(0, REE, CMD(SM_CLAIM, 1, 0, 0, 0, 0, 10'h2B), res, cyc);
    check(res[30:28] == SM_RES_OK && res[27], "REE claim granted");
    check(wclaimed[1] && wid[1] == '{core: 1'b0, proc: 4'd0, periph: 10'h2B}, "wrapper 1 holds REE ID");
    check(cyc <= 12, $sformatf("claim round trip %0d cycles", cyc));
    cmd(1, VC1, CMD(SM_CLAIM, 1, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_DENIED, "VC1 not permitted on entry 1");
    cmd(0, REE, CMD(SM_CLAIM, 1, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_BUSY, "second claim -> busy");
    cmd(0, REE, CMD(SM_STATUS, 1, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_OK && res[27] && res[25] && !res[26] && !res[24], "status bits");

    // VC1 claims entry 2 with its CFI state as peripheral ID
    cmd(1, VC1, CMD(SM_CLAIM, 2, 0, 0, 1, 9, 10'h155), res, cyc);
    check(res[30:28] == SM_RES_OK, "VC1 claim");
    check(wid[2] == '{core: 1'b1, proc: 4'd2, periph: 10'h155}, "claim ID = issuer core/process + given periph ID");
    cmd(0, REE, CMD(SM_RELEASE, 2, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_DENIED && wclaimed[2], "release by non-claimer refused");
    cmd(0, REE, CMD(SM_WITHDRAW, 2, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_DENIED && irq_tee == 3'b000, "unprivileged, unlisted withdraw denied");

    // graceful withdraw
    cmd(1, VC0, CMD(SM_WITHDRAW, 2, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_OK && res[26], "owner withdraw granted");
    check(irq_tee == 3'b100 && irq_ree == 3'b000, "withdraw IRQ to the TEE claimer");
    cmd(1, VC1, CMD(SM_RELEASE, 2, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_OK && !wclaimed[2] && irq_tee == 3'b000, "ISR release clears wrapper and IRQ");
    repeat (TO + 10) @(posedge clk);
    check(forced == 0, "no forced release after graceful release");

    // forced withdraw
    t0 = $time;
    cmd(1, VC0, CMD(SM_WITHDRAW, 1, 0, 0, 0, 0, 0), res, cyc);
    check(irq_ree == 3'b010, "withdraw IRQ to the REE claimer");
    wait (force_rel);
    check((($time - t0) / 10) >= TO && (($time - t0) / 10) <= TO + 12,
          $sformatf("forced release after %0d cycles", ($time - t0) / 10));
    repeat (8) @(posedge clk);
    check(!wclaimed[1] && !sm_claimed[1] && irq_ree == 3'b000, "timeout clears wrapper");
    check(forced == 1, "one forced release");

    // unprivileged withdraw by a listed party
    cmd(1, VC1, CMD(SM_CLAIM, 2, 0, 0, 0, 0, 0), res, cyc);
    cmd(1, VC0, CMD(SM_CONFIG, 2, 0, 1, 0, 0, 0), res, cyc);   // REE also listed on entry 2
    cmd(0, REE, CMD(SM_WITHDRAW, 2, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_OK && irq_tee == 3'b100, "listed party withdraw approved");
    cmd(1, VC1, CMD(SM_RELEASE, 2, 0, 0, 0, 0, 0), res, cyc);

    // ownership transfer
    cmd(0, REE, CMD(SM_TRANSFER, 0, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_DENIED, "transfer by non-owner denied");
    cmd(1, VC0, CMD(SM_TRANSFER, 0, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_OK && owner == '0, "ownership transferred to REE");
    cmd(1, VC0, CMD(SM_CONFIG, 1, 1, 1, 1, 3, 0), res, cyc);
    check(res[30:28] == SM_RES_DENIED, "old owner lost privilege");
    cmd(0, REE, CMD(SM_CONFIG, 1, 1, 1, 1, 3, 0), res, cyc);
    check(res[30:28] == SM_RES_OK, "new owner configures");
    cmd(0, REE, CMD(SM_CLAIM, 7, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_INVALID, "bad peripheral index");
    cmd(0, REE, CMD(SM_STATUS, 0, 0, 0, 0, 0, 0), res, cyc);
    check(res[27] && !res[25] && cyc <= 8, $sformatf("status of reset unit, %0d cycles", cyc));
    // the new owner releases a peripheral it never claimed
    cmd(0, REE, CMD(SM_RELEASE, 0, 0, 0, 0, 0, 0), res, cyc);
    check(res[30:28] == SM_RES_OK && !sm_claimed[0] && !wclaimed[0], "SM owner releases VC0's reset unit");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
