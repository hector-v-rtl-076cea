// tb_hector_v_top: end-to-end test of the HECTOR-V SoC at its default
// parameters (4 virtual cores, 1000-cycle time slice, 4096-cycle withdraw
// timeout, 16 MPU regions, 14 managed peripherals).
//
// The application processor (AP) and the RVSCP core pipeline are replaced by
// bus-functional models on their AXI4 and AXI4-lite ports; the RVSCP model
// stops at once when the scheduler asks it to halt, except while it is in
// the middle of a bus operation (as a pipeline drains before it halts). The
// external DDR3 controller and the UART, PS2, SD and SPI controllers are
// block RAMs. The test walks through the secure boot and the peripheral
// ownership protocol and counts every mechanism it sees working: secure boot
// state, AP release by the reset unit, SM configuration, claim, denied claim,
// busy, status, release, withdraw with interrupt, forced release after the
// timeout, ownership transfer, wrapper refusal, ID stamping (a forged user
// ID has no effect), secure storage bound to one virtual core and to its CFI
// state, MPU region programming, MPU allow and deny, context switches,
// per-virtual-core register banks, decode errors and interrupt routing. A
// mechanism that never happened counts as a failure.
module tb_hector_v_top;
  import hv_pkg::*;
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

  // ---------------- mechanisms
  typedef enum int {
    M_BOOT, M_AP_RELEASE, M_CONFIG, M_CLAIM, M_DENIED, M_BUSY, M_STATUS, M_RELEASE,
    M_WITHDRAW_IRQ, M_FORCED, M_TRANSFER, M_WRAP_DENY, M_STAMP, M_SBRAM_VC, M_SBRAM_CFI,
    M_MPU_CFG, M_MPU_ALLOW, M_MPU_DENY, M_SWITCH, M_REGBANK, M_DECERR, M_IRQ_ROUTE, M_NUM
  } mech_e;
  int mech [M_NUM];
  string mech_name [M_NUM] = '{"secure boot state", "AP released by reset unit", "SM config", "claim",
    "denied claim", "busy", "status", "release", "withdraw irq", "forced release", "ownership transfer",
    "wrapper refusal", "ID stamp", "secure storage per VC", "secure storage per CFI state",
    "MPU region config", "MPU allow", "MPU deny", "context switch", "register banks", "decode error",
    "interrupt routing"};

  // ---------------- DUT
  axi_req_t   ap_req, tee_req, ddr_req;
  axi_resp_t  ap_resp, tee_resp, ddr_resp;
  axil_req_t  ap_lreq, tee_lreq;
  axil_resp_t ap_lresp, tee_lresp;
  axi_req_t   dev_req [4];
  axi_resp_t  dev_resp [4];
  logic [3:0] dev_irq, ap_dev_irq, tee_dev_irq;
  logic [13:0] ap_sm_irq, tee_sm_irq, sm_claimed;
  logic ap_rst_n, tee_rst_n, halt_req, halted, load, key_we, sw, rf_we, force_rel, decerr;
  logic [31:0] pc, load_pc, rda, rdb, rf_wd;
  logic [127:0] tee_state, load_state, key, key_wd;
  logic [1:0] vc;
  logic [4:0] rf_ra, rf_rb, rf_wa;
  hv_id_t owner;
  logic [14:0] fw_deny;

  hector_v_top dut (
    .clk, .rst_n,
    .ap_axi_req_i (ap_req), .ap_axi_resp_o (ap_resp), .ap_axil_req_i (ap_lreq), .ap_axil_resp_o (ap_lresp),
    .ap_proc_id_i (4'd2), .ap_periph_id_i (10'd0), .ap_rst_no (ap_rst_n),
    .ap_sm_irq_o (ap_sm_irq), .ap_dev_irq_o (ap_dev_irq),
    .tee_rst_no (tee_rst_n), .tee_sm_irq_o (tee_sm_irq), .tee_dev_irq_o (tee_dev_irq),
    .tee_axi_req_i (tee_req), .tee_axi_resp_o (tee_resp), .tee_axil_req_i (tee_lreq), .tee_axil_resp_o (tee_lresp),
    .tee_halt_req_o (halt_req), .tee_halted_i (halted), .tee_cur_pc_i (pc), .tee_cur_state_i (tee_state),
    .tee_load_o (load), .tee_load_pc_o (load_pc), .tee_load_state_o (load_state),
    .tee_key_o (key), .tee_key_we_i (key_we), .tee_key_wdata_i (key_wd), .tee_vc_o (vc), .tee_switch_o (sw),
    .tee_rf_raddr_a_i (rf_ra), .tee_rf_rdata_a_o (rda), .tee_rf_raddr_b_i (rf_rb), .tee_rf_rdata_b_o (rdb),
    .tee_rf_we_i (rf_we), .tee_rf_waddr_i (rf_wa), .tee_rf_wdata_i (rf_wd),
    .ddr_axi_req_o (ddr_req), .ddr_axi_resp_i (ddr_resp),
    .dev_axi_req_o (dev_req), .dev_axi_resp_i (dev_resp), .dev_irq_i (dev_irq),
    .sm_owner_o (owner), .sm_claimed_o (sm_claimed), .sm_force_release_o (force_rel),
    .fw_deny_o (fw_deny), .xbar_decerr_o (decerr)
  );

  // external memory and device controllers
  axi4_bram #(.BYTES (65536)) u_ddr (.clk, .rst_n, .s_req_i (ddr_req), .s_resp_o (ddr_resp));
  for (genvar i = 0; i < 4; i++) begin : g_dev
    axi4_bram #(.BYTES (4096)) u_dev (.clk, .rst_n, .s_req_i (dev_req[i]), .s_resp_o (dev_resp[i]));
  end

  tb_axi_bfm  ap   (.clk, .req_o (ap_req),   .resp_i (ap_resp));
  tb_axi_bfm  tee  (.clk, .req_o (tee_req),  .resp_i (tee_resp));
  tb_axil_bfm apl  (.clk, .req_o (ap_lreq),  .resp_i (ap_lresp));
  tb_axil_bfm teel (.clk, .req_o (tee_lreq), .resp_i (tee_lresp));

  // ---------------- RVSCP pipeline model
  logic tee_busy = 1'b0;
  assign halted = halt_req && !tee_busy;
  always_ff @(posedge clk or negedge tee_rst_n) begin
    if (!tee_rst_n) pc <= '0;
    else if (load) pc <= load_pc;
    else if (!halt_req) pc <= pc + 4;
  end

  // context switches, and every VC finds its own x7 in its register bank
  logic [3:0] ran = '0;
  logic [1:0] last_vc = '0;
  always @(posedge clk) if (sw) mech[M_SWITCH]++;
  always @(negedge clk) begin
    if (rst_n && !halt_req && !rf_we) begin
      if (ran[vc]) begin
        checks++;
        if (rda != 32'hB0B0_0000 + 32'(vc)) begin failures++; $display("FAIL: VC%0d register bank", vc); end
        else mech[M_REGBANK]++;
      end
    end
  end
  always @(negedge clk) begin
    rf_we <= 1'b0;
    if (rst_n && !halt_req && !ran[vc]) begin
      rf_we <= 1'b1; rf_wa <= 5'd7; rf_wd <= 32'hB0B0_0000 + 32'(vc);
      ran[vc] <= 1'b1;
    end
  end

  // wait until virtual core v runs, then keep it from being switched out
  task automatic tee_enter(input int v);
    do @(negedge clk); while (!(vc == 2'(v) && !halt_req));
    tee_busy = 1'b1;
  endtask
  task automatic tee_leave();
    tee_busy = 1'b0;
  endtask

  // SM command from the AP (p = 0) or the RVSCP (p = 1); polls until done
  task automatic sm(input int p, input logic [31:0] c, output logic [31:0] res);
    logic [1:0] r;
    if (p == 0) apl.write(32'h0, c, 16'h0, r); else teel.write(32'h0, c, 16'h0, r);
    do begin
      if (p == 0) apl.read(32'h4, 16'h0, res, r); else teel.read(32'h4, 16'h0, res, r);
    end while (res[31]);
  endtask
  task automatic tee_sm(input int v, input logic [31:0] c, output logic [31:0] res);
    tee_enter(v); sm(1, c, res); tee_leave();
  endtask

  initial begin
    repeat (120000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] res; logic [1:0] r; logic [63:0] d, x; int beats;
    dev_irq = '0; key_we = 1'b0; key_wd = '0; rf_ra = 5'd7; rf_rb = 5'd0; rf_wa = '0; rf_wd = '0;
    tee_state = '0;
    for (int m = 0; m < M_NUM; m++) mech[m] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---- secure boot state
    check(!ap_rst_n && tee_rst_n, "AP held in reset, RVSCP running");
    check(owner == '{core: 1'b1, proc: 4'd1, periph: 10'd0}, "VC0 owns the SM");
    check(sm_claimed == 14'h1, "reset unit claimed by VC0");
    if (!ap_rst_n && tee_rst_n && sm_claimed == 14'h1) mech[M_BOOT]++;

    // ---- VC0 loads nothing into secure storage yet; it configures the SM:
    // UART (2), SPI (5) for any REE process; MPU (9) and SBRAM0 (10) for VC0;
    // UART also for VC0.
    tee_sm(0, CMD(SM_CONFIG, 2, 0, 1'b1, 1'b0, 4'd0, 10'd0), res);
    check(res[30:28] == SM_RES_OK, "config UART list");
    if (res[30:28] == SM_RES_OK) mech[M_CONFIG]++;
    tee_sm(0, CMD(SM_CONFIG, 2, 1, 1'b1, 1'b1, 4'd1, 10'd0), res);
    tee_sm(0, CMD(SM_CONFIG, 5, 0, 1'b1, 1'b0, 4'd0, 10'd0), res);
    tee_sm(0, CMD(SM_CONFIG, 9, 0, 1'b1, 1'b1, 4'd1, 10'd0), res);
    tee_sm(0, CMD(SM_CONFIG, 10, 0, 1'b1, 1'b1, 4'd1, 10'd0), res);
    check(res[30:28] == SM_RES_OK, "config lists");
    if (res[30:28] == SM_RES_OK) mech[M_CONFIG]++;

    // ---- VC0 releases the AP through the reset unit
    tee_enter(0);
    tee.write(32'h4000_0000, 64'h0, 16'h0, 0, r);
    tee_leave();
    @(negedge clk);
    check(r == RESP_OKAY && ap_rst_n, "AP released from reset");
    if (ap_rst_n) mech[M_AP_RELEASE]++;
    ap.write(32'h4000_0000, 64'h1, 16'h0, 0, r);
    check(r == RESP_SLVERR && ap_rst_n, "AP cannot put itself back into reset");
    if (r == RESP_SLVERR) mech[M_WRAP_DENY]++;

    // ---- AP claims the UART, uses it
    // a claim from the REE with the status read back, timed in bus cycles
    begin
      int t0 = $time;
      sm(0, CMD(SM_CLAIM, 2, 0, 1'b0, 1'b0, 4'd0, 10'd0), res);
      $display("REE claim request and status read-back: %0d cycles", ($time - t0) / 10);
      check(($time - t0) / 10 < 188, "claim round trip in hardware is below the measured software figure");
    end
    check(res[30:28] == SM_RES_OK && sm_claimed[2], "AP claims UART");
    if (res[30:28] == SM_RES_OK && sm_claimed[2]) mech[M_CLAIM]++;
    ap.write(32'h4200_0000, 64'h55AA, 16'h0, 3, r);
    ap.read(32'h4200_0008, 16'h0, 0, d, x, r, beats);
    check(r == RESP_OKAY && d == 64'h55AB, "AP talks to the UART");
    tee_enter(0);
    tee.read(32'h4200_0008, 16'h0, 0, d, x, r, beats);
    tee_leave();
    check(r == RESP_SLVERR && d != 64'h55AB, "VC0 cannot touch the AP's UART");
    if (r == RESP_SLVERR) mech[M_WRAP_DENY]++;
    // forged user ID from the AP: the stamp overrides it
    ap.read(32'h4500_0000, U(1'b1, 4'd1, 10'd0), 0, d, x, r, beats);
    check(r == RESP_SLVERR, "AP forging the TEE ID is refused");
    if (r == RESP_SLVERR) mech[M_STAMP]++;

    // ---- interrupt routing follows the owner
    dev_irq = 4'b0001;
    @(negedge clk);
    check(ap_dev_irq[0] && !tee_dev_irq[0], "UART interrupt goes to the AP");
    if (ap_dev_irq[0] && !tee_dev_irq[0]) mech[M_IRQ_ROUTE]++;
    dev_irq = '0;

    // ---- denied claim, busy, status
    sm(0, CMD(SM_CLAIM, 4, 0, 1'b0, 1'b0, 4'd0, 10'd0), res);
    check(res[30:28] == SM_RES_DENIED && !sm_claimed[4], "AP may not claim the SD card");
    if (res[30:28] == SM_RES_DENIED) mech[M_DENIED]++;
    tee_sm(0, CMD(SM_CLAIM, 2, 0, 1'b0, 1'b0, 4'd0, 10'd0), res);
    check(res[30:28] == SM_RES_BUSY, "UART busy for VC0");
    if (res[30:28] == SM_RES_BUSY) mech[M_BUSY]++;
    tee_sm(0, CMD(SM_STATUS, 2, 0, 1'b0, 1'b0, 4'd0, 10'd0), res);
    check(res[30:28] == SM_RES_OK && res[27] && res[25] && res[24], "status: claimed, VC0 permitted, VC0 owner");
    if (res[30:28] == SM_RES_OK && res[27]) mech[M_STATUS]++;

    // ---- VC0 withdraws the UART; the AP is told and releases it
    tee_sm(0, CMD(SM_WITHDRAW, 2, 0, 1'b0, 1'b0, 4'd0, 10'd0), res);
    check(res[26], "withdraw pending");
    @(negedge clk);
    check(ap_sm_irq[2] && !tee_sm_irq[2], "withdraw interrupt to the AP");
    if (ap_sm_irq[2]) mech[M_WITHDRAW_IRQ]++;
    sm(0, CMD(SM_RELEASE, 2, 0, 1'b0, 1'b0, 4'd0, 10'd0), res);
    @(negedge clk);
    check(res[30:28] == SM_RES_OK && !sm_claimed[2] && !ap_sm_irq[2], "AP releases the UART");
    if (res[30:28] == SM_RES_OK && !sm_claimed[2]) mech[M_RELEASE]++;
    ap.read(32'h4200_0008, 16'h0, 0, d, x, r, beats);
    check(r == RESP_SLVERR, "released UART refuses the AP");
    tee_sm(0, CMD(SM_CLAIM, 2, 0, 1'b0, 1'b0, 4'd0, 10'd0), res);
    check(res[30:28] == SM_RES_OK, "VC0 claims the UART");
    dev_irq = 4'b0001;
    @(negedge clk);
    check(!ap_dev_irq[0] && tee_dev_irq[0], "UART interrupt now goes to the RVSCP");
    if (!ap_dev_irq[0] && tee_dev_irq[0]) mech[M_IRQ_ROUTE]++;
    dev_irq = '0;

    // ---- forced release: the AP holds the SPI and ignores a withdraw
    sm(0, CMD(SM_CLAIM, 5, 0, 1'b0, 1'b0, 4'd0, 10'd0), res);
    check(res[30:28] == SM_RES_OK && sm_claimed[5], "AP claims the SPI");
    tee_sm(0, CMD(SM_WITHDRAW, 5, 0, 1'b0, 1'b0, 4'd0, 10'd0), res);
    begin
      int t = 0;
      while (!force_rel && t < 6000) begin @(negedge clk); t++; end
      @(negedge clk);
      check(t >= 4000 && t < 4200 && !sm_claimed[5], $sformatf("forced release after %0d cycles", t));
      if (!sm_claimed[5] && t < 6000) mech[M_FORCED]++;
    end
    ap.read(32'h4203_0000, 16'h0, 0, d, x, r, beats);
    check(r == RESP_SLVERR, "SPI taken from the AP");

    // ---- secure storage of VC0: bound to VC0 and, once claimed, to a CFI state
    tee_enter(0);
    tee.write(32'h4500_0000, 64'h5EC0, 16'h0, 0, r);
    tee_leave();
    check(r == RESP_OKAY, "VC0 writes its secure storage");
    tee_enter(1);
    tee.read(32'h4500_0000, 16'h0, 0, d, x, r, beats);
    tee_leave();
    check(r == RESP_SLVERR, "VC1 cannot read VC0's secure storage");
    if (r == RESP_SLVERR) mech[M_SBRAM_VC]++;
    tee_sm(0, CMD(SM_CLAIM, 10, 0, 1'b0, 1'b0, 4'd0, 10'h2A5), res);
    check(res[30:28] == SM_RES_OK, "VC0 binds its secure storage to CFI state 0x2A5");
    tee_state = 128'h2A5;
    tee_enter(0);
    tee.read(32'h4500_0000, 16'h0, 0, d, x, r, beats);
    tee_leave();
    check(r == RESP_OKAY && d == 64'h5EC0, "right CFI state reads");
    tee_state = 128'h2A4;
    tee_enter(0);
    tee.read(32'h4500_0000, 16'h0, 0, d, x, r, beats);
    tee_leave();
    check(r == RESP_SLVERR, "wrong CFI state refused");
    if (r == RESP_SLVERR) mech[M_SBRAM_CFI]++;
    tee_state = '0;

    // ---- MPU: VC0 claims it and sets up a shared buffer and a private region
    tee_sm(0, CMD(SM_CLAIM, 9, 0, 1'b0, 1'b0, 4'd0, 10'd0), res);
    check(res[30:28] == SM_RES_OK, "VC0 claims the MPU");
    tee_enter(0);
    tee.write(32'h4600_0000, 64'h8000_0000, 16'h0, 0, r);
    tee.write(32'h4600_0008, 64'h8000_0FFF, 16'h0, 0, r);
    tee.write(32'h4600_0010, 64'({1'b1, 1'b0, 14'd0, 1'b1, 1'b1, 14'd0}), 16'h0, 0, r);
    tee.write(32'h4600_0020, 64'h8000_1000, 16'h0, 0, r);
    tee.write(32'h4600_0028, 64'h8000_1FFF, 16'h0, 0, r);
    tee.write(32'h4600_0030, 64'({16'd0, 1'b1, 1'b1, 4'd1, 10'd0}), 16'h0, 0, r);
    tee.read(32'h4600_0028, 16'h0, 0, d, x, r, beats);
    tee_leave();
    check(r == RESP_OKAY && d[31:0] == 32'h8000_1FFF, "MPU regions programmed");
    if (r == RESP_OKAY && d[31:0] == 32'h8000_1FFF) mech[M_MPU_CFG]++;
    ap.write(32'h4600_0010, 64'hFFFF_FFFF, 16'h0, 0, r);
    check(r == RESP_SLVERR, "AP cannot program the MPU");
    ap.write(32'h8000_0100, 64'h1000, 16'h0, 15, r);
    check(r == RESP_OKAY, "AP writes the shared buffer");
    tee_enter(2);
    tee.read(32'h8000_0100, 16'h0, 15, d, x, r, beats);
    tee_leave();
    check(r == RESP_OKAY && d == 64'h1000 && beats == 16, "RVSCP reads the shared buffer");
    if (r == RESP_OKAY && d == 64'h1000) mech[M_MPU_ALLOW]++;
    tee_enter(0);
    tee.write(32'h8000_1000, 64'h7777, 16'h0, 0, r);
    tee_leave();
    ap.read(32'h8000_1000, 16'h0, 0, d, x, r, beats);
    check(r == RESP_SLVERR && d != 64'h7777, "AP refused in VC0's private region");
    if (r == RESP_SLVERR) mech[M_MPU_DENY]++;
    ap.read(32'h8000_4000, 16'h0, 0, d, x, r, beats);
    check(r == RESP_SLVERR, "DDR outside every region refused");

    // ---- ownership transfer VC0 -> VC1
    tee_sm(0, CMD(SM_TRANSFER, 0, 0, 1'b0, 1'b1, 4'd2, 10'd0), res);
    check(res[30:28] == SM_RES_OK && owner.proc == 4'd2, "SM ownership moves to VC1");
    tee_sm(0, CMD(SM_CONFIG, 3, 0, 1'b1, 1'b0, 4'd0, 10'd0), res);
    check(res[30:28] == SM_RES_DENIED, "VC0 no longer configures");
    tee_sm(1, CMD(SM_CONFIG, 3, 0, 1'b1, 1'b0, 4'd0, 10'd0), res);
    check(res[30:28] == SM_RES_OK, "VC1 configures");
    if (res[30:28] == SM_RES_OK && owner.proc == 4'd2) mech[M_TRANSFER]++;
    sm(0, CMD(SM_TRANSFER, 0, 0, 1'b0, 1'b0, 4'd2, 10'd0), res);
    check(res[30:28] == SM_RES_DENIED, "AP cannot take SM ownership");

    // ---- decode error
    ap.read(32'h5000_0000, 16'h0, 2, d, x, r, beats);
    check(r == RESP_DECERR && beats == 3, "unmapped address: DECERR");
    if (r == RESP_DECERR) mech[M_DECERR]++;

    // ---- let every virtual core run once more
    repeat (4200) @(negedge clk);
    check(ran == 4'hF, "all virtual cores ran");

    for (int m = 0; m < M_NUM; m++) begin
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL: mechanism never seen: %s", mech_name[m]); end
      else $display("mechanism %-28s seen %0d times", mech_name[m], mech[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
