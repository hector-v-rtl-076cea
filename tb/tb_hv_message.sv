// tb_hv_message: REE-to-TEE message workload on the whole SoC at its default
// parameters. A trustlet on virtual core 0 of the RVSCP sets up, through the
// security monitor and the MPU, a 1 MiB message buffer in external memory
// shared with the application processor (AP), plus a small mailbox region.
// The AP first writes 1 MiB into the buffer once as a plain memory write, to
// time the memory path alone. Then it sends a 1 MiB message: it writes the
// buffer with a new pattern, raises a flag in the mailbox and blocks until the
// trustlet acknowledges. The trustlet polls the mailbox whenever virtual core
// 0 is scheduled, checks the first and last burst of the message and six
// random bursts, and writes the acknowledgement.
//
// Checked: every write and read is accepted by the MPU, the sampled bursts
// hold the AP's data (expected XOR worked out here from the pattern, not read
// from the design), the acknowledgement arrives, another virtual core is
// refused access to the buffer, and the timing: the plain 1 MiB write runs at
// close to one 64-bit beat per cycle through the crossbar and the MPU; the
// trustlet's polling slows the message write by at most 2 %; and the
// acknowledgement follows the flag within five scheduling rounds of the
// hardware scheduler (virtual core 0 runs one 1000-cycle slice in four). The
// total overhead over the plain write is printed; it is dominated by that
// scheduling wait.
//
// Processor pipelines are bus-functional models; external memory is a block
// RAM with one-cycle access, so the cycle counts measure the fabric, not a
// DDR3 device.
module tb_hv_message;
  import hv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] CMD(input sm_op_e op, input int k, input int slot,
                                      input logic v, input logic c, input logic [3:0] p, input logic [9:0] q);
    sm_cmd_t cm;
    cm = '0;
    cm.op = op; cm.periph = 4'(k); cm.slot = 2'(slot); cm.valid = v;
    cm.id = '{core: c, proc: p, periph: q};
    return 32'(cm);
  endfunction

  localparam logic [31:0] BUF      = 32'h8000_0000;
  localparam int          MSG_B    = 1 << 20;           // 1 MiB message
  localparam int          BURST_B  = 256 * 8;           // 256 beats of 8 bytes
  localparam int          NBURST   = MSG_B / BURST_B;   // 512
  localparam logic [31:0] MBOX     = 32'h8010_0000;     // flag at +0, ack at +8

  // pattern: beat i of burst b carries seed ^ (b << 32) plus i (BFM adds i)
  function automatic logic [63:0] base_of(input logic [63:0] seed, input int b);
    return seed ^ (64'(b) << 32);
  endfunction
  function automatic logic [63:0] burst_xor(input logic [63:0] seed, input int b);
    logic [63:0] x = '0;
    for (int i = 0; i < 256; i++) x ^= base_of(seed, b) + 64'(i);
    return x;
  endfunction

  // ---------------- DUT
  axi_req_t   ap_req, tee_req, ddr_req;
  axi_resp_t  ap_resp, tee_resp, ddr_resp;
  axil_req_t  ap_lreq, tee_lreq;
  axil_resp_t ap_lresp, tee_lresp;
  axi_req_t   dev_req [4];
  axi_resp_t  dev_resp [4];
  logic [3:0] ap_dev_irq, tee_dev_irq;
  logic [13:0] ap_sm_irq, tee_sm_irq, sm_claimed;
  logic ap_rst_n, tee_rst_n, halt_req, halted, load, sw, force_rel, decerr;
  logic [31:0] pc, load_pc, rda, rdb;
  logic [127:0] load_state, key;
  logic [1:0] vc;
  hv_id_t owner;
  logic [14:0] fw_deny;

  hector_v_top dut (
    .clk, .rst_n,
    .ap_axi_req_i (ap_req), .ap_axi_resp_o (ap_resp), .ap_axil_req_i (ap_lreq), .ap_axil_resp_o (ap_lresp),
    .ap_proc_id_i (4'd2), .ap_periph_id_i (10'd0), .ap_rst_no (ap_rst_n),
    .ap_sm_irq_o (ap_sm_irq), .ap_dev_irq_o (ap_dev_irq),
    .tee_rst_no (tee_rst_n), .tee_sm_irq_o (tee_sm_irq), .tee_dev_irq_o (tee_dev_irq),
    .tee_axi_req_i (tee_req), .tee_axi_resp_o (tee_resp), .tee_axil_req_i (tee_lreq), .tee_axil_resp_o (tee_lresp),
    .tee_halt_req_o (halt_req), .tee_halted_i (halted), .tee_cur_pc_i (pc), .tee_cur_state_i (128'h0),
    .tee_load_o (load), .tee_load_pc_o (load_pc), .tee_load_state_o (load_state),
    .tee_key_o (key), .tee_key_we_i (1'b0), .tee_key_wdata_i (128'h0), .tee_vc_o (vc), .tee_switch_o (sw),
    .tee_rf_raddr_a_i (5'd0), .tee_rf_rdata_a_o (rda), .tee_rf_raddr_b_i (5'd0), .tee_rf_rdata_b_o (rdb),
    .tee_rf_we_i (1'b0), .tee_rf_waddr_i (5'd0), .tee_rf_wdata_i (32'h0),
    .ddr_axi_req_o (ddr_req), .ddr_axi_resp_i (ddr_resp),
    .dev_axi_req_o (dev_req), .dev_axi_resp_i (dev_resp), .dev_irq_i (4'h0),
    .sm_owner_o (owner), .sm_claimed_o (sm_claimed), .sm_force_release_o (force_rel),
    .fw_deny_o (fw_deny), .xbar_decerr_o (decerr)
  );

  axi4_bram #(.BYTES (2 * 1024 * 1024)) u_ddr (.clk, .rst_n, .s_req_i (ddr_req), .s_resp_o (ddr_resp));
  for (genvar i = 0; i < 4; i++) begin : g_dev
    axi4_bram #(.BYTES (4096)) u_dev (.clk, .rst_n, .s_req_i (dev_req[i]), .s_resp_o (dev_resp[i]));
  end

  tb_axi_bfm  ap   (.clk, .req_o (ap_req),   .resp_i (ap_resp));
  tb_axi_bfm  tee  (.clk, .req_o (tee_req),  .resp_i (tee_resp));
  tb_axil_bfm apl  (.clk, .req_o (ap_lreq),  .resp_i (ap_lresp));
  tb_axil_bfm teel (.clk, .req_o (tee_lreq), .resp_i (tee_lresp));

  // ---------------- RVSCP pipeline model: halts at once unless inside a bus operation
  logic tee_busy = 1'b0;
  assign halted = halt_req && !tee_busy;
  always_ff @(posedge clk or negedge tee_rst_n) begin
    if (!tee_rst_n) pc <= '0;
    else if (load) pc <= load_pc;
    else if (!halt_req) pc <= pc + 4;
  end

  task automatic tee_enter(input int v);
    do @(negedge clk); while (!(vc == 2'(v) && !halt_req));
    tee_busy = 1'b1;
  endtask
  task automatic tee_leave();
    tee_busy = 1'b0;
  endtask

  task automatic sm(input logic [31:0] c, output logic [31:0] res);
    logic [1:0] r;
    teel.write(32'h0, c, 16'h0, r);
    do teel.read(32'h4, 16'h0, res, r); while (res[31]);
  endtask
  task automatic tee_sm(input int v, input logic [31:0] c, output logic [31:0] res);
    tee_enter(v); sm(c, res); tee_leave();
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // AP: write the whole buffer with a pattern; returns the worst response
  task automatic ap_fill(input logic [63:0] seed, output logic [1:0] worst);
    logic [1:0] r;
    worst = RESP_OKAY;
    for (int b = 0; b < NBURST; b++) begin
      ap.write(BUF + 32'(b * BURST_B), base_of(seed, b), 16'h0, 8'd255, r);
      if (r != RESP_OKAY) worst = r;
    end
  endtask

  logic [63:0] seed_msg;
  int tee_bursts_ok, tee_bursts_bad, tee_polls;
  logic tee_done;

  // trustlet on VC0: wait for the flag, verify samples, acknowledge
  task automatic trustlet();
    logic [63:0] d, x; logic [1:0] r; int beats; int b;
    tee_done = 1'b0;
    forever begin
      tee_enter(0);
      tee.read(MBOX, 16'h0, 8'd0, d, x, r, beats);
      tee_leave();
      tee_polls++;
      if (r == RESP_OKAY && d == 64'h1) break;
      repeat (32) @(negedge clk);
    end
    for (int s = 0; s < 8; s++) begin
      b = (s == 0) ? 0 : (s == 1) ? NBURST - 1 : int'($urandom_range(NBURST - 1));
      tee_enter(0);
      tee.read(BUF + 32'(b * BURST_B), 16'h0, 8'd255, d, x, r, beats);
      tee_leave();
      if (r == RESP_OKAY && beats == 256 && d == base_of(seed_msg, b) && x == burst_xor(seed_msg, b))
        tee_bursts_ok++;
      else begin
        tee_bursts_bad++;
        $display("FAIL: trustlet sample burst %0d", b);
      end
    end
    tee_enter(0);
    tee.write(MBOX + 32'h8, 64'hACC, 16'h0, 8'd0, r);
    tee_leave();
    tee_done = 1'b1;
  endtask

  initial begin
    logic [31:0] res; logic [1:0] r, worst; logic [63:0] d, x; int beats;
    longint t0, t_write, t_fill, t_flag, t_msg;
    tee_bursts_ok = 0; tee_bursts_bad = 0; tee_polls = 0; tee_done = 1'b0;
    seed_msg = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---- trustlet VC0 (SM owner after reset) gets the MPU and programs it
    tee_sm(0, CMD(SM_CONFIG, 9, 0, 1'b1, 1'b1, 4'd1, 10'd0), res);
    check(res[30:28] == SM_RES_OK, "VC0 lists itself for the MPU");
    tee_sm(0, CMD(SM_CLAIM, 9, 0, 1'b0, 1'b0, 4'd0, 10'd0), res);
    check(res[30:28] == SM_RES_OK, "VC0 claims the MPU");
    tee_enter(0);
    // region 0: the 1 MiB buffer; region 1: the mailbox. Both shared by
    // VC0 {TEE, 1, any} and every AP process {REE, any, any}.
    tee.write(32'h4600_0000, 64'(BUF), 16'h0, 8'd0, r);
    tee.write(32'h4600_0008, 64'(BUF + 32'(MSG_B) - 1), 16'h0, 8'd0, r);
    tee.write(32'h4600_0010, 64'({1'b1, 15'd0, 1'b1, 1'b1, 4'd1, 10'd0}), 16'h0, 8'd0, r);
    tee.write(32'h4600_0020, 64'(MBOX), 16'h0, 8'd0, r);
    tee.write(32'h4600_0028, 64'(MBOX + 32'hFFF), 16'h0, 8'd0, r);
    tee.write(32'h4600_0030, 64'({1'b1, 15'd0, 1'b1, 1'b1, 4'd1, 10'd0}), 16'h0, 8'd0, r);
    tee.write(MBOX, 64'h0, 16'h0, 8'd1, r);  // clear flag and ack
    // release the AP from reset
    tee.write(32'h4000_0000, 64'h0, 16'h0, 8'd0, r);
    tee_leave();
    @(negedge clk);
    check(r == RESP_OKAY && ap_rst_n, "AP released");

    // ---- another virtual core may not read the buffer
    tee_enter(1);
    tee.read(BUF, 16'h0, 8'd0, d, x, r, beats);
    tee_leave();
    check(r == RESP_SLVERR, "VC1 refused on the shared buffer");

    // ---- plain 1 MiB write
    t0 = longint'($time / 10);
    ap_fill({$urandom, $urandom}, worst);
    t_write = longint'($time / 10) - t0;
    check(worst == RESP_OKAY, "plain 1 MiB write accepted");
    $display("plain 1 MiB write: %0d cycles (%0d beats)", t_write, MSG_B / 8);
    check(t_write <= longint'(MSG_B / 8) * 21 / 20, "1 MiB write at >= 0.95 beats per cycle");

    // ---- 1 MiB message with blocking send
    fork trustlet(); join_none
    t0 = longint'($time / 10);
    ap_fill(seed_msg, worst);
    t_fill = longint'($time / 10) - t0;
    ap.write(MBOX, 64'h1, 16'h0, 8'd0, r);
    t_flag = longint'($time / 10) - t0;
    do begin
      repeat (16) @(negedge clk);
      ap.read(MBOX + 32'h8, 16'h0, 8'd0, d, x, r, beats);
    end while (!(r == RESP_OKAY && d == 64'hACC));
    t_msg = longint'($time / 10) - t0;
    check(worst == RESP_OKAY, "message write accepted");
    check(tee_done, "trustlet acknowledged");
    check(tee_bursts_ok == 8 && tee_bursts_bad == 0, "trustlet sees the AP's data");
    $display("1 MiB message with acknowledgement: %0d cycles (%0d.%0d %% over the plain write)",
             t_msg, (t_msg - t_write) * 100 / t_write, ((t_msg - t_write) * 1000 / t_write) % 10);
    $display("  message write %0d cycles while the trustlet polled %0d times; flag to acknowledgement %0d cycles",
             t_fill, tee_polls, t_msg - t_flag);
    check(t_fill * 100 <= t_write * 102, "trustlet polling slows the 1 MiB write by at most 2 %");
    // After the flag the trustlet needs at most one scheduling round (four
    // 1000-cycle slices) to see it, one round for each of its own slices spent
    // on the 8 x 256 sampled beats (about 2100 cycles: three slices) and one
    // round for the acknowledgement: five rounds.
    check(t_msg - t_flag <= 5 * 4 * 1000, "acknowledgement within five scheduling rounds");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
