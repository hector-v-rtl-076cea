// tb_periph_wrapper: self-checking test of the peripheral wrapper (ID
// firewall). A BRAM stands in for the peripheral. Checks: all requests
// blocked while unclaimed; ID field written and read over the configuration
// port; matching IDs pass, mismatching core / process / peripheral IDs get
// SLVERR without reaching the peripheral; zero process or peripheral ID acts
// as wildcard; a denied read burst returns len+1 error beats; interrupt
// routed by the owner's core ID; a non-configurable wrapper keeps its core and
// process ID; an allowed access takes exactly as many cycles as the same
// access without a wrapper.
module tb_periph_wrapper;
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

  // DUT 1: configurable wrapper in front of a BRAM
  axi_req_t  s_req, m_req, ref_req, f_req;
  axi_resp_t s_resp, m_resp, ref_resp, f_resp;
  axil_req_t cfg_req, fcfg_req;
  axil_resp_t cfg_resp, fcfg_resp;
  logic irq, irq_ree, irq_tee, claimed, deny, f_irq_ree, f_irq_tee, f_claimed, f_deny;
  hv_id_t id, f_id;
  axi_req_t  fm_req;
  axi_resp_t fm_resp;

  periph_wrapper dut (
    .clk, .rst_n, .s_axi_req_i (s_req), .s_axi_resp_o (s_resp),
    .m_axi_req_o (m_req), .m_axi_resp_i (m_resp),
    .s_cfg_req_i (cfg_req), .s_cfg_resp_o (cfg_resp),
    .irq_i (irq), .irq_ree_o (irq_ree), .irq_tee_o (irq_tee),
    .claimed_o (claimed), .id_o (id), .deny_o (deny)
  );
  axi4_bram #(.BYTES (1024)) u_mem (.clk, .rst_n, .s_req_i (m_req), .s_resp_o (m_resp));
  axi4_bram #(.BYTES (1024)) u_ref (.clk, .rst_n, .s_req_i (ref_req), .s_resp_o (ref_resp));

  // DUT 2: non-configurable wrapper, fixed to {TEE, process 2}
  periph_wrapper #(.CONFIGURABLE (1'b0), .FIXED_ID ('{core: 1'b1, proc: 4'd2, periph: 10'd0})) dut_fixed (
    .clk, .rst_n, .s_axi_req_i (f_req), .s_axi_resp_o (f_resp),
    .m_axi_req_o (fm_req), .m_axi_resp_i (fm_resp),
    .s_cfg_req_i (fcfg_req), .s_cfg_resp_o (fcfg_resp),
    .irq_i (irq), .irq_ree_o (f_irq_ree), .irq_tee_o (f_irq_tee),
    .claimed_o (f_claimed), .id_o (f_id), .deny_o (f_deny)
  );
  axi4_bram #(.BYTES (1024)) u_fmem (.clk, .rst_n, .s_req_i (fm_req), .s_resp_o (fm_resp));

  tb_axi_bfm  bfm   (.clk, .req_o (s_req),   .resp_i (s_resp));
  tb_axi_bfm  bref  (.clk, .req_o (ref_req), .resp_i (ref_resp));
  tb_axi_bfm  bfix  (.clk, .req_o (f_req),   .resp_i (f_resp));
  tb_axil_bfm cfg   (.clk, .req_o (cfg_req), .resp_i (cfg_resp));
  tb_axil_bfm fcfg  (.clk, .req_o (fcfg_req), .resp_i (fcfg_resp));

  // count what reaches the peripheral
  int periph_aw = 0, periph_ar = 0;
  always @(posedge clk) begin
    if (m_req.aw_valid && m_resp.aw_ready) periph_aw++;
    if (m_req.ar_valid && m_resp.ar_ready) periph_ar++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] r; logic [63:0] d, x; logic [31:0] d32; int beats, t0, t1, t2, t3;
    irq = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // unclaimed: everything blocked
    check(!claimed, "reset state unclaimed");
    bfm.write(32'h10, 64'hAAAA, U(0, 3, 5), 0, r);
    check(r == RESP_SLVERR, "unclaimed write -> SLVERR");
    bfm.read(32'h10, U(0, 3, 5), 3, d, x, r, beats);
    check(r == RESP_SLVERR && beats == 4, "unclaimed read burst -> 4 SLVERR beats");
    check(periph_aw == 0 && periph_ar == 0, "nothing reached the peripheral");

    // claim for {REE, process 3, periph 0 (wildcard)}
    cfg.write(32'h0, 32'h1_0000 | 32'(U(0, 3, 0)), 16'h0, r);
    check(r == RESP_OKAY, "config write OK");
    cfg.read(32'h0, 16'h0, d32, r);
    check(d32 == (32'h1_0000 | 32'(U(0, 3, 0))), "config read-back");
    check(claimed && id == '{core: 1'b0, proc: 4'd3, periph: 10'd0}, "ID field set");

    bfm.write(32'h10, 64'h1234_5678_9ABC_DEF0, U(0, 3, 5), 0, r);
    check(r == RESP_OKAY, "matching write OK");
    bfm.read(32'h10, U(0, 3, 77), 0, d, x, r, beats);
    check(r == RESP_OKAY && d == 64'h1234_5678_9ABC_DEF0, "matching read, periph wildcard");
    bfm.write(32'h10, 64'h5555, U(0, 4, 5), 0, r);
    check(r == RESP_SLVERR, "wrong process -> SLVERR");
    bfm.write(32'h10, 64'h5555, U(1, 3, 5), 0, r);
    check(r == RESP_SLVERR, "wrong core -> SLVERR");
    bfm.read(32'h10, U(0, 3, 5), 0, d, x, r, beats);
    check(d == 64'h1234_5678_9ABC_DEF0, "denied writes did not change memory");
    check(periph_aw == 1, "only the matching write reached the peripheral");

    // burst through the wrapper
    bfm.write(32'h40, 64'h100, U(0, 3, 5), 7, r);
    bfm.read(32'h40, U(0, 3, 5), 7, d, x, r, beats);
    check(r == RESP_OKAY && beats == 8 && d == 64'h100 && x == (64'h100^64'h101^64'h102^64'h103^64'h104^64'h105^64'h106^64'h107), "8-beat burst");

    // exact peripheral ID
    cfg.write(32'h0, 32'h1_0000 | 32'(U(0, 3, 7)), 16'h0, r);
    bfm.read(32'h10, U(0, 3, 5), 0, d, x, r, beats);
    check(r == RESP_SLVERR, "wrong peripheral ID -> SLVERR");
    bfm.read(32'h10, U(0, 3, 7), 0, d, x, r, beats);
    check(r == RESP_OKAY, "right peripheral ID -> OKAY");
    // process wildcard
    cfg.write(32'h0, 32'h1_0000 | 32'(U(0, 0, 0)), 16'h0, r);
    bfm.read(32'h10, U(0, 9, 1), 0, d, x, r, beats);
    check(r == RESP_OKAY, "process wildcard: any REE process");

    // interrupt routing
    irq = 1'b1; @(negedge clk);
    check(irq_ree && !irq_tee, "IRQ to REE owner");
    cfg.write(32'h0, 32'h1_0000 | 32'(U(1, 2, 0)), 16'h0, r);
    @(negedge clk);
    check(!irq_ree && irq_tee, "IRQ to TEE owner");
    cfg.write(32'h0, 32'h0, 16'h0, r);
    @(negedge clk);
    check(!irq_ree && !irq_tee && !claimed, "released: IRQ dropped");
    irq = 1'b0;

    // latency: wrapper adds no cycle to an allowed access
    cfg.write(32'h0, 32'h1_0000 | 32'(U(0, 3, 0)), 16'h0, r);
    t0 = $time; bfm.read(32'h18, U(0, 3, 0), 0, d, x, r, beats); t1 = $time;
    t2 = $time; bref.read(32'h18, U(0, 3, 0), 0, d, x, r, beats); t3 = $time;
    check((t1 - t0) == (t3 - t2), "read latency equals unwrapped BRAM");
    t0 = $time; bfm.write(32'h18, 64'h1, U(0, 3, 0), 0, r); t1 = $time;
    t2 = $time; bref.write(32'h18, 64'h1, U(0, 3, 0), 0, r); t3 = $time;
    check((t1 - t0) == (t3 - t2), "write latency equals unwrapped BRAM");

    // non-configurable wrapper
    check(f_claimed, "fixed wrapper always claimed");
    bfix.write(32'h8, 64'h77, U(1, 2, 123), 0, r);
    check(r == RESP_OKAY, "fixed: owner with any CFI state (periph 0)");
    bfix.write(32'h8, 64'h77, U(1, 3, 0), 0, r);
    check(r == RESP_SLVERR, "fixed: other virtual core denied");
    bfix.read(32'h8, U(0, 2, 0), 0, d, x, r, beats);
    check(r == RESP_SLVERR, "fixed: REE denied");
    fcfg.write(32'h0, 32'h1_0000 | 32'(U(0, 5, 9)), 16'h0, r);
    check(f_id == '{core: 1'b1, proc: 4'd2, periph: 10'd9}, "fixed: only periph ID written");
    bfix.read(32'h8, U(1, 2, 123), 0, d, x, r, beats);
    check(r == RESP_SLVERR, "fixed: wrong CFI state denied");
    bfix.read(32'h8, U(1, 2, 9), 0, d, x, r, beats);
    check(r == RESP_OKAY && d == 64'h77, "fixed: right CFI state allowed");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
