// tb_axil_xbar: self-checking test of the AXI4-lite configuration crossbar.
// Three peripheral-wrapper configuration ports are the slaves. Checks that
// each write lands in exactly the addressed wrapper, that reads return the
// addressed register, that the user signal is passed on, and that unmapped
// addresses get DECERR on write and read.
module tb_axil_xbar;
  import hv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  axil_req_t  req;
  axil_resp_t resp;
  axil_req_t  sreq [3];
  axil_resp_t sresp [3];
  hv_id_t     wid [3];
  logic       wcl [3];
  logic [15:0] seen_user [3];

  axil_xbar #(.NUM_S (3), .SLV_BASE ({32'h200, 32'h100, 32'h000}), .SLV_MASK (32'hFFFF_FF00)) dut (
    .clk, .rst_n, .s_req_i (req), .s_resp_o (resp), .m_req_o (sreq), .m_resp_i (sresp)
  );
  for (genvar k = 0; k < 3; k++) begin : g_w
    axi_req_t m_unused; axi_resp_t s_unused; logic a, b, dn;
    periph_wrapper u_w (
      .clk, .rst_n, .s_axi_req_i ('0), .s_axi_resp_o (s_unused),
      .m_axi_req_o (m_unused), .m_axi_resp_i ('0),
      .s_cfg_req_i (sreq[k]), .s_cfg_resp_o (sresp[k]),
      .irq_i (1'b0), .irq_ree_o (a), .irq_tee_o (b),
      .claimed_o (wcl[k]), .id_o (wid[k]), .deny_o (dn)
    );
    always @(posedge clk) if (sreq[k].aw_valid && sresp[k].aw_ready) seen_user[k] <= sreq[k].aw.user;
  end
  tb_axil_bfm bfm (.clk, .req_o (req), .resp_i (resp));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] r; logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 3; k++) begin
      bfm.write(32'(k) * 32'h100, 32'h1_0000 | 32'(16'h1000 + k), 16'(16'h50 + k), r);
      check(r == RESP_OKAY, "write OK");
      check(wcl[k] && wid[k] == hv_id_t'(15'h1000 + k), $sformatf("write landed in wrapper %0d", k));
      check(seen_user[k] == 16'(16'h50 + k), "user passed on");
      for (int j = 0; j < 3; j++)
        if (j > k) check(!wcl[j], "other wrappers untouched");
    end
    for (int k = 2; k >= 0; k--) begin
      bfm.read(32'(k) * 32'h100, 16'h0, d, r);
      check(r == RESP_OKAY && d == (32'h1_0000 | 32'(16'h1000 + k)), $sformatf("read wrapper %0d", k));
    end
    bfm.write(32'h400, 32'h1, 16'h0, r);
    check(r == RESP_DECERR, "unmapped write -> DECERR");
    bfm.read(32'h500, 16'h0, d, r);
    check(r == RESP_DECERR, "unmapped read -> DECERR");
    bfm.write(32'h100, 32'h0, 16'h0, r);
    check(!wcl[1] && wcl[0] && wcl[2], "clear one wrapper");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
