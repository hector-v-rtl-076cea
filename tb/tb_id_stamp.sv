// tb_id_stamp: self-checking test of the ID stamp. Drives random request and
// response bundles with random (forged) user values on both buses and checks
// that every user field leaving the stamp carries the hardware ID
// {CORE_ID, proc_i, periph_i}, while all other request and response bits pass
// through unchanged. Two instances check both core IDs.
module tb_id_stamp;
  import hv_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [PROC_ID_W-1:0] proc;
  logic [PERIPH_ID_W-1:0] periph;
  axi_req_t sa; axi_resp_t ra;
  axil_req_t sl; axil_resp_t rl;
  axi_req_t ma [2]; axi_resp_t sra [2];
  axil_req_t ml [2]; axil_resp_t srl [2];

  id_stamp #(.CORE_ID (CORE_REE)) u_ree (.proc_i (proc), .periph_i (periph),
    .s_axi_req_i (sa), .s_axi_resp_o (sra[0]), .s_axil_req_i (sl), .s_axil_resp_o (srl[0]),
    .m_axi_req_o (ma[0]), .m_axi_resp_i (ra), .m_axil_req_o (ml[0]), .m_axil_resp_i (rl));
  id_stamp #(.CORE_ID (CORE_TEE)) u_tee (.proc_i (proc), .periph_i (periph),
    .s_axi_req_i (sa), .s_axi_resp_o (sra[1]), .s_axil_req_i (sl), .s_axil_resp_o (srl[1]),
    .m_axi_req_o (ma[1]), .m_axi_resp_i (ra), .m_axil_req_o (ml[1]), .m_axil_resp_i (rl));

  function automatic logic [$bits(axi_req_t)-1:0] rnd_axi();
    logic [$bits(axi_req_t)-1:0] v;
    for (int i = 0; i < $bits(axi_req_t); i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      sa = axi_req_t'(rnd_axi());
      sl = axil_req_t'(rnd_axi());
      ra = axi_resp_t'(rnd_axi());
      rl = axil_resp_t'(rnd_axi());
      proc = 4'($urandom); periph = 10'($urandom);
      #1;
      for (int c = 0; c < 2; c++) begin
        automatic logic [15:0] exp = {1'b0, 1'(c), proc, periph};
        automatic axi_req_t  ea = sa;
        automatic axil_req_t el = sl;
        ea.aw.user = exp; ea.ar.user = exp;
        el.aw.user = exp; el.ar.user = exp;
        check(ma[c].aw.user == exp && ma[c].ar.user == exp, "AXI4 user stamped");
        check(ml[c].aw.user == exp && ml[c].ar.user == exp, "AXI4-lite user stamped");
        check(ma[c] == ea && ml[c] == el, "other request bits pass");
        check(sra[c] == ra && srl[c] == rl, "responses pass");
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
