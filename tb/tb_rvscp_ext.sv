// tb_rvscp_ext: self-checking test of the RVSCP extensions (scheduler,
// banked register file, CFI-derived ID, ID stamp) with a short time slice.
// A small core model drains at once when asked to halt, counts its PC and
// folds it into its SCFP state. Each virtual core writes its own number into
// register x5; the test checks that every virtual core always reads back its
// own value, that bus requests leaving the core carry {TEE, VC+1, folded CFI
// state} whatever user value the core drives, and that the virtual cores
// take turns.
module tb_rvscp_ext;
  import hv_pkg::*;
  localparam int TS = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic halt_req, load, sw, rf_we;
  logic [31:0] pc, load_pc, rda, rdb, rf_wd;
  logic [127:0] st, load_state, key;
  logic [1:0] vc;
  logic [4:0] rf_ra, rf_rb, rf_wa;
  axi_req_t  creq, mreq;
  axi_resp_t cresp;
  axil_req_t  clreq, mlreq;
  axil_resp_t clresp;
  hv_id_t id;

  rvscp_ext #(.TIME_SLICE (TS)) dut (
    .clk, .rst_n, .halt_req_o (halt_req), .halted_i (halt_req), .cur_pc_i (pc), .cur_state_i (st),
    .load_o (load), .load_pc_o (load_pc), .load_state_o (load_state), .key_o (key),
    .key_we_i (1'b0), .key_wdata_i ('0), .vc_o (vc), .switch_o (sw),
    .rf_raddr_a_i (rf_ra), .rf_rdata_a_o (rda), .rf_raddr_b_i (rf_rb), .rf_rdata_b_o (rdb),
    .rf_we_i (rf_we), .rf_waddr_i (rf_wa), .rf_wdata_i (rf_wd),
    .core_axi_req_i (creq), .core_axi_resp_o (cresp), .core_axil_req_i (clreq), .core_axil_resp_o (clresp),
    .m_axi_req_o (mreq), .m_axi_resp_i ('0), .m_axil_req_o (mlreq), .m_axil_resp_i ('0), .id_o (id)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin pc <= '0; st <= '0; end
    else if (load) begin pc <= load_pc; st <= load_state; end
    else if (!halt_req) begin pc <= pc + 4; st <= {st[95:0], pc}; end
  end

  function automatic logic [9:0] fold(logic [127:0] s);
    logic [9:0] c = '0;
    for (int i = 0; i < 128; i++) c[i % 10] ^= s[i];
    return c;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int switches = 0;
  always @(posedge clk) if (sw) switches++;

  initial begin
    logic [3:0] seen;
    rf_we = 0; rf_wa = 0; rf_wd = 0; rf_ra = 5; rf_rb = 0;
    creq = '0; clreq = '0;
    seen = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      rf_we = 1'b0;
      if (!halt_req) begin
        automatic logic [15:0] forged = 16'($urandom);
        // x5 holds this VC's own tag once it has run
        if (seen[vc]) check(rda == 32'hC0DE_0000 + 32'(vc), $sformatf("VC%0d reads its own x5", vc));
        check(rdb == 32'h0, "x0 reads zero");
        rf_we = 1'b1; rf_wa = 5'd5; rf_wd = 32'hC0DE_0000 + 32'(vc);
        seen[vc] = 1'b1;
        creq.aw.user = forged; creq.ar.user = ~forged; clreq.aw.user = forged; clreq.ar.user = forged;
        #1;
        check(mreq.aw.user == {1'b0, 1'b1, 4'(vc) + 4'd1, fold(st)} && mreq.ar.user == mreq.aw.user
              && mlreq.aw.user == mreq.aw.user && mlreq.ar.user == mreq.aw.user,
              "requests stamped with {TEE, VC+1, CFI}");
        check(id == user_to_id(mreq.aw.user[14:0]), "id_o matches the stamp");
      end
    end
    check(seen == 4'hF, "all four virtual cores ran");
    check(switches >= 16, $sformatf("context switches happened (%0d)", switches));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
