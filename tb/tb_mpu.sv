// tb_mpu: self-checking test of the memory protection unit with a small
// block RAM as the memory behind it. Checks that nothing reaches memory
// before regions are set up, that only the party holding the MPU's claim can
// program the region registers (and read them back), that an exclusive region
// admits only its owner, that a shared region admits both parties, that a
// burst running past a region's limit or an address outside every region is
// refused with SLVERR, and that refused writes leave memory unchanged.
module tb_mpu;
  import hv_pkg::*;
  localparam logic [31:0] RB = 32'h4600_0000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] U(input int c, input int p, input int q);
    return {1'b0, 1'(c), 4'(p), 10'(q)};
  endfunction

  axi_req_t   req, mreq;
  axi_resp_t  resp, mresp;
  axil_req_t  creq;
  axil_resp_t cresp;
  logic claimed, deny;
  hv_id_t id;
  mpu #(.NUM_REGIONS (4)) dut (
    .clk, .rst_n, .s_axi_req_i (req), .s_axi_resp_o (resp), .m_axi_req_o (mreq), .m_axi_resp_i (mresp),
    .s_cfg_req_i (creq), .s_cfg_resp_o (cresp), .claimed_o (claimed), .id_o (id), .deny_o (deny)
  );
  axi4_bram #(.BYTES (4096)) u_mem (.clk, .rst_n, .s_req_i (mreq), .s_resp_o (mresp));
  tb_axi_bfm  bfm  (.clk, .req_o (req), .resp_i (resp));
  tb_axil_bfm cbfm (.clk, .req_o (creq), .resp_i (cresp));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] r; logic [63:0] d, x; int beats;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // no regions, not claimed
    bfm.write(32'h8000_0000, 64'h1, U(1, 1, 0), 0, r);
    check(r == RESP_SLVERR, "write before any region is refused");
    bfm.write(RB, 64'h8000_0000, U(1, 1, 0), 0, r);
    check(r == RESP_SLVERR, "register write while unclaimed is refused");
    // the SM grants the MPU to the TEE process 1
    cbfm.write(32'h0, 32'h1_0000 | 32'({1'b1, 4'd1, 10'd0}), U(1, 1, 0), r);
    check(claimed && id == hv_id_t'({1'b1, 4'd1, 10'd0}), "MPU claimed by TEE process 1");
    bfm.write(RB, 64'h8000_0000, U(0, 2, 0), 0, r);
    check(r == RESP_SLVERR, "REE cannot program regions");
    // region 0: 0x000-0x3FF, REE process 2 only
    bfm.write(RB + 32'h00, 64'h8000_0000, U(1, 1, 5), 0, r); check(r == RESP_OKAY, "region 0 base");
    bfm.write(RB + 32'h08, 64'h8000_03FF, U(1, 1, 5), 0, r); check(r == RESP_OKAY, "region 0 limit");
    bfm.write(RB + 32'h10, 64'(32'h0000_8000 | 32'({1'b0, 4'd2, 10'd0})), U(1, 1, 5), 0, r);
    // region 1: 0x400-0x7FF, shared by every REE process and every TEE process
    bfm.write(RB + 32'h20, 64'h8000_0400, U(1, 1, 0), 0, r);
    bfm.write(RB + 32'h28, 64'h8000_07FF, U(1, 1, 0), 0, r);
    bfm.write(RB + 32'h30, 64'({1'b1, 1'b1, 14'd0, 1'b1, 15'd0}), U(1, 1, 0), 0, r);
    check(r == RESP_OKAY, "region 1 ACL");
    bfm.read(RB + 32'h28, U(1, 1, 0), 0, d, x, r, beats);
    check(r == RESP_OKAY && d[31:0] == 32'h8000_07FF, "region register reads back");
    bfm.read(RB + 32'h28, U(0, 2, 0), 0, d, x, r, beats);
    check(r == RESP_SLVERR, "REE cannot read region registers");
    // exclusive region
    bfm.write(32'h8000_0100, 64'hA0, U(0, 2, 0), 3, r);
    check(r == RESP_OKAY, "owner writes its region");
    bfm.read(32'h8000_0100, U(0, 2, 7), 3, d, x, r, beats);
    check(r == RESP_OKAY && d == 64'hA0 && beats == 4, "owner reads its region (any peripheral ID)");
    bfm.write(32'h8000_0100, 64'hBAD, U(0, 3, 0), 0, r);
    check(r == RESP_SLVERR, "other REE process refused");
    bfm.read(32'h8000_0100, U(1, 1, 0), 0, d, x, r, beats);
    check(r == RESP_SLVERR, "TEE refused in REE-exclusive region");
    bfm.read(32'h8000_0100, U(0, 2, 0), 0, d, x, r, beats);
    check(d == 64'hA0, "refused write left memory unchanged");
    // burst past the limit
    bfm.write(32'h8000_03F8, 64'h77, U(0, 2, 0), 1, r);
    check(r == RESP_SLVERR, "burst crossing the region limit refused");
    bfm.read(32'h8000_03F8, U(0, 2, 0), 1, d, x, r, beats);
    check(r == RESP_SLVERR && beats == 2, "read burst crossing the limit: SLVERR on every beat");
    // shared region
    bfm.write(32'h8000_0400, 64'h5000, U(0, 9, 0), 7, r);
    check(r == RESP_OKAY, "REE writes shared buffer");
    bfm.read(32'h8000_0400, U(1, 3, 0), 7, d, x, r, beats);
    check(r == RESP_OKAY && d == 64'h5000 && beats == 8, "TEE reads shared buffer");
    // outside every region
    bfm.read(32'h8000_0800, U(1, 1, 0), 0, d, x, r, beats);
    check(r == RESP_SLVERR, "outside all regions refused");
    // disable region 1, shared buffer gone
    bfm.write(RB + 32'h30, 64'h0, U(1, 1, 0), 0, r);
    bfm.read(32'h8000_0400, U(0, 9, 0), 0, d, x, r, beats);
    check(r == RESP_SLVERR, "disabled region refused");
    // release the MPU: nobody may program it
    cbfm.write(32'h0, 32'h0, U(1, 1, 0), r);
    bfm.write(RB, 64'h0, U(1, 1, 0), 0, r);
    check(r == RESP_SLVERR, "register window closed after release");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
