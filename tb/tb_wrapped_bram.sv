// tb_wrapped_bram: self-checking test of a block RAM behind a peripheral
// wrapper, in both variants. The configurable variant (code BRAM) is claimed
// and released through its configuration port and admits only the claimer.
// The fixed variant (secure BRAM of one virtual core) admits only its fixed
// core and process ID together with the peripheral ID written last, which is
// how the compressed CFI state selects which code may touch it.
module tb_wrapped_bram;
  import hv_pkg::*;
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

  axi_req_t   req [2];
  axi_resp_t  resp [2];
  axil_req_t  creq [2];
  axil_resp_t cresp [2];
  logic       claimed [2], deny [2];
  hv_id_t     id [2];

  wrapped_bram #(.BYTES (1024)) u_cfg (
    .clk, .rst_n, .s_axi_req_i (req[0]), .s_axi_resp_o (resp[0]), .s_cfg_req_i (creq[0]), .s_cfg_resp_o (cresp[0]),
    .claimed_o (claimed[0]), .id_o (id[0]), .deny_o (deny[0]));
  wrapped_bram #(.BYTES (1024), .CONFIGURABLE (1'b0), .FIXED_ID ('{core: 1'b1, proc: 4'd3, periph: 10'd0})) u_fix (
    .clk, .rst_n, .s_axi_req_i (req[1]), .s_axi_resp_o (resp[1]), .s_cfg_req_i (creq[1]), .s_cfg_resp_o (cresp[1]),
    .claimed_o (claimed[1]), .id_o (id[1]), .deny_o (deny[1]));
  tb_axi_bfm  b0 (.clk, .req_o (req[0]), .resp_i (resp[0]));
  tb_axi_bfm  b1 (.clk, .req_o (req[1]), .resp_i (resp[1]));
  tb_axil_bfm c0 (.clk, .req_o (creq[0]), .resp_i (cresp[0]));
  tb_axil_bfm c1 (.clk, .req_o (creq[1]), .resp_i (cresp[1]));

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
    // configurable: unclaimed at reset
    check(!claimed[0], "configurable BRAM unclaimed at reset");
    b0.write(32'h0, 64'h11, U(0, 1, 0), 0, r);
    check(r == RESP_SLVERR, "unclaimed BRAM refuses writes");
    c0.write(32'h0, 32'h1_0000 | 32'({1'b0, 4'd2, 10'd0}), 16'h0, r);
    b0.write(32'h0, 64'h11, U(0, 2, 3), 1, r);
    check(r == RESP_OKAY, "claimer writes");
    b0.read(32'h8, U(0, 2, 0), 0, d, x, r, beats);
    check(r == RESP_OKAY && d == 64'h12, "claimer reads");
    b0.read(32'h8, U(1, 2, 0), 0, d, x, r, beats);
    check(r == RESP_SLVERR && deny[0] == 1'b0, "other core refused");
    c0.write(32'h0, 32'h0, 16'h0, r);
    b0.read(32'h8, U(0, 2, 0), 0, d, x, r, beats);
    check(r == RESP_SLVERR, "released BRAM refuses the former owner");
    // fixed: always claimed by TEE process 3
    check(claimed[1] && id[1].core == 1'b1 && id[1].proc == 4'd3, "fixed BRAM bound to TEE process 3");
    b1.write(32'h10, 64'h99, U(1, 3, 44), 0, r);
    check(r == RESP_OKAY, "owning VC writes (periph wildcard at reset)");
    c1.write(32'h0, 32'h1_0000 | 32'({1'b0, 4'd9, 10'd77}), 16'h0, r);
    check(id[1].core == 1'b1 && id[1].proc == 4'd3 && id[1].periph == 10'd77, "only the peripheral ID part is writable");
    b1.read(32'h10, U(1, 3, 77), 0, d, x, r, beats);
    check(r == RESP_OKAY && d == 64'h99, "matching CFI state reads");
    b1.read(32'h10, U(1, 3, 78), 0, d, x, r, beats);
    check(r == RESP_SLVERR, "other CFI state refused");
    b1.read(32'h10, U(1, 2, 77), 0, d, x, r, beats);
    check(r == RESP_SLVERR, "other virtual core refused");
    b1.read(32'h10, U(0, 3, 77), 0, d, x, r, beats);
    check(r == RESP_SLVERR, "REE refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
