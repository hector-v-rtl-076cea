// tb_reset_unit: self-checking test of the reset unit. Checks the power-on
// state (AP held in reset, TEE running), that writing the control register
// releases and re-holds each reset line independently, that the register
// reads back, and that the outputs follow the global reset.
module tb_reset_unit;
  import hv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  axi_req_t  req;
  axi_resp_t resp;
  logic ap_rst_n, tee_rst_n;
  reset_unit dut (.clk, .rst_n, .s_req_i (req), .s_resp_o (resp), .ap_rst_no (ap_rst_n), .tee_rst_no (tee_rst_n));
  tb_axi_bfm bfm (.clk, .req_o (req), .resp_i (resp));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] r; logic [63:0] d, x; int beats;
    repeat (3) @(posedge clk);
    check(!ap_rst_n && !tee_rst_n, "both in reset during global reset");
    rst_n = 1'b1;
    @(posedge clk);
    check(!ap_rst_n && tee_rst_n, "after power-on: AP held, TEE running");
    bfm.read(32'h0, 16'h0, 0, d, x, r, beats);
    check(r == RESP_OKAY && d[1:0] == 2'b01, "control register reads 01");
    bfm.write(32'h0, 64'h0, 16'h0, 0, r);
    @(posedge clk);
    check(ap_rst_n && tee_rst_n, "AP released");
    bfm.write(32'h0, 64'h2, 16'h0, 0, r);
    @(posedge clk);
    check(ap_rst_n && !tee_rst_n, "TEE held, AP running");
    bfm.read(32'h0, 16'h0, 0, d, x, r, beats);
    check(d[1:0] == 2'b10, "control register reads 10");
    for (int n = 0; n < 8; n++) begin
      automatic logic [1:0] v = 2'($urandom);
      bfm.write(32'h0, 64'(v), 16'h0, 0, r);
      @(posedge clk);
      check(ap_rst_n == !v[0] && tee_rst_n == !v[1], "random control value");
    end
    rst_n = 1'b0;
    #1 check(!ap_rst_n && !tee_rst_n, "global reset asserts both");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
