// tb_axi4_xbar: self-checking test of the AXI4 crossbar with two masters and
// three BRAM slaves (one slave reached through two address rules). Checks
// routing of writes and reads, transport of the 16-bit user ID to the slave,
// DECERR for unmapped addresses (write and read burst), parallel traffic to
// different slaves, contention on one slave with round-robin alternation,
// and data integrity throughout.
module tb_axi4_xbar;
  import hv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  axi_req_t  mreq [2];
  axi_resp_t mresp [2];
  axi_req_t  sreq [3];
  axi_resp_t sresp [3];
  logic decerr;

  axi4_xbar #(
    .NUM_M (2), .NUM_S (3), .NUM_RULES (4),
    .RULE_BASE ({32'h8000_0000, 32'h0000_3000, 32'h0000_2000, 32'h0000_1000}),
    .RULE_MASK ({32'h8000_0000, 32'hFFFF_F000, 32'hFFFF_F000, 32'hFFFF_F000}),
    .RULE_IDX  ({8'd2, 8'd2, 8'd1, 8'd0})
  ) dut (.clk, .rst_n, .s_req_i (mreq), .s_resp_o (mresp), .m_req_o (sreq), .m_resp_i (sresp), .decerr_o (decerr));

  for (genvar s = 0; s < 3; s++) begin : g_s
    axi4_bram #(.BYTES (1024)) u_m (.clk, .rst_n, .s_req_i (sreq[s]), .s_resp_o (sresp[s]));
  end
  tb_axi_bfm m0 (.clk, .req_o (mreq[0]), .resp_i (mresp[0]));
  tb_axi_bfm m1 (.clk, .req_o (mreq[1]), .resp_i (mresp[1]));

  // user ID seen by each slave, and which master got each slave-2 grant
  logic [15:0] seen_user [3];
  int grants [2];
  int order [$];
  for (genvar s = 0; s < 3; s++) begin : g_mon
    always @(posedge clk) if (sreq[s].aw_valid && sresp[s].aw_ready) seen_user[s] <= sreq[s].aw.user;
  end
  always @(posedge clk) begin
    if (sreq[2].aw_valid && sresp[2].aw_ready) order.push_back(int'(sreq[2].aw.user));
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] r, r1; logic [63:0] d, x, d1, x1; int beats, beats1; int alt;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    m0.write(32'h1010, 64'hA0, 16'h1234, 0, r);
    check(r == RESP_OKAY && seen_user[0] == 16'h1234, "M0 -> S0 write, user carried");
    m1.write(32'h2010, 64'hB0, 16'h4321, 0, r);
    check(r == RESP_OKAY && seen_user[1] == 16'h4321, "M1 -> S1 write, user carried");
    m1.read(32'h1010, 16'h0, 0, d, x, r, beats);
    check(r == RESP_OKAY && d == 64'hA0, "M1 reads what M0 wrote in S0");
    m0.read(32'h2010, 16'h0, 0, d, x, r, beats);
    check(r == RESP_OKAY && d == 64'hB0, "M0 reads S1");
    m0.write(32'h8000_0020, 64'hC0, 16'h7, 3, r);
    m1.read(32'h3020, 16'h0, 3, d, x, r, beats);
    check(r == RESP_OKAY && beats == 4 && d == 64'hC0 && x == (64'hC0 ^ 64'hC1 ^ 64'hC2 ^ 64'hC3),
          "two rules reach S2, burst");

    m0.write(32'h5000, 64'h1, 16'h0, 1, r);
    check(r == RESP_DECERR, "unmapped write -> DECERR");
    m1.read(32'h5000, 16'h0, 2, d, x, r, beats);
    check(r == RESP_DECERR && beats == 3, "unmapped read burst -> 3 DECERR beats");

    // parallel: different slaves
    fork
      m0.write(32'h1100, 64'h11, 16'h0, 7, r);
      m1.write(32'h2100, 64'h22, 16'h0, 7, r1);
    join
    check(r == RESP_OKAY && r1 == RESP_OKAY, "parallel writes to different slaves");
    fork
      m0.read(32'h2100, 16'h0, 7, d, x, r, beats);
      m1.read(32'h1100, 16'h0, 7, d1, x1, r1, beats1);
    join
    check(d == 64'h22 && d1 == 64'h11 && beats == 8 && beats1 == 8, "parallel reads");

    // contention on S2: alternating grants
    order.delete();
    for (int i = 0; i < 4; i++) begin
      fork
        m0.write(32'h3200 + 32'(16 * i), 64'h100 + 64'(i), 16'h0, 1, r);   // user 0 marks M0
        m1.write(32'h3300 + 32'(16 * i), 64'h200 + 64'(i), 16'h1, 1, r1);  // user 1 marks M1
      join
      check(r == RESP_OKAY && r1 == RESP_OKAY, "contended writes complete");
    end
    alt = 0;
    for (int i = 1; i < order.size(); i++) if (order[i] != order[i-1]) alt++;
    check(order.size() == 8 && alt >= 6, $sformatf("round robin alternates (%0d changes)", alt));
    for (int i = 0; i < 4; i++) begin
      m1.read(32'h3200 + 32'(16 * i), 16'h0, 0, d, x, r, beats);
      m0.read(32'h3300 + 32'(16 * i), 16'h0, 0, d1, x1, r1, beats1);
      check(d == 64'h100 + 64'(i) && d1 == 64'h200 + 64'(i), "contended data intact");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
