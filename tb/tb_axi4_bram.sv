// tb_axi4_bram: self-checking test of the AXI4 block RAM. Writes and reads
// single beats and INCR / FIXED bursts with byte strobes against a reference
// array kept by the testbench, checks address wrap-around at the memory size,
// and checks the beat timing of axi4_slave_port: one cycle per write beat, two
// per read beat.
module tb_axi4_bram;
  import hv_pkg::*;
  localparam int BYTES = 2048;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  axi_req_t  req;
  axi_resp_t resp;
  axi4_bram #(.BYTES (BYTES)) dut (.clk, .rst_n, .s_req_i (req), .s_resp_o (resp));
  tb_axi_bfm bfm (.clk, .req_o (req), .resp_i (resp));

  logic [63:0] ref_mem [BYTES / 8];

  // cycles with a W or R beat handshake
  int wbeats = 0, rbeats = 0;
  always @(posedge clk) begin
    if (req.w_valid && resp.w_ready) wbeats++;
    if (resp.r_valid && req.r_ready) rbeats++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] r; logic [63:0] d, x, xe; int beats, t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // fill with random bursts, check back
    for (int n = 0; n < 20; n++) begin
      automatic int unsigned w = $urandom_range(0, BYTES / 8 - 1);
      automatic int unsigned len = $urandom_range(0, 15);
      automatic logic [63:0] base = {$urandom, $urandom};
      if (w + len >= BYTES / 8) w = BYTES / 8 - 1 - len;
      bfm.write(32'(w * 8), base, 16'h0, 8'(len), r);
      for (int i = 0; i <= int'(len); i++) ref_mem[w + i] = base + 64'(i);
      bfm.read(32'(w * 8), 16'h0, 8'(len), d, x, r, beats);
      xe = '0;
      for (int i = 0; i <= int'(len); i++) xe ^= ref_mem[w + i];
      check(r == RESP_OKAY && beats == int'(len) + 1 && d == ref_mem[w] && x == xe, "random burst");
    end
    // byte strobes
    bfm.write(32'h40, 64'h1111_2222_3333_4444, 16'h0, 0, r);
    @(negedge clk);
    req.aw = '{id: 0, addr: 32'h40, len: 0, size: 3, burst: BURST_INCR, user: 0}; req.aw_valid = 1;
    do @(posedge clk); while (!resp.aw_ready);
    @(negedge clk); req.aw_valid = 0;
    req.w = '{data: 64'hAAAA_BBBB_CCCC_DDDD, strb: 8'b0000_1111, last: 1}; req.w_valid = 1;
    do @(posedge clk); while (!resp.w_ready);
    @(negedge clk); req.w_valid = 0; req.b_ready = 1;
    do @(posedge clk); while (!resp.b_valid);
    @(negedge clk); req.b_ready = 0;
    bfm.read(32'h40, 16'h0, 0, d, x, r, beats);
    check(d == 64'h1111_2222_CCCC_DDDD, "byte strobes");
    // address wrap at the memory size
    bfm.write(32'h10, 64'h5A5A, 16'h0, 0, r);
    bfm.read(32'(BYTES) + 32'h10, 16'h0, 0, d, x, r, beats);
    check(d == 64'h5A5A, "address wraps modulo memory size");
    // timing of a 16-beat burst
    t0 = wbeats; bfm.write(32'h100, 64'h0, 16'h0, 15, r); t1 = wbeats;
    check(t1 - t0 == 16, "16 write beats");
    t0 = $time; bfm.read(32'h100, 16'h0, 15, d, x, r, beats); t1 = $time;
    check(beats == 16, "16 read beats");
    // read: AR handshake, then per beat one request cycle and one data cycle
    check((t1 - t0) / 10 >= 32 && (t1 - t0) / 10 <= 36, $sformatf("read burst took %0d cycles", (t1 - t0) / 10));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
