// tb_banked_regfile: self-checking test of the banked register file. Writes
// random values to random registers of random banks against a reference model
// and checks both read ports, that x0 reads zero in every bank, and that a
// write to one bank never changes another bank.
module tb_banked_regfile;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [1:0] bank;
  logic [4:0] ra, rb, wa;
  logic [31:0] da, db, wd;
  logic we;
  banked_regfile dut (.clk, .rst_n, .bank_i (bank), .raddr_a_i (ra), .rdata_a_o (da),
                      .raddr_b_i (rb), .rdata_b_o (db), .we_i (we), .waddr_i (wa), .wdata_i (wd));
  logic [31:0] model [4][32];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bank = 0; ra = 0; rb = 0; wa = 0; wd = 0; we = 0;
    for (int b = 0; b < 4; b++) for (int i = 0; i < 32; i++) model[b][i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      bank = 2'($urandom); wa = 5'($urandom); wd = $urandom; we = 1'b1;
      if (wa != 0) model[bank][wa] = wd;
      @(negedge clk);
      we = 1'b0;
      bank = 2'($urandom); ra = 5'($urandom); rb = 5'($urandom);
      #1;
      check(da == model[bank][ra] && db == model[bank][rb], $sformatf("read bank %0d x%0d x%0d", bank, ra, rb));
    end
    for (int b = 0; b < 4; b++) begin
      @(negedge clk); bank = 2'(b); ra = 0; rb = 0; #1;
      check(da == 0 && db == 0, "x0 reads zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
