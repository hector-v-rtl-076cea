// tb_hw_scheduler: self-checking test of the RVSCP hardware scheduler with a
// short time slice. A small core model counts its PC up while running, stops
// when asked (halted = halt request, i.e. the pipeline drains at once) and
// loads PC and state when told. Checks the round-robin order of the virtual
// cores, the slice length, the two-cycle halt-to-resume switch, that each
// virtual core resumes exactly where it stopped (PC and state), the boot
// PCs, the per-core process IDs, and that keys written by one virtual core
// are invisible to the others.
module tb_hw_scheduler;
  import hv_pkg::*;
  localparam int TS = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic halt_req, load, key_we, sw;
  logic [31:0] load_pc, pc;
  logic [127:0] load_state, st, key, key_wd;
  logic [1:0] vc;
  logic [3:0] pid;
  hw_scheduler #(.TIME_SLICE (TS)) dut (
    .clk, .rst_n, .halt_req_o (halt_req), .halted_i (halt_req), .cur_pc_i (pc), .cur_state_i (st),
    .load_o (load), .load_pc_o (load_pc), .load_state_o (load_state),
    .vc_o (vc), .proc_id_o (pid), .key_o (key), .key_we_i (key_we), .key_wdata_i (key_wd), .switch_o (sw)
  );

  // core model
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin pc <= '0; st <= '0; end
    else if (load) begin pc <= load_pc; st <= load_state; end
    else if (!halt_req) begin pc <= pc + 4; st <= st ^ {96'h0, pc}; end
  end

  logic [31:0] exp_pc [4];
  logic [127:0] exp_st [4];
  logic [127:0] keys [4];
  logic [31:0] boot [4] = '{32'h4400_0000, 32'h4300_0000, 32'h4301_0000, 32'h4302_0000};

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int run_cycles, t;
    key_we = 0; key_wd = '0;
    for (int i = 0; i < 4; i++) begin exp_pc[i] = boot[i]; exp_st[i] = '0; keys[i] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 12; s++) begin
      automatic int v = s % 4;
      // count the stopped cycles up to and including the load of the next VC
      t = 0;
      while (!load) begin @(negedge clk); t++; end
      t++;
      check(vc == 2'(v), $sformatf("slice %0d runs VC%0d", s, v));
      check(pid == 4'(v + 1), "process ID of the virtual core");
      check(load_pc == exp_pc[v] && load_state == exp_st[v], $sformatf("VC%0d resumes where it stopped", v));
      if (s > 0) check(t == 2, $sformatf("halt-to-resume takes 2 cycles (%0d)", t));
      check(key == keys[v], "key of this virtual core");
      // run; write a fresh key in the middle of the slice
      run_cycles = 0;
      @(negedge clk);
      while (!halt_req) begin
        key_we = (run_cycles == 3);
        if (key_we) begin key_wd = {$urandom, $urandom, $urandom, $urandom}; keys[v] = key_wd; end
        @(negedge clk);
        key_we = 0;
        run_cycles++;
      end
      check(run_cycles == TS, $sformatf("slice length %0d", run_cycles));
      exp_pc[v] = pc; exp_st[v] = st;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
