// hw_scheduler: the RVSCP hardware scheduling unit, which gives the secure
// processor NUM_VC virtual cores (VC0..VC3 in the paper) without an operating
// system.
//
// Round robin: each virtual core runs for TIME_SLICE cycles, then the
// scheduler asks the core to stop (halt_req_o) and waits until the core
// reports that its pipeline is empty and no bus transfer is open (halted_i).
// It then saves the program counter and the SCFP state of the running virtual
// core into that core's slot, advances to the next slot and presents that
// slot's saved PC and state with load_o for one cycle. In that same cycle the
// register-file bank (vc_o), the SCFP key (key_o) and the process ID used on
// the bus (proc_id_o) switch to the new virtual core; the next cycle the core
// runs again. Halt-to-resume therefore takes two cycles. After reset the
// scheduler starts with a load of VC0 at BOOT_PC[0].
//
// Each slot has a key register (the paper's per-VC key CSR). A key write
// (key_we_i) always lands in the slot that is running, so a virtual core can
// set only its own key, and no port reads back a key except through key_o to
// the decryption stage.
//
// From the paper: round robin, fixed time slice, saving and loading SCFP state
// and register file, per-VC key, per-VC process ID. This RTL's choices: the
// slice length, the halt handshake, 128-bit state and key, the boot PCs and
// process IDs 1..4 (zero is the wildcard value of a stored ID, so no virtual
// core may use it).
module hw_scheduler
  import hv_pkg::*;
#(
  parameter int unsigned NUM_VC     = 4,
  parameter int unsigned TIME_SLICE = 1000,
  parameter int unsigned PC_W       = 32,
  parameter int unsigned STATE_W    = 128,
  parameter int unsigned KEY_W      = 128,
  parameter logic [NUM_VC-1:0][PC_W-1:0]      BOOT_PC  = {32'h4302_0000, 32'h4301_0000, 32'h4300_0000, 32'h4400_0000},
  parameter logic [NUM_VC-1:0][PROC_ID_W-1:0] PROC_IDS = {4'd4, 4'd3, 4'd2, 4'd1}
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // pipeline control
  output logic                      halt_req_o,
  input  logic                      halted_i,
  input  logic [PC_W-1:0]           cur_pc_i,
  input  logic [STATE_W-1:0]        cur_state_i,
  output logic                      load_o,
  output logic [PC_W-1:0]           load_pc_o,
  output logic [STATE_W-1:0]        load_state_o,
  // per-VC resources
  output logic [$clog2(NUM_VC)-1:0] vc_o,
  output logic [PROC_ID_W-1:0]      proc_id_o,
  output logic [KEY_W-1:0]          key_o,
  input  logic                      key_we_i,
  input  logic [KEY_W-1:0]          key_wdata_i,
  output logic                      switch_o   // pulses on every context switch
);
  localparam int unsigned VW = $clog2(NUM_VC);
  localparam int unsigned CW = $clog2(TIME_SLICE + 1);

  typedef enum logic [1:0] {S_LOAD, S_RUN, S_HALT} state_e;
  state_e          state_q;
  logic [VW-1:0]   vc_q;
  logic [CW-1:0]   cnt_q;
  logic [PC_W-1:0]    pc_q    [NUM_VC];
  logic [STATE_W-1:0] scfp_q  [NUM_VC];
  logic [KEY_W-1:0]   key_q   [NUM_VC];

  logic [VW-1:0] vc_next;
  assign vc_next = (vc_q == VW'(NUM_VC - 1)) ? '0 : vc_q + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_LOAD;
      vc_q     <= '0;
      cnt_q    <= '0;
      switch_o <= 1'b0;
      for (int i = 0; i < NUM_VC; i++) begin
        pc_q[i]   <= BOOT_PC[i];
        scfp_q[i] <= '0;
        key_q[i]  <= '0;
      end
    end else begin
      switch_o <= 1'b0;
      unique case (state_q)
        S_LOAD: begin
          cnt_q   <= '0;
          state_q <= S_RUN;
        end
        S_RUN: begin
          if (key_we_i) key_q[vc_q] <= key_wdata_i;
          if (cnt_q == CW'(TIME_SLICE - 1)) state_q <= S_HALT;
          else cnt_q <= cnt_q + 1'b1;
        end
        S_HALT: if (halted_i) begin
          pc_q[vc_q]   <= cur_pc_i;
          scfp_q[vc_q] <= cur_state_i;
          vc_q         <= vc_next;
          switch_o     <= 1'b1;
          state_q      <= S_LOAD;
        end
        default: state_q <= S_LOAD;
      endcase
    end
  end

  assign halt_req_o   = (state_q != S_RUN);
  assign load_o       = (state_q == S_LOAD);
  assign load_pc_o    = pc_q[vc_q];
  assign load_state_o = scfp_q[vc_q];
  assign vc_o         = vc_q;
  assign proc_id_o    = PROC_IDS[vc_q];
  assign key_o        = key_q[vc_q];
endmodule
