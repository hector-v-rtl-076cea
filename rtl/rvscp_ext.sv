// rvscp_ext: the HECTOR-V extensions of the RVSCP secure processor, i.e.
// everything the paper adds around the REMUS core (an RV32 RI5CY derivative
// with a sponge-based control-flow-integrity decryption stage, SCFP).
//
// It contains the hardware scheduler, the four-bank register file and the
// TEE bus interface. The bus interface stamps every AXI4 / AXI4-lite request
// with core ID = TEE, process ID = that of the running virtual core, and as
// peripheral ID a 10-bit compression of the current SCFP state. A trustlet
// that reaches a predefined state S_SE only through its access function (the
// paper's write_se example) can therefore claim a peripheral with that
// compressed state as peripheral ID, and the peripheral wrapper will refuse
// any access made from any other state. The paper does not say how the state
// is compressed; here it is the XOR of its 10-bit slices (cfi_compress).
//
// The core pipeline itself, with the SCFP decryption stage, is not part of
// this module: its connections (halt handshake, PC and state save/load, key,
// register-file ports, bus ports) are the ports below. Timing: the bus
// interface is combinational; see hw_scheduler and banked_regfile.
module rvscp_ext
  import hv_pkg::*;
#(
  parameter int unsigned NUM_VC     = 4,
  parameter int unsigned TIME_SLICE = 1000,
  parameter int unsigned STATE_W    = 128,
  parameter int unsigned KEY_W      = 128
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // core pipeline <-> scheduler
  output logic                      halt_req_o,
  input  logic                      halted_i,
  input  logic [31:0]               cur_pc_i,
  input  logic [STATE_W-1:0]        cur_state_i,
  output logic                      load_o,
  output logic [31:0]               load_pc_o,
  output logic [STATE_W-1:0]        load_state_o,
  output logic [KEY_W-1:0]          key_o,
  input  logic                      key_we_i,
  input  logic [KEY_W-1:0]          key_wdata_i,
  output logic [$clog2(NUM_VC)-1:0] vc_o,
  output logic                      switch_o,
  // core pipeline <-> register file
  input  logic [4:0]                rf_raddr_a_i,
  output logic [31:0]               rf_rdata_a_o,
  input  logic [4:0]                rf_raddr_b_i,
  output logic [31:0]               rf_rdata_b_o,
  input  logic                      rf_we_i,
  input  logic [4:0]                rf_waddr_i,
  input  logic [31:0]               rf_wdata_i,
  // core bus ports
  input  axi_req_t                  core_axi_req_i,
  output axi_resp_t                 core_axi_resp_o,
  input  axil_req_t                 core_axil_req_i,
  output axil_resp_t                core_axil_resp_o,
  // to the SoC: AXI4 master (2) and AXI4-lite master to the SM (B)
  output axi_req_t                  m_axi_req_o,
  input  axi_resp_t                 m_axi_resp_i,
  output axil_req_t                 m_axil_req_o,
  input  axil_resp_t                m_axil_resp_i,
  output hv_id_t                    id_o
);
  logic [PROC_ID_W-1:0] proc_id;
  logic [$clog2(NUM_VC)-1:0] vc;

  hw_scheduler #(
    .NUM_VC (NUM_VC), .TIME_SLICE (TIME_SLICE), .PC_W (32),
    .STATE_W (STATE_W), .KEY_W (KEY_W)
  ) u_sched (
    .clk, .rst_n,
    .halt_req_o, .halted_i, .cur_pc_i, .cur_state_i,
    .load_o, .load_pc_o, .load_state_o,
    .vc_o (vc), .proc_id_o (proc_id), .key_o, .key_we_i, .key_wdata_i,
    .switch_o
  );
  assign vc_o = vc;

  banked_regfile #(.NUM_BANKS (NUM_VC), .XLEN (32)) u_rf (
    .clk, .rst_n, .bank_i (vc),
    .raddr_a_i (rf_raddr_a_i), .rdata_a_o (rf_rdata_a_o),
    .raddr_b_i (rf_raddr_b_i), .rdata_b_o (rf_rdata_b_o),
    .we_i (rf_we_i), .waddr_i (rf_waddr_i), .wdata_i (rf_wdata_i)
  );

  // compressed CFI state: XOR of the 10-bit slices of the SCFP state
  function automatic logic [PERIPH_ID_W-1:0] cfi_compress(logic [STATE_W-1:0] st);
    logic [PERIPH_ID_W-1:0] c;
    c = '0;
    for (int i = 0; i < STATE_W; i++) c[i % PERIPH_ID_W] ^= st[i];
    return c;
  endfunction

  logic [PERIPH_ID_W-1:0] periph_id;
  assign periph_id = cfi_compress(cur_state_i);

  id_stamp #(.CORE_ID (CORE_TEE)) u_stamp (
    .proc_i (proc_id), .periph_i (periph_id),
    .s_axi_req_i (core_axi_req_i), .s_axi_resp_o (core_axi_resp_o),
    .s_axil_req_i (core_axil_req_i), .s_axil_resp_o (core_axil_resp_o),
    .m_axi_req_o, .m_axi_resp_i, .m_axil_req_o, .m_axil_resp_i
  );
  assign id_o = '{core: CORE_TEE, proc: proc_id, periph: periph_id};
endmodule
