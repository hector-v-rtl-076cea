// hector_v_top: the HECTOR-V SoC fabric with the RVSCP extensions.
//
// Two processors share the SoC: the application processor (AP, Rocket, the
// rich execution environment REE) and the secure processor RVSCP (the TEE).
// Both reach all peripherals over one AXI4 crossbar, and every request carries
// a 15-bit identifier (core, process, peripheral ID) in the AXI user signal,
// stamped by the processors' bus interfaces. Each peripheral sits behind a
// wrapper that lets through only requests whose identifier matches its ID
// field. The ID fields are set only by the security monitor (SM), over a
// separate AXI4-lite bus that no processor can reach; the processors ask the
// SM to claim, release, query or withdraw peripherals over point-to-point
// AXI4-lite links. The SM owner (VC0 of the RVSCP after reset) configures who
// may claim what and can hand that privilege to another party.
//
// AXI4 address map (slave index: device, base, size; this RTL's choice):
//   0 reset unit 0x4000_0000 4 KiB        1 boot BRAM 0x4100_0000 64 KiB
//   2 UART 0x4200_0000   3 PS2 0x4201_0000   4 SD 0x4202_0000   5 SPI 0x4203_0000
//   6..8 claimable code BRAMs of VC1..VC3 0x4300_0000 + 64 KiB * i
//   9 secure code storage of VC0 0x4400_0000 64 KiB (fixed ID, no SM entry)
//   10..13 secure storage elements of VC0..VC3 0x4500_0000 + 4 KiB * i
//   14 MPU: register window 0x4600_0000 4 KiB and DDR3 0x8000_0000 2 GiB
// SM table / configuration-bus index k (wrapper at 0x100 * k):
//   0 reset unit, 1 boot BRAM, 2 UART, 3 PS2, 4 SD, 5 SPI,
//   6..8 code BRAMs VC1..VC3, 9 MPU, 10..13 secure storage VC0..VC3.
// Virtual core VCi of the RVSCP uses process ID i+1. After reset the RVSCP
// runs (VC0 boots from its secure code storage), the AP is held in reset, VC0
// is SM owner and has claimed the reset unit: the paper's secure boot state.
//
// Not inside this module (ports instead): the Rocket AP, the REMUS core
// pipeline with its SCFP decryption stage, the DDR3 controller, and the UART,
// PS2, SD and SPI controllers, all taken from other projects by the paper.
// The AP's process and peripheral ID, which the paper lets an entity choose
// itself, come in on ap_proc_id_i / ap_periph_id_i.
//
// Lint reports rst_n as used both asynchronously and synchronously. That
// stands on purpose: the flops use it as their asynchronous reset, and the
// only "synchronous" users are the bus-protocol assertions, which are
// disabled while it is low. The RVSCP's reset is rst_n gated by the reset
// unit's hold bit, so software can stop the secure core (paper, reset unit).
module hector_v_top
  import hv_pkg::*;
#(
  parameter int unsigned NUM_PERIPH       = 14,
  parameter int unsigned NUM_VC           = 4,
  parameter int unsigned TIME_SLICE       = 1000,
  parameter int unsigned WITHDRAW_TIMEOUT = 4096,
  parameter int unsigned CODE_BRAM_BYTES  = 65536,
  parameter int unsigned SECURE_BYTES     = 4096,
  parameter int unsigned MPU_REGIONS      = 16,
  parameter int unsigned STATE_W          = 128,
  parameter int unsigned KEY_W            = 128
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // ---------------- application processor (REE)
  input  axi_req_t                  ap_axi_req_i,
  output axi_resp_t                 ap_axi_resp_o,
  input  axil_req_t                 ap_axil_req_i,
  output axil_resp_t                ap_axil_resp_o,
  input  logic [PROC_ID_W-1:0]      ap_proc_id_i,
  input  logic [PERIPH_ID_W-1:0]    ap_periph_id_i,
  output logic                      ap_rst_no,
  output logic [NUM_PERIPH-1:0]     ap_sm_irq_o,       // withdraw notifications
  output logic [3:0]                ap_dev_irq_o,      // UART, PS2, SD, SPI
  // ---------------- RVSCP core pipeline (TEE)
  output logic                      tee_rst_no,
  output logic [NUM_PERIPH-1:0]     tee_sm_irq_o,
  output logic [3:0]                tee_dev_irq_o,
  input  axi_req_t                  tee_axi_req_i,
  output axi_resp_t                 tee_axi_resp_o,
  input  axil_req_t                 tee_axil_req_i,
  output axil_resp_t                tee_axil_resp_o,
  output logic                      tee_halt_req_o,
  input  logic                      tee_halted_i,
  input  logic [31:0]               tee_cur_pc_i,
  input  logic [STATE_W-1:0]        tee_cur_state_i,
  output logic                      tee_load_o,
  output logic [31:0]               tee_load_pc_o,
  output logic [STATE_W-1:0]        tee_load_state_o,
  output logic [KEY_W-1:0]          tee_key_o,
  input  logic                      tee_key_we_i,
  input  logic [KEY_W-1:0]          tee_key_wdata_i,
  output logic [$clog2(NUM_VC)-1:0] tee_vc_o,
  output logic                      tee_switch_o,
  input  logic [4:0]                tee_rf_raddr_a_i,
  output logic [31:0]               tee_rf_rdata_a_o,
  input  logic [4:0]                tee_rf_raddr_b_i,
  output logic [31:0]               tee_rf_rdata_b_o,
  input  logic                      tee_rf_we_i,
  input  logic [4:0]                tee_rf_waddr_i,
  input  logic [31:0]               tee_rf_wdata_i,
  // ---------------- DDR3 controller (behind the MPU)
  output axi_req_t                  ddr_axi_req_o,
  input  axi_resp_t                 ddr_axi_resp_i,
  // ---------------- UART, PS2, SD, SPI controllers (behind their wrappers)
  output axi_req_t                  dev_axi_req_o  [4],
  input  axi_resp_t                 dev_axi_resp_i [4],
  input  logic [3:0]                dev_irq_i,
  // ---------------- observation
  output hv_id_t                    sm_owner_o,
  output logic [NUM_PERIPH-1:0]     sm_claimed_o,
  output logic                      sm_force_release_o,
  output logic [14:0]               fw_deny_o,         // per AXI4 slave: a request was refused
  output logic                      xbar_decerr_o
);
  localparam int unsigned NUM_S = 15;
  localparam hv_id_t VC0_ID = '{core: CORE_TEE, proc: 4'd1, periph: 10'd0};

  localparam logic [15:0][AXI_ADDR_W-1:0] RULE_BASE = {
    32'h8000_0000, 32'h4600_0000,
    32'h4500_3000, 32'h4500_2000, 32'h4500_1000, 32'h4500_0000,
    32'h4400_0000, 32'h4302_0000, 32'h4301_0000, 32'h4300_0000,
    32'h4203_0000, 32'h4202_0000, 32'h4201_0000, 32'h4200_0000,
    32'h4100_0000, 32'h4000_0000};
  localparam logic [15:0][AXI_ADDR_W-1:0] RULE_MASK = {
    32'h8000_0000, 32'hFFFF_F000,
    32'hFFFF_F000, 32'hFFFF_F000, 32'hFFFF_F000, 32'hFFFF_F000,
    32'hFFFF_0000, 32'hFFFF_0000, 32'hFFFF_0000, 32'hFFFF_0000,
    32'hFFFF_0000, 32'hFFFF_0000, 32'hFFFF_0000, 32'hFFFF_0000,
    32'hFFFF_0000, 32'hFFFF_F000};
  localparam logic [15:0][7:0] RULE_IDX = {
    8'd14, 8'd14, 8'd13, 8'd12, 8'd11, 8'd10, 8'd9, 8'd8,
    8'd7, 8'd6, 8'd5, 8'd4, 8'd3, 8'd2, 8'd1, 8'd0};

  // ---------------- resets
  logic ap_rst_n, tee_rst_n;
  assign ap_rst_no  = ap_rst_n;
  assign tee_rst_no = tee_rst_n;

  // ---------------- processor bus interfaces
  axi_req_t   mst_req  [2];
  axi_resp_t  mst_resp [2];
  axil_req_t  ree_sm_req, tee_sm_req;
  axil_resp_t ree_sm_resp, tee_sm_resp;

  id_stamp #(.CORE_ID (CORE_REE)) u_ap_if (
    .proc_i (ap_proc_id_i), .periph_i (ap_periph_id_i),
    .s_axi_req_i (ap_axi_req_i), .s_axi_resp_o (ap_axi_resp_o),
    .s_axil_req_i (ap_axil_req_i), .s_axil_resp_o (ap_axil_resp_o),
    .m_axi_req_o (mst_req[0]), .m_axi_resp_i (mst_resp[0]),
    .m_axil_req_o (ree_sm_req), .m_axil_resp_i (ree_sm_resp)
  );

  hv_id_t tee_id_unused;
  rvscp_ext #(
    .NUM_VC (NUM_VC), .TIME_SLICE (TIME_SLICE), .STATE_W (STATE_W), .KEY_W (KEY_W)
  ) u_rvscp (
    .clk, .rst_n (tee_rst_n),
    .halt_req_o (tee_halt_req_o), .halted_i (tee_halted_i),
    .cur_pc_i (tee_cur_pc_i), .cur_state_i (tee_cur_state_i),
    .load_o (tee_load_o), .load_pc_o (tee_load_pc_o), .load_state_o (tee_load_state_o),
    .key_o (tee_key_o), .key_we_i (tee_key_we_i), .key_wdata_i (tee_key_wdata_i),
    .vc_o (tee_vc_o), .switch_o (tee_switch_o),
    .rf_raddr_a_i (tee_rf_raddr_a_i), .rf_rdata_a_o (tee_rf_rdata_a_o),
    .rf_raddr_b_i (tee_rf_raddr_b_i), .rf_rdata_b_o (tee_rf_rdata_b_o),
    .rf_we_i (tee_rf_we_i), .rf_waddr_i (tee_rf_waddr_i), .rf_wdata_i (tee_rf_wdata_i),
    .core_axi_req_i (tee_axi_req_i), .core_axi_resp_o (tee_axi_resp_o),
    .core_axil_req_i (tee_axil_req_i), .core_axil_resp_o (tee_axil_resp_o),
    .m_axi_req_o (mst_req[1]), .m_axi_resp_i (mst_resp[1]),
    .m_axil_req_o (tee_sm_req), .m_axil_resp_i (tee_sm_resp),
    .id_o (tee_id_unused)
  );

  // ---------------- AXI4 crossbar
  axi_req_t  slv_req  [NUM_S];
  axi_resp_t slv_resp [NUM_S];

  axi4_xbar #(
    .NUM_M (2), .NUM_S (NUM_S), .NUM_RULES (16),
    .RULE_BASE (RULE_BASE), .RULE_MASK (RULE_MASK), .RULE_IDX (RULE_IDX)
  ) u_xbar (
    .clk, .rst_n,
    .s_req_i (mst_req), .s_resp_o (mst_resp),
    .m_req_o (slv_req), .m_resp_i (slv_resp),
    .decerr_o (xbar_decerr_o)
  );

  // ---------------- security monitor and configuration crossbar
  axil_req_t  cfg_req;
  axil_resp_t cfg_resp;
  axil_req_t  wcfg_req  [NUM_PERIPH];
  axil_resp_t wcfg_resp [NUM_PERIPH];
  logic [NUM_PERIPH-1:0] sm_irq_ree, sm_irq_tee;

  security_monitor #(
    .NUM_PERIPH (NUM_PERIPH), .NUM_ALLOWED (4), .WITHDRAW_TIMEOUT (WITHDRAW_TIMEOUT),
    .OWNER_AT_RESET (VC0_ID), .CLAIMED_AT_RESET (NUM_PERIPH'(1)),
    .CFG_BASE (32'h0), .CFG_STRIDE (32'h100)
  ) u_sm (
    .clk, .rst_n,
    .s_ree_req_i (ree_sm_req), .s_ree_resp_o (ree_sm_resp),
    .s_tee_req_i (tee_sm_req), .s_tee_resp_o (tee_sm_resp),
    .m_cfg_req_o (cfg_req), .m_cfg_resp_i (cfg_resp),
    .irq_ree_o (sm_irq_ree), .irq_tee_o (sm_irq_tee),
    .owner_o (sm_owner_o), .claimed_o (sm_claimed_o),
    .force_release_o (sm_force_release_o)
  );
  assign ap_sm_irq_o  = sm_irq_ree;
  assign tee_sm_irq_o = sm_irq_tee;

  function automatic logic [NUM_PERIPH-1:0][AXI_ADDR_W-1:0] cfg_bases();
    for (int k = 0; k < NUM_PERIPH; k++) cfg_bases[k] = AXI_ADDR_W'(k) * 32'h100;
  endfunction

  axil_xbar #(
    .NUM_S (NUM_PERIPH), .SLV_BASE (cfg_bases()), .SLV_MASK (32'hFFFF_FF00)
  ) u_cfg_xbar (
    .clk, .rst_n,
    .s_req_i (cfg_req), .s_resp_o (cfg_resp),
    .m_req_o (wcfg_req), .m_resp_i (wcfg_resp)
  );

  // ---------------- slave 0: reset unit behind its wrapper
  axi_req_t  rst_req;
  axi_resp_t rst_resp;
  logic      rst_irq_ree_unused, rst_irq_tee_unused, rst_claimed_unused;
  hv_id_t    rst_id_unused;

  periph_wrapper #(
    .CONFIGURABLE (1'b1), .RESET_CLAIMED (1'b1), .RESET_ID (VC0_ID)
  ) u_rst_wrap (
    .clk, .rst_n,
    .s_axi_req_i (slv_req[0]), .s_axi_resp_o (slv_resp[0]),
    .m_axi_req_o (rst_req), .m_axi_resp_i (rst_resp),
    .s_cfg_req_i (wcfg_req[0]), .s_cfg_resp_o (wcfg_resp[0]),
    .irq_i (1'b0), .irq_ree_o (rst_irq_ree_unused), .irq_tee_o (rst_irq_tee_unused),
    .claimed_o (rst_claimed_unused), .id_o (rst_id_unused), .deny_o (fw_deny_o[0])
  );

  reset_unit #(.AP_HOLD_AT_RESET (1'b1), .TEE_HOLD_AT_RESET (1'b0)) u_reset_unit (
    .clk, .rst_n, .s_req_i (rst_req), .s_resp_o (rst_resp),
    .ap_rst_no (ap_rst_n), .tee_rst_no (tee_rst_n)
  );

  // ---------------- slaves 1, 6..8: claimable BRAMs (boot BRAM, code BRAMs of VC1..VC3)
  localparam int unsigned CBRAM_SLV [4] = '{1, 6, 7, 8};
  for (genvar i = 0; i < 4; i++) begin : g_cbram
    logic claimed_unused; hv_id_t id_unused;
    wrapped_bram #(.BYTES (CODE_BRAM_BYTES), .CONFIGURABLE (1'b1)) u_bram (
      .clk, .rst_n,
      .s_axi_req_i (slv_req[CBRAM_SLV[i]]), .s_axi_resp_o (slv_resp[CBRAM_SLV[i]]),
      .s_cfg_req_i (wcfg_req[CBRAM_SLV[i]]), .s_cfg_resp_o (wcfg_resp[CBRAM_SLV[i]]),
      .claimed_o (claimed_unused), .id_o (id_unused), .deny_o (fw_deny_o[CBRAM_SLV[i]])
    );
  end

  // ---------------- slaves 2..5: external controllers behind wrappers
  for (genvar i = 0; i < 4; i++) begin : g_dev
    logic claimed_unused; hv_id_t id_unused;
    periph_wrapper #(.CONFIGURABLE (1'b1)) u_wrap (
      .clk, .rst_n,
      .s_axi_req_i (slv_req[2+i]), .s_axi_resp_o (slv_resp[2+i]),
      .m_axi_req_o (dev_axi_req_o[i]), .m_axi_resp_i (dev_axi_resp_i[i]),
      .s_cfg_req_i (wcfg_req[2+i]), .s_cfg_resp_o (wcfg_resp[2+i]),
      .irq_i (dev_irq_i[i]), .irq_ree_o (ap_dev_irq_o[i]), .irq_tee_o (tee_dev_irq_o[i]),
      .claimed_o (claimed_unused), .id_o (id_unused), .deny_o (fw_deny_o[2+i])
    );
  end

  // ---------------- slave 9: secure code storage of VC0 (fixed ID, not on the config bus)
  axil_resp_t scode_cfg_resp_unused;
  logic       scode_claimed_unused;
  hv_id_t     scode_id_unused;
  wrapped_bram #(.BYTES (CODE_BRAM_BYTES), .CONFIGURABLE (1'b0), .FIXED_ID (VC0_ID)) u_scode (
    .clk, .rst_n,
    .s_axi_req_i (slv_req[9]), .s_axi_resp_o (slv_resp[9]),
    .s_cfg_req_i ('0), .s_cfg_resp_o (scode_cfg_resp_unused),
    .claimed_o (scode_claimed_unused), .id_o (scode_id_unused), .deny_o (fw_deny_o[9])
  );

  // ---------------- slaves 10..13: secure storage elements of VC0..VC3
  for (genvar i = 0; i < 4; i++) begin : g_sbram
    localparam hv_id_t OWN = '{core: CORE_TEE, proc: PROC_ID_W'(i + 1), periph: 10'd0};
    logic claimed_unused; hv_id_t id_unused;
    wrapped_bram #(.BYTES (SECURE_BYTES), .CONFIGURABLE (1'b0), .FIXED_ID (OWN)) u_sbram (
      .clk, .rst_n,
      .s_axi_req_i (slv_req[10+i]), .s_axi_resp_o (slv_resp[10+i]),
      .s_cfg_req_i (wcfg_req[10+i]), .s_cfg_resp_o (wcfg_resp[10+i]),
      .claimed_o (claimed_unused), .id_o (id_unused), .deny_o (fw_deny_o[10+i])
    );
  end

  // ---------------- slave 14: MPU in front of the DDR3 controller
  logic   mpu_claimed_unused;
  hv_id_t mpu_id_unused;
  mpu #(.NUM_REGIONS (MPU_REGIONS), .REG_BASE (32'h4600_0000), .REG_BYTES (4096)) u_mpu (
    .clk, .rst_n,
    .s_axi_req_i (slv_req[14]), .s_axi_resp_o (slv_resp[14]),
    .m_axi_req_o (ddr_axi_req_o), .m_axi_resp_i (ddr_axi_resp_i),
    .s_cfg_req_i (wcfg_req[9]), .s_cfg_resp_o (wcfg_resp[9]),
    .claimed_o (mpu_claimed_unused), .id_o (mpu_id_unused), .deny_o (fw_deny_o[14])
  );
endmodule
