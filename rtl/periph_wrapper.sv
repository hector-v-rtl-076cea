// periph_wrapper: identifier firewall placed in front of every peripheral.
//
// The wrapper holds an ID field (a 15-bit identifier plus a claimed flag). An
// AXI4 request arriving from the crossbar is forwarded to the peripheral only
// if the wrapper is claimed and the ID in the request's user signal matches
// the ID field; a zero process or peripheral part of the field is a wildcard
// (hv_pkg::id_match). Otherwise the request is answered with SLVERR and never
// reaches the peripheral. In the unclaimed state every request is blocked.
// These rules follow the paper; the check is made once per transaction, when
// its address is accepted (axi4_firewall).
//
// The ID field is written only through the AXI4-lite configuration port, which
// in the SoC is reachable only by the security monitor. Register at offset
// 0x0: bit 16 claimed, bits 14:0 ID; read returns the same. Writing it takes
// one cycle. A non-configurable wrapper (CONFIGURABLE = 0) is always claimed
// and its core and process ID are fixed at design time to those of FIXED_ID;
// the paper uses this for the secure storage elements and the secure code
// storage, "a predefined, immutable identifier consisting of the core ID and
// the process ID". Only its peripheral-ID part can still be written (zeroed
// by a release): the paper's trustlet "claims the secure key storage element
// by setting the compressed state S_SE into the peripheral ID field", which
// needs exactly that. RESET_CLAIMED / RESET_ID give a configurable wrapper its state
// after reset (the reset unit starts claimed by the SM owner).
//
// Interrupt routing: the peripheral's interrupt is steered to the REE or the
// TEE line according to the core ID of the current owner; while unclaimed it
// is dropped (this last point is a choice of this RTL).
module periph_wrapper
  import hv_pkg::*;
#(
  parameter bit     CONFIGURABLE  = 1'b1,
  parameter hv_id_t FIXED_ID      = '0,
  parameter bit     RESET_CLAIMED = 1'b0,
  parameter hv_id_t RESET_ID      = '0
) (
  input  logic       clk,
  input  logic       rst_n,
  // data channel from the AXI4 crossbar
  input  axi_req_t   s_axi_req_i,
  output axi_resp_t  s_axi_resp_o,
  // to the peripheral
  output axi_req_t   m_axi_req_o,
  input  axi_resp_t  m_axi_resp_i,
  // configuration channel from the AXI4-lite crossbar
  input  axil_req_t  s_cfg_req_i,
  output axil_resp_t s_cfg_resp_o,
  // interrupt of the peripheral and its routed copies
  input  logic       irq_i,
  output logic       irq_ree_o,
  output logic       irq_tee_o,
  // state, for observation
  output logic       claimed_o,
  output hv_id_t     id_o,
  output logic       deny_o
);
  logic   claimed_q;
  hv_id_t id_q;

  // ---------------- configuration register
  logic                   cfg_wr, cfg_rd;
  logic [AXI_ADDR_W-1:0]  cfg_waddr, cfg_raddr;
  logic [AXIL_DATA_W-1:0] cfg_wdata;
  logic [3:0]             cfg_wstrb;
  logic [USER_W-1:0]      cfg_wuser, cfg_ruser;

  axil_reg_if u_cfg (
    .clk, .rst_n,
    .s_req_i (s_cfg_req_i), .s_resp_o (s_cfg_resp_o),
    .wr_en_o (cfg_wr), .wr_addr_o (cfg_waddr), .wr_data_o (cfg_wdata),
    .wr_strb_o (cfg_wstrb), .wr_user_o (cfg_wuser),
    .wr_ready_i (1'b1), .wr_err_i (1'b0),
    .rd_en_o (cfg_rd), .rd_addr_o (cfg_raddr), .rd_user_o (cfg_ruser),
    .rd_data_i (AXIL_DATA_W'({claimed_q, 1'b0, id_q})), .rd_err_i (1'b0)
  );

  // The ID field is the only register: address, strobes and user IDs of the
  // configuration port are not decoded (the configuration bus is reachable
  // from the security monitor only).
  logic unused_cfg;
  assign unused_cfg = ^{cfg_rd, cfg_waddr, cfg_raddr, cfg_wstrb, cfg_wuser, cfg_ruser, cfg_wdata};

  if (CONFIGURABLE) begin : g_cfg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        claimed_q <= RESET_CLAIMED;
        id_q      <= RESET_ID;
      end else if (cfg_wr) begin
        claimed_q <= cfg_wdata[IDREG_CLAIMED_BIT];
        id_q      <= hv_id_t'(cfg_wdata[$bits(hv_id_t)-1:0]);
      end
    end
  end else begin : g_fixed
    logic [PERIPH_ID_W-1:0] periph_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)      periph_q <= FIXED_ID.periph;
      else if (cfg_wr) periph_q <= cfg_wdata[PERIPH_ID_W-1:0];
    end
    assign claimed_q = 1'b1;
    assign id_q      = '{core: FIXED_ID.core, proc: FIXED_ID.proc, periph: periph_q};
  end

  // ---------------- data channel firewall
  logic [1:0] dest_aw, dest_ar;
  assign dest_aw = (claimed_q && id_match(id_q, user_to_id(s_axi_req_i.aw.user[14:0]))) ? 2'd1 : 2'd0;
  assign dest_ar = (claimed_q && id_match(id_q, user_to_id(s_axi_req_i.ar.user[14:0]))) ? 2'd1 : 2'd0;

  axi_req_t  fw_req  [2];
  axi_resp_t fw_resp [2];
  logic aw_deny, ar_deny;

  assign m_axi_req_o = fw_req[0];
  assign fw_resp[0]  = m_axi_resp_i;
  assign fw_resp[1]  = '0;  // second output of the firewall is not used here

  axi4_firewall u_fw (
    .clk, .rst_n,
    .s_req_i (s_axi_req_i), .s_resp_o (s_axi_resp_o),
    .dest_aw_i (dest_aw), .dest_ar_i (dest_ar),
    .m_req_o (fw_req), .m_resp_i (fw_resp),
    .aw_deny_o (aw_deny), .ar_deny_o (ar_deny)
  );
  assign deny_o = aw_deny | ar_deny;

  // ---------------- interrupt routing
  assign irq_ree_o = irq_i && claimed_q && (id_q.core == CORE_REE);
  assign irq_tee_o = irq_i && claimed_q && (id_q.core == CORE_TEE);

  assign claimed_o = claimed_q;
  assign id_o      = id_q;
endmodule
