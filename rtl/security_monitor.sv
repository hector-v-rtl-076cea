// security_monitor: the hardware trusted computing base of HECTOR-V. It owns
// the permission table of all claimable peripherals and is the only master of
// the AXI4-lite configuration bus that sets the ID fields of the peripheral
// wrappers.
//
// Table entry k (one per claimable peripheral, index = wrapper k on the
// configuration bus) holds: claimed flag, ID of the current claimer, a list of
// NUM_ALLOWED identifiers allowed to claim it, and the withdraw state (pending
// flag and a countdown). The SM also stores the ID of the SM owner.
//
// Commands arrive on two AXI4-lite slave ports, one from the REE (paper's
// point-to-point link A) and one from the TEE (link B). The issuer is known
// from the user signal of the write, which the processors' bus interfaces
// stamp in hardware. Software writes a command word (hv_pkg::sm_cmd_t) to
// offset 0x0 and polls the result word at offset 0x4 ([31] busy, [30:28]
// result code, [27] claimed, [26] withdraw pending, [25] issuer permitted,
// [24] issuer is SM owner). A port accepts a new command only after the
// previous one has completed (its write is held until then).
//
//   CLAIM k     permitted and unclaimed -> claimer ID = {issuer core, issuer
//               process, peripheral ID given in the command}; the ID is
//               written to wrapper k. Not in the list -> DENIED; already
//               claimed -> BUSY.
//   RELEASE k   by the current claimer (same core and process), or by the
//               SM owner for any peripheral (the paper gives the owner the
//               right to "release arbitrary peripherals"): wrapper k
//               cleared; otherwise DENIED.
//   STATUS k    claimed / pending / permitted / owner bits, result OK.
//   WITHDRAW k  granted to the SM owner always and to a party in k's list
//               (this approval rule is this RTL's choice). Raises the
//               interrupt of k towards the claimer's domain (REE or TEE) and
//               starts a WITHDRAW_TIMEOUT-cycle timer. A RELEASE by the
//               claimer ends it; at timeout the SM clears wrapper k itself.
//   CONFIG k    (SM owner only) write list slot of entry k: ID and valid bit.
//   TRANSFER    (SM owner only) the ID in the command becomes the SM owner.
//
// Command set, table contents, withdraw interrupt and timer follow the paper.
// The encodings, the list length, the timeout value and the approval rule for
// withdraws are choices of this RTL. Timing: a command that needs no wrapper
// update completes 2 cycles after its write is accepted; one that does waits
// for the configuration write (B response), typically 4 to 5 cycles. Forced
// releases take priority over new commands; the two ports are served round
// robin. SM ownership compares core and process ID only: the peripheral-ID
// part of a TEE request carries the CFI state and changes all the time.
module security_monitor
  import hv_pkg::*;
#(
  parameter int unsigned           NUM_PERIPH       = 10,
  parameter int unsigned           NUM_ALLOWED      = 4,
  parameter int unsigned           WITHDRAW_TIMEOUT = 4096,
  parameter hv_id_t                OWNER_AT_RESET   = '{core: 1'b1, proc: 4'd1, periph: 10'd0},
  // entries claimed by the SM owner at reset (the reset unit, in the paper's secure boot)
  parameter logic [NUM_PERIPH-1:0] CLAIMED_AT_RESET = NUM_PERIPH'(1),
  parameter logic [AXI_ADDR_W-1:0] CFG_BASE         = 32'h0,
  parameter logic [AXI_ADDR_W-1:0] CFG_STRIDE       = 32'h100
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  axil_req_t             s_ree_req_i,
  output axil_resp_t            s_ree_resp_o,
  input  axil_req_t             s_tee_req_i,
  output axil_resp_t            s_tee_resp_o,
  output axil_req_t             m_cfg_req_o,
  input  axil_resp_t            m_cfg_resp_i,
  output logic [NUM_PERIPH-1:0] irq_ree_o,
  output logic [NUM_PERIPH-1:0] irq_tee_o,
  output hv_id_t                owner_o,
  output logic [NUM_PERIPH-1:0] claimed_o,
  output logic                  force_release_o   // pulses when a timeout clears a wrapper
);
  localparam int unsigned KW = (NUM_PERIPH > 1) ? $clog2(NUM_PERIPH) : 1;
  localparam int unsigned TW = $clog2(WITHDRAW_TIMEOUT + 1);

  // ---------------- state
  hv_id_t            owner_q;
  logic   [NUM_PERIPH-1:0] claimed_q, wd_pend_q;
  hv_id_t            claimer_q [NUM_PERIPH];
  hv_id_t            allow_id_q [NUM_PERIPH][NUM_ALLOWED];
  logic              allow_v_q  [NUM_PERIPH][NUM_ALLOWED];
  logic   [TW-1:0]   wd_cnt_q   [NUM_PERIPH];

  // ---------------- the two command ports
  axil_req_t  port_req  [2];
  axil_resp_t port_resp [2];
  assign port_req[0]  = s_ree_req_i;
  assign port_req[1]  = s_tee_req_i;
  assign s_ree_resp_o = port_resp[0];
  assign s_tee_resp_o = port_resp[1];

  logic    pend_q [2];
  sm_cmd_t cmd_q  [2];
  hv_id_t  iss_q  [2];
  logic [AXIL_DATA_W-1:0] res_q [2];

  logic                   p_wr [2], p_rd [2];
  logic [AXI_ADDR_W-1:0]  p_waddr [2], p_raddr [2];
  logic [AXIL_DATA_W-1:0] p_wdata [2];
  logic [3:0]             p_wstrb [2];
  logic [USER_W-1:0]      p_wuser [2], p_ruser [2];

  for (genvar p = 0; p < 2; p++) begin : g_port
    axil_reg_if u_if (
      .clk, .rst_n,
      .s_req_i (port_req[p]), .s_resp_o (port_resp[p]),
      .wr_en_o (p_wr[p]), .wr_addr_o (p_waddr[p]), .wr_data_o (p_wdata[p]),
      .wr_strb_o (p_wstrb[p]), .wr_user_o (p_wuser[p]),
      .wr_ready_i (!pend_q[p]), .wr_err_i (p_waddr[p][7:0] != SM_REG_CMD[7:0]),
      .rd_en_o (p_rd[p]), .rd_addr_o (p_raddr[p]), .rd_user_o (p_ruser[p]),
      .rd_data_i ({pend_q[p], res_q[p][30:0]}), .rd_err_i (p_raddr[p][7:0] != SM_REG_RESULT[7:0])
    );
  end

  // Each port has two registers with fixed, whole-word accesses, so read
  // strobes, write strobes and read-side user IDs are not decoded; of the
  // configuration bus response only the B handshake is used.
  logic unused_ports;
  assign unused_ports = ^{p_rd[0], p_rd[1], p_wstrb[0], p_wstrb[1], p_ruser[0], p_ruser[1],
                          m_cfg_resp_i};

  // ---------------- helpers
  function automatic logic permitted(logic [3:0] k, hv_id_t iss);
    logic ok;
    ok = 1'b0;
    for (int j = 0; j < NUM_ALLOWED; j++)
      if (allow_v_q[k][j] && id_match(allow_id_q[k][j], iss)) ok = 1'b1;
    return ok;
  endfunction

  // The owner is identified by core and process ID; any peripheral ID of the
  // owning process matches.
  function automatic logic is_owner(hv_id_t iss);
    return id_match('{core: owner_q.core, proc: owner_q.proc, periph: '0}, iss);
  endfunction

  function automatic logic [AXIL_DATA_W-1:0] result_word(sm_res_e r, int unsigned k, hv_id_t iss);
    logic [AXIL_DATA_W-1:0] w;
    w = '0;
    w[30:28] = r;
    if (k < NUM_PERIPH) begin
      w[27] = claimed_q[k];
      w[26] = wd_pend_q[k];
      w[25] = permitted(4'(k), iss);
    end
    w[24] = is_owner(iss);
    return w;
  endfunction

  // ---------------- main control
  typedef enum logic [1:0] {S_IDLE, S_EXEC, S_CFG} state_e;
  state_e state_q;
  logic   cur_q;            // port being served
  logic   cur_is_cmd_q;     // S_CFG on behalf of a command (else a forced release)
  logic   rr_q;
  logic [KW-1:0] cfg_k_q;
  logic [AXIL_DATA_W-1:0] cfg_data_q;
  logic   cfg_aw_done_q, cfg_w_done_q;

  // expired withdraw timers
  logic [NUM_PERIPH-1:0] expired;
  logic [KW-1:0] exp_k;
  always_comb begin
    exp_k = '0;
    for (int k = NUM_PERIPH - 1; k >= 0; k--) begin
      expired[k] = wd_pend_q[k] && claimed_q[k] && (wd_cnt_q[k] == '0);
      if (expired[k]) exp_k = KW'(k);
    end
  end

  // configuration master
  always_comb begin
    m_cfg_req_o          = '0;
    m_cfg_req_o.aw.addr  = CFG_BASE + AXI_ADDR_W'(cfg_k_q) * CFG_STRIDE;
    m_cfg_req_o.aw.user  = '0;
    m_cfg_req_o.w.data   = cfg_data_q;
    m_cfg_req_o.w.strb   = '1;
    m_cfg_req_o.ar       = '0;
    if (state_q == S_CFG) begin
      m_cfg_req_o.aw_valid = !cfg_aw_done_q;
      m_cfg_req_o.w_valid  = !cfg_w_done_q;
      m_cfg_req_o.b_ready  = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cur_q <= 1'b0; cur_is_cmd_q <= 1'b0; rr_q <= 1'b0;
      cfg_k_q <= '0; cfg_data_q <= '0; cfg_aw_done_q <= 1'b0; cfg_w_done_q <= 1'b0;
      owner_q <= OWNER_AT_RESET;
      claimed_q <= CLAIMED_AT_RESET;
      wd_pend_q <= '0;
      force_release_o <= 1'b0;
      for (int k = 0; k < NUM_PERIPH; k++) begin
        claimer_q[k] <= CLAIMED_AT_RESET[k] ? OWNER_AT_RESET : '0;
        wd_cnt_q[k]  <= '0;
        for (int j = 0; j < NUM_ALLOWED; j++) begin
          allow_id_q[k][j] <= '0;
          allow_v_q[k][j]  <= 1'b0;
        end
      end
      for (int p = 0; p < 2; p++) begin
        pend_q[p] <= 1'b0; cmd_q[p] <= '0; iss_q[p] <= '0; res_q[p] <= '0;
      end
    end else begin
      force_release_o <= 1'b0;
      // accept new commands
      for (int p = 0; p < 2; p++) begin
        if (p_wr[p] && p_waddr[p][7:0] == SM_REG_CMD[7:0]) begin
          pend_q[p] <= 1'b1;
          cmd_q[p]  <= sm_cmd_t'(p_wdata[p]);
          iss_q[p]  <= user_to_id(p_wuser[p][14:0]);
        end
      end
      // withdraw timers
      for (int k = 0; k < NUM_PERIPH; k++)
        if (wd_pend_q[k] && wd_cnt_q[k] != '0) wd_cnt_q[k] <= wd_cnt_q[k] - 1'b1;

      unique case (state_q)
        S_IDLE: begin
          if (|expired) begin
            claimed_q[exp_k] <= 1'b0;
            claimer_q[exp_k] <= '0;
            wd_pend_q[exp_k] <= 1'b0;
            cfg_k_q <= exp_k;
            cfg_data_q <= '0;
            cur_is_cmd_q <= 1'b0;
            force_release_o <= 1'b1;
            state_q <= S_CFG;
          end else if (pend_q[rr_q] || pend_q[!rr_q]) begin
            cur_q   <= pend_q[rr_q] ? rr_q : !rr_q;
            rr_q    <= pend_q[rr_q] ? !rr_q : rr_q;
            state_q <= S_EXEC;
          end
        end

        S_EXEC: begin
          automatic sm_cmd_t c   = cmd_q[cur_q];
          automatic hv_id_t  iss = iss_q[cur_q];
          automatic int unsigned k = int'(c.periph);
          automatic sm_res_e res = SM_RES_OK;
          automatic logic    cfg = 1'b0;
          automatic logic [AXIL_DATA_W-1:0] cdata = '0;
          automatic logic [AXIL_DATA_W-1:0] rword;
          automatic logic    wd_now = 1'b0;
          if ((c.op != SM_TRANSFER && k >= NUM_PERIPH) || c.rsvd != '0 || c.rsvd15) begin
            res = SM_RES_INVALID;
          end else begin
            unique case (c.op)
              SM_CLAIM: begin
                if (!permitted(4'(k), iss))   res = SM_RES_DENIED;
                else if (claimed_q[k])    res = SM_RES_BUSY;
                else begin
                  automatic hv_id_t cid = '{core: iss.core, proc: iss.proc, periph: c.id.periph};
                  claimed_q[k] <= 1'b1;
                  claimer_q[k] <= cid;
                  cfg   = 1'b1;
                  cdata = AXIL_DATA_W'({1'b1, 1'b0, cid});
                end
              end
              SM_RELEASE: begin
                // the claimer, or the SM owner for any peripheral
                if (claimed_q[k] && ((claimer_q[k].core == iss.core && claimer_q[k].proc == iss.proc) || is_owner(iss))) begin
                  claimed_q[k] <= 1'b0;
                  claimer_q[k] <= '0;
                  wd_pend_q[k] <= 1'b0;
                  cfg   = 1'b1;
                  cdata = '0;
                end else res = SM_RES_DENIED;
              end
              SM_STATUS: res = SM_RES_OK;
              SM_WITHDRAW: begin
                if (!(is_owner(iss) || permitted(4'(k), iss))) res = SM_RES_DENIED;
                else if (claimed_q[k]) begin
                  wd_now = 1'b1;
                end
                if (wd_now && !wd_pend_q[k]) begin
                  wd_pend_q[k] <= 1'b1;
                  wd_cnt_q[k]  <= TW'(WITHDRAW_TIMEOUT);
                end
              end
              SM_CONFIG: begin
                if (!is_owner(iss)) res = SM_RES_DENIED;
                else begin
                  allow_id_q[k][c.slot] <= c.id;
                  allow_v_q[k][c.slot]  <= c.valid;
                end
              end
              SM_TRANSFER: begin
                if (!is_owner(iss)) res = SM_RES_DENIED;
                else owner_q <= c.id;
              end
              default: res = SM_RES_INVALID;
            endcase
          end
          rword = result_word(res, k, iss);
          if (wd_now) rword[26] = 1'b1;   // report the withdraw just started
          res_q[cur_q] <= rword;
          if (cfg) begin
            cfg_k_q       <= KW'(k);
            cfg_data_q    <= cdata;
            cur_is_cmd_q  <= 1'b1;
            cfg_aw_done_q <= 1'b0;
            cfg_w_done_q  <= 1'b0;
            state_q       <= S_CFG;
          end else begin
            pend_q[cur_q] <= 1'b0;
            state_q       <= S_IDLE;
          end
        end

        S_CFG: begin
          if (m_cfg_req_o.aw_valid && m_cfg_resp_i.aw_ready) cfg_aw_done_q <= 1'b1;
          if (m_cfg_req_o.w_valid && m_cfg_resp_i.w_ready)   cfg_w_done_q  <= 1'b1;
          if (m_cfg_resp_i.b_valid) begin
            cfg_aw_done_q <= 1'b0;
            cfg_w_done_q  <= 1'b0;
            if (cur_is_cmd_q) begin
              pend_q[cur_q] <= 1'b0;
              // report the table state after the update
              res_q[cur_q][27] <= claimed_q[cfg_k_q];
            end
            state_q <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  for (genvar k = 0; k < NUM_PERIPH; k++) begin : g_irq
    assign irq_ree_o[k] = wd_pend_q[k] && claimed_q[k] && claimer_q[k].core == CORE_REE;
    assign irq_tee_o[k] = wd_pend_q[k] && claimed_q[k] && claimer_q[k].core == CORE_TEE;
  end
  assign owner_o   = owner_q;
  assign claimed_o = claimed_q;
endmodule
