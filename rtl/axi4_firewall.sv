// axi4_firewall: transaction filter used by the peripheral wrapper and the MPU.
//
// For every AXI4 write or read address the parent computes a destination from
// the address-channel fields (dest_aw_i / dest_ar_i): DEST_DENY, DEST_OUT0 or
// DEST_OUT1. An allowed transaction is forwarded unchanged to output port 0 or
// 1 and its data and response beats pass straight through until the response
// ends (B, or the R beat with last). A denied transaction never reaches a
// peripheral: its write data is swallowed and the issuer gets SLVERR on B, or
// len+1 read beats of zero data with SLVERR on R; this follows the paper's
// "transports the error code SLVERR to the issuer using RRESP or BRESP".
// The decision is taken once per transaction, when its address is accepted.
// Write and read channels are independent; each handles one transaction at a
// time. aw_deny_o / ar_deny_o pulse when a transaction is refused.
module axi4_firewall
  import hv_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  axi_req_t   s_req_i,
  output axi_resp_t  s_resp_o,
  input  logic [1:0] dest_aw_i,
  input  logic [1:0] dest_ar_i,
  output axi_req_t   m_req_o  [2],
  input  axi_resp_t  m_resp_i [2],
  output logic       aw_deny_o,
  output logic       ar_deny_o
);
  localparam logic [1:0] DEST_DENY = 2'd0;

  typedef enum logic [1:0] {C_IDLE, C_FWD, C_DROP, C_RESP} ch_state_e;
  ch_state_e w_state_q, r_state_q;
  logic w_sel_q, r_sel_q;
  logic [AXI_ID_W-1:0] w_id_q, r_id_q;
  logic [7:0] r_cnt_q;

  logic w_sel_d, r_sel_d;
  assign w_sel_d = (dest_aw_i == 2'd2);
  assign r_sel_d = (dest_ar_i == 2'd2);

  always_comb begin
    s_resp_o  = '0;
    m_req_o[0] = '0;
    m_req_o[1] = '0;
    m_req_o[0].aw = s_req_i.aw;
    m_req_o[1].aw = s_req_i.aw;
    m_req_o[0].ar = s_req_i.ar;
    m_req_o[1].ar = s_req_i.ar;
    m_req_o[0].w  = s_req_i.w;
    m_req_o[1].w  = s_req_i.w;
    aw_deny_o = 1'b0;
    ar_deny_o = 1'b0;

    // ---------------- write channel
    unique case (w_state_q)
      C_IDLE: if (s_req_i.aw_valid) begin
        if (dest_aw_i == DEST_DENY) begin
          s_resp_o.aw_ready = 1'b1;
          aw_deny_o         = 1'b1;
        end else begin
          m_req_o[w_sel_d].aw_valid = 1'b1;
          s_resp_o.aw_ready         = m_resp_i[w_sel_d].aw_ready;
        end
      end
      C_FWD: begin
        m_req_o[w_sel_q].w_valid = s_req_i.w_valid;
        m_req_o[w_sel_q].b_ready = s_req_i.b_ready;
        s_resp_o.w_ready         = m_resp_i[w_sel_q].w_ready;
        s_resp_o.b_valid         = m_resp_i[w_sel_q].b_valid;
        s_resp_o.b               = m_resp_i[w_sel_q].b;
      end
      C_DROP: s_resp_o.w_ready = 1'b1;
      C_RESP: begin
        s_resp_o.b_valid = 1'b1;
        s_resp_o.b.id    = w_id_q;
        s_resp_o.b.resp  = RESP_SLVERR;
      end
      default: ;
    endcase

    // ---------------- read channel
    unique case (r_state_q)
      C_IDLE: if (s_req_i.ar_valid) begin
        if (dest_ar_i == DEST_DENY) begin
          s_resp_o.ar_ready = 1'b1;
          ar_deny_o         = 1'b1;
        end else begin
          m_req_o[r_sel_d].ar_valid = 1'b1;
          s_resp_o.ar_ready         = m_resp_i[r_sel_d].ar_ready;
        end
      end
      C_FWD: begin
        m_req_o[r_sel_q].r_ready = s_req_i.r_ready;
        s_resp_o.r_valid         = m_resp_i[r_sel_q].r_valid;
        s_resp_o.r               = m_resp_i[r_sel_q].r;
      end
      C_DROP: begin
        s_resp_o.r_valid = 1'b1;
        s_resp_o.r.id    = r_id_q;
        s_resp_o.r.data  = '0;
        s_resp_o.r.resp  = RESP_SLVERR;
        s_resp_o.r.last  = (r_cnt_q == 8'd0);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_state_q <= C_IDLE;
      r_state_q <= C_IDLE;
      w_sel_q   <= 1'b0;
      r_sel_q   <= 1'b0;
      w_id_q    <= '0;
      r_id_q    <= '0;
      r_cnt_q   <= '0;
    end else begin
      unique case (w_state_q)
        C_IDLE: if (s_req_i.aw_valid && s_resp_o.aw_ready) begin
          w_id_q    <= s_req_i.aw.id;
          w_sel_q   <= w_sel_d;
          w_state_q <= (dest_aw_i == DEST_DENY) ? C_DROP : C_FWD;
        end
        C_FWD:  if (s_resp_o.b_valid && s_req_i.b_ready) w_state_q <= C_IDLE;
        C_DROP: if (s_req_i.w_valid && s_req_i.w.last) w_state_q <= C_RESP;
        C_RESP: if (s_req_i.b_ready) w_state_q <= C_IDLE;
        default: w_state_q <= C_IDLE;
      endcase
      unique case (r_state_q)
        C_IDLE: if (s_req_i.ar_valid && s_resp_o.ar_ready) begin
          r_id_q    <= s_req_i.ar.id;
          r_sel_q   <= r_sel_d;
          r_cnt_q   <= s_req_i.ar.len;
          r_state_q <= (dest_ar_i == DEST_DENY) ? C_DROP : C_FWD;
        end
        C_FWD: if (s_resp_o.r_valid && s_req_i.r_ready && s_resp_o.r.last) r_state_q <= C_IDLE;
        C_DROP: if (s_req_i.r_ready) begin
          if (r_cnt_q == 8'd0) r_state_q <= C_IDLE;
          else r_cnt_q <= r_cnt_q - 8'd1;
        end
        default: r_state_q <= C_IDLE;
      endcase
    end
  end
endmodule
