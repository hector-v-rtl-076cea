// axi4_xbar: the shared AXI4 crossbar between the processors and the
// peripherals.
//
// NUM_M masters (the application processor and the RVSCP) reach NUM_S slaves
// through an address map of NUM_RULES rules (base, mask, slave index); a rule
// matches when (addr & mask) == base, and several rules may lead to one slave
// (the MPU serves both DDR3 memory and its register window). The 16-bit user
// signal that carries the identifier travels unchanged with every address
// phase; the paper's point about this crossbar is exactly that extension.
//
// Write and read paths are separate. Each slave path is locked to one master
// for a whole transaction: a free slave is granted, round robin, to a master
// whose pending address decodes to it, one cycle after the address appears;
// the lock is released by the B handshake (writes) or the last R beat
// (reads). A master has one write and one read transaction in flight at a
// time. An address that matches no rule is answered by a per-master error
// responder with DECERR (write data swallowed, len+1 read beats). The locking
// scheme is this design's choice; the paper does not describe the crossbar's
// insides.
module axi4_xbar
  import hv_pkg::*;
#(
  parameter int unsigned NUM_M     = 2,
  parameter int unsigned NUM_S     = 15,
  parameter int unsigned NUM_RULES = 16,
  parameter logic [NUM_RULES-1:0][AXI_ADDR_W-1:0] RULE_BASE = '0,
  parameter logic [NUM_RULES-1:0][AXI_ADDR_W-1:0] RULE_MASK = '0,
  parameter logic [NUM_RULES-1:0][7:0]            RULE_IDX  = '0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axi_req_t  s_req_i  [NUM_M],   // from masters
  output axi_resp_t s_resp_o [NUM_M],
  output axi_req_t  m_req_o  [NUM_S],   // to slaves
  input  axi_resp_t m_resp_i [NUM_S],
  output logic      decerr_o            // pulses when an address decodes nowhere
);
  localparam int unsigned MW = (NUM_M > 1) ? $clog2(NUM_M) : 1;
  localparam int unsigned SW = $clog2(NUM_S + 1);
  localparam logic [SW-1:0] ERR = SW'(NUM_S);

  function automatic logic [SW-1:0] decode(logic [AXI_ADDR_W-1:0] a);
    logic [SW-1:0] s;
    s = ERR;
    for (int r = NUM_RULES - 1; r >= 0; r--)
      if ((a & RULE_MASK[r]) == RULE_BASE[r] && 32'(RULE_IDX[r]) < NUM_S) s = SW'(RULE_IDX[r]);
    return s;
  endfunction

  // per-slave locks
  logic          wl_v_q   [NUM_S], rl_v_q  [NUM_S];
  logic [MW-1:0] wl_m_q   [NUM_S], rl_m_q  [NUM_S];
  logic          wl_aw_q  [NUM_S], rl_ar_q [NUM_S];   // address already passed
  logic [MW-1:0] w_rr_q   [NUM_S], r_rr_q  [NUM_S];   // round-robin pointers
  // per-master state
  logic          mw_busy_q [NUM_M], mr_busy_q [NUM_M];
  logic [SW-1:0] mw_sel_q  [NUM_M], mr_sel_q  [NUM_M];
  // per-master error responders
  logic          ew_aw_q [NUM_M], ew_w_q [NUM_M];
  logic [AXI_ID_W-1:0] ew_id_q [NUM_M], er_id_q [NUM_M];
  logic          er_ar_q [NUM_M];
  logic [7:0]    er_cnt_q [NUM_M];

  logic [SW-1:0] aw_dec [NUM_M], ar_dec [NUM_M];
  for (genvar m = 0; m < NUM_M; m++) begin : g_dec
    assign aw_dec[m] = decode(s_req_i[m].aw.addr);
    assign ar_dec[m] = decode(s_req_i[m].ar.addr);
  end

  // ---------------- round-robin grant of free slave paths
  logic          w_gnt_v [NUM_S], r_gnt_v [NUM_S];
  logic [MW-1:0] w_gnt_m [NUM_S], r_gnt_m [NUM_S];
  always_comb begin
    for (int s = 0; s < NUM_S; s++) begin
      w_gnt_v[s] = 1'b0; w_gnt_m[s] = '0;
      r_gnt_v[s] = 1'b0; r_gnt_m[s] = '0;
      // the last assignment wins: k = 1 (the master right after the previous winner) has priority
      for (int k = NUM_M; k >= 1; k--) begin
        if (s_req_i[(int'(w_rr_q[s]) + k) % NUM_M].aw_valid
            && !mw_busy_q[(int'(w_rr_q[s]) + k) % NUM_M]
            && aw_dec[(int'(w_rr_q[s]) + k) % NUM_M] == SW'(s)) begin
          w_gnt_v[s] = 1'b1; w_gnt_m[s] = MW'((int'(w_rr_q[s]) + k) % NUM_M);
        end
        if (s_req_i[(int'(r_rr_q[s]) + k) % NUM_M].ar_valid
            && !mr_busy_q[(int'(r_rr_q[s]) + k) % NUM_M]
            && ar_dec[(int'(r_rr_q[s]) + k) % NUM_M] == SW'(s)) begin
          r_gnt_v[s] = 1'b1; r_gnt_m[s] = MW'((int'(r_rr_q[s]) + k) % NUM_M);
        end
      end
    end
  end

  // ---------------- routing
  always_comb begin
    for (int m = 0; m < NUM_M; m++) s_resp_o[m] = '0;
    for (int s = 0; s < NUM_S; s++) begin
      m_req_o[s] = '0;
      if (wl_v_q[s]) begin
        m_req_o[s].aw       = s_req_i[wl_m_q[s]].aw;
        m_req_o[s].aw_valid = s_req_i[wl_m_q[s]].aw_valid && !wl_aw_q[s];
        m_req_o[s].w        = s_req_i[wl_m_q[s]].w;
        m_req_o[s].w_valid  = s_req_i[wl_m_q[s]].w_valid;
        m_req_o[s].b_ready  = s_req_i[wl_m_q[s]].b_ready;
        s_resp_o[wl_m_q[s]].aw_ready = m_resp_i[s].aw_ready && !wl_aw_q[s];
        s_resp_o[wl_m_q[s]].w_ready  = m_resp_i[s].w_ready;
        s_resp_o[wl_m_q[s]].b_valid  = m_resp_i[s].b_valid;
        s_resp_o[wl_m_q[s]].b        = m_resp_i[s].b;
      end
      if (rl_v_q[s]) begin
        m_req_o[s].ar       = s_req_i[rl_m_q[s]].ar;
        m_req_o[s].ar_valid = s_req_i[rl_m_q[s]].ar_valid && !rl_ar_q[s];
        m_req_o[s].r_ready  = s_req_i[rl_m_q[s]].r_ready;
        s_resp_o[rl_m_q[s]].ar_ready = m_resp_i[s].ar_ready && !rl_ar_q[s];
        s_resp_o[rl_m_q[s]].r_valid  = m_resp_i[s].r_valid;
        s_resp_o[rl_m_q[s]].r        = m_resp_i[s].r;
      end
    end
    // decode-error responders
    for (int m = 0; m < NUM_M; m++) begin
      if (mw_busy_q[m] && mw_sel_q[m] == ERR) begin
        s_resp_o[m].aw_ready = !ew_aw_q[m];
        s_resp_o[m].w_ready  = !ew_w_q[m];
        s_resp_o[m].b_valid  = ew_aw_q[m] && ew_w_q[m];
        s_resp_o[m].b.id     = ew_id_q[m];
        s_resp_o[m].b.resp   = RESP_DECERR;
      end
      if (mr_busy_q[m] && mr_sel_q[m] == ERR) begin
        s_resp_o[m].ar_ready = !er_ar_q[m];
        s_resp_o[m].r_valid  = er_ar_q[m];
        s_resp_o[m].r.id     = er_id_q[m];
        s_resp_o[m].r.resp   = RESP_DECERR;
        s_resp_o[m].r.last   = (er_cnt_q[m] == 8'd0);
      end
    end
  end

  // ---------------- arbitration and lock bookkeeping
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NUM_S; s++) begin
        wl_v_q[s] <= 1'b0; wl_m_q[s] <= '0; wl_aw_q[s] <= 1'b0; w_rr_q[s] <= '0;
        rl_v_q[s] <= 1'b0; rl_m_q[s] <= '0; rl_ar_q[s] <= 1'b0; r_rr_q[s] <= '0;
      end
      for (int m = 0; m < NUM_M; m++) begin
        mw_busy_q[m] <= 1'b0; mw_sel_q[m] <= '0; mr_busy_q[m] <= 1'b0; mr_sel_q[m] <= '0;
        ew_aw_q[m] <= 1'b0; ew_w_q[m] <= 1'b0; ew_id_q[m] <= '0;
        er_ar_q[m] <= 1'b0; er_id_q[m] <= '0; er_cnt_q[m] <= '0;
      end
      decerr_o <= 1'b0;
    end else begin
      decerr_o <= 1'b0;
      // transaction progress on locked slaves
      for (int s = 0; s < NUM_S; s++) begin
        if (wl_v_q[s]) begin
          if (m_req_o[s].aw_valid && m_resp_i[s].aw_ready) wl_aw_q[s] <= 1'b1;
          if (m_resp_i[s].b_valid && m_req_o[s].b_ready) begin
            wl_v_q[s] <= 1'b0;
            mw_busy_q[wl_m_q[s]] <= 1'b0;
          end
        end else begin
          // grant the free write path (winner chosen by the round-robin logic above)
          if (w_gnt_v[s]) begin
            wl_v_q[s] <= 1'b1; wl_m_q[s] <= w_gnt_m[s]; wl_aw_q[s] <= 1'b0; w_rr_q[s] <= w_gnt_m[s];
            mw_busy_q[w_gnt_m[s]] <= 1'b1; mw_sel_q[w_gnt_m[s]] <= SW'(s);
          end
        end
        if (rl_v_q[s]) begin
          if (m_req_o[s].ar_valid && m_resp_i[s].ar_ready) rl_ar_q[s] <= 1'b1;
          if (m_resp_i[s].r_valid && m_req_o[s].r_ready && m_resp_i[s].r.last) begin
            rl_v_q[s] <= 1'b0;
            mr_busy_q[rl_m_q[s]] <= 1'b0;
          end
        end else if (r_gnt_v[s]) begin
          rl_v_q[s] <= 1'b1; rl_m_q[s] <= r_gnt_m[s]; rl_ar_q[s] <= 1'b0; r_rr_q[s] <= r_gnt_m[s];
          mr_busy_q[r_gnt_m[s]] <= 1'b1; mr_sel_q[r_gnt_m[s]] <= SW'(s);
        end
      end
      // decode errors
      for (int m = 0; m < NUM_M; m++) begin
        if (!mw_busy_q[m] && s_req_i[m].aw_valid && aw_dec[m] == ERR) begin
          mw_busy_q[m] <= 1'b1; mw_sel_q[m] <= ERR;
          ew_aw_q[m] <= 1'b0; ew_w_q[m] <= 1'b0;
          decerr_o <= 1'b1;
        end else if (mw_busy_q[m] && mw_sel_q[m] == ERR) begin
          if (s_req_i[m].aw_valid && !ew_aw_q[m]) begin
            ew_aw_q[m] <= 1'b1; ew_id_q[m] <= s_req_i[m].aw.id;
          end
          if (s_req_i[m].w_valid && s_req_i[m].w.last && !ew_w_q[m]) ew_w_q[m] <= 1'b1;
          if (ew_aw_q[m] && ew_w_q[m] && s_req_i[m].b_ready) mw_busy_q[m] <= 1'b0;
        end
        if (!mr_busy_q[m] && s_req_i[m].ar_valid && ar_dec[m] == ERR) begin
          mr_busy_q[m] <= 1'b1; mr_sel_q[m] <= ERR; er_ar_q[m] <= 1'b0;
          decerr_o <= 1'b1;
        end else if (mr_busy_q[m] && mr_sel_q[m] == ERR) begin
          if (s_req_i[m].ar_valid && !er_ar_q[m]) begin
            er_ar_q[m] <= 1'b1; er_id_q[m] <= s_req_i[m].ar.id; er_cnt_q[m] <= s_req_i[m].ar.len;
          end else if (er_ar_q[m] && s_req_i[m].r_ready) begin
            if (er_cnt_q[m] == 8'd0) mr_busy_q[m] <= 1'b0;
            else er_cnt_q[m] <= er_cnt_q[m] - 8'd1;
          end
        end
      end
    end
  end

`ifndef SYNTHESIS
  // A master must hold its address stable until it is accepted (AXI rule the
  // one-cycle lock delay relies on).
  for (genvar m = 0; m < NUM_M; m++) begin : g_chk
    a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
      s_req_i[m].aw_valid && !s_resp_o[m].aw_ready |=> s_req_i[m].aw_valid && $stable(s_req_i[m].aw));
    a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
      s_req_i[m].ar_valid && !s_resp_o[m].ar_ready |=> s_req_i[m].ar_valid && $stable(s_req_i[m].ar));
  end
`endif
endmodule
