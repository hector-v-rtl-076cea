// axil_xbar: the AXI4-lite configuration crossbar. Its only master is the
// security monitor; its slaves are the configuration ports of the peripheral
// wrappers and of the MPU.
//
// Because the processors have no port on this bus, neither the REE nor the
// TEE can write a firewall's ID field directly; every change goes through the
// security monitor (paper, Interconnect). Slave k answers to addresses with
// (addr & SLV_MASK) == SLV_BASE[k]. One write and one read transaction are in
// flight at a time; the address is decoded and the path locked in the cycle
// the address appears, and released by the B or R handshake. An address that
// matches no slave gets DECERR. The user signal is passed on unchanged.
module axil_xbar
  import hv_pkg::*;
#(
  parameter int unsigned NUM_S = 10,
  parameter logic [NUM_S-1:0][AXI_ADDR_W-1:0] SLV_BASE = '0,
  parameter logic [AXI_ADDR_W-1:0]            SLV_MASK = 32'hFFFF_FF00
) (
  input  logic       clk,
  input  logic       rst_n,
  input  axil_req_t  s_req_i,
  output axil_resp_t s_resp_o,
  output axil_req_t  m_req_o  [NUM_S],
  input  axil_resp_t m_resp_i [NUM_S]
);
  localparam int unsigned SW = $clog2(NUM_S + 1);
  localparam logic [SW-1:0] ERR = SW'(NUM_S);

  function automatic logic [SW-1:0] decode(logic [AXI_ADDR_W-1:0] a);
    logic [SW-1:0] s;
    s = ERR;
    for (int k = NUM_S - 1; k >= 0; k--)
      if ((a & SLV_MASK) == SLV_BASE[k]) s = SW'(k);
    return s;
  endfunction

  logic          w_busy_q, r_busy_q, aw_done_q, w_done_q, ar_done_q;
  logic [SW-1:0] w_sel_q, r_sel_q;
  logic [SW-1:0] w_sel, r_sel;

  // The path is chosen from the live address in the first cycle, from the lock after.
  assign w_sel = w_busy_q ? w_sel_q : decode(s_req_i.aw.addr);
  assign r_sel = r_busy_q ? r_sel_q : decode(s_req_i.ar.addr);

  always_comb begin
    s_resp_o = '0;
    for (int k = 0; k < NUM_S; k++) begin
      m_req_o[k]    = '0;
      m_req_o[k].aw = s_req_i.aw;
      m_req_o[k].w  = s_req_i.w;
      m_req_o[k].ar = s_req_i.ar;
    end
    if (!w_busy_q && !s_req_i.aw_valid) begin
      // no write address yet: hold W back until it can be routed
    end else if (w_sel != ERR) begin
      m_req_o[w_sel].aw_valid = s_req_i.aw_valid && !aw_done_q;
      m_req_o[w_sel].w_valid  = s_req_i.w_valid && !w_done_q;
      m_req_o[w_sel].b_ready  = s_req_i.b_ready;
      s_resp_o.aw_ready = m_resp_i[w_sel].aw_ready && !aw_done_q;
      s_resp_o.w_ready  = m_resp_i[w_sel].w_ready && !w_done_q;
      s_resp_o.b_valid  = m_resp_i[w_sel].b_valid;
      s_resp_o.b_resp   = m_resp_i[w_sel].b_resp;
    end else begin
      s_resp_o.aw_ready = !aw_done_q;
      s_resp_o.w_ready  = !w_done_q;
      s_resp_o.b_valid  = aw_done_q && w_done_q;
      s_resp_o.b_resp   = RESP_DECERR;
    end
    if (r_sel != ERR) begin
      m_req_o[r_sel].ar_valid = s_req_i.ar_valid && !ar_done_q;
      m_req_o[r_sel].r_ready  = s_req_i.r_ready;
      s_resp_o.ar_ready = m_resp_i[r_sel].ar_ready && !ar_done_q;
      s_resp_o.r_valid  = m_resp_i[r_sel].r_valid;
      s_resp_o.r_data   = m_resp_i[r_sel].r_data;
      s_resp_o.r_resp   = m_resp_i[r_sel].r_resp;
    end else begin
      s_resp_o.ar_ready = !ar_done_q;
      s_resp_o.r_valid  = ar_done_q;
      s_resp_o.r_resp   = RESP_DECERR;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_busy_q <= 1'b0; r_busy_q <= 1'b0;
      aw_done_q <= 1'b0; w_done_q <= 1'b0; ar_done_q <= 1'b0;
      w_sel_q <= '0; r_sel_q <= '0;
    end else begin
      if (!w_busy_q && s_req_i.aw_valid) begin
        w_busy_q <= 1'b1;
        w_sel_q  <= w_sel;
      end
      if (s_req_i.aw_valid && s_resp_o.aw_ready) aw_done_q <= 1'b1;
      if (s_req_i.w_valid && s_resp_o.w_ready)   w_done_q  <= 1'b1;
      if (s_resp_o.b_valid && s_req_i.b_ready) begin
        w_busy_q <= 1'b0; aw_done_q <= 1'b0; w_done_q <= 1'b0;
      end
      if (!r_busy_q && s_req_i.ar_valid) begin
        r_busy_q <= 1'b1;
        r_sel_q  <= r_sel;
      end
      if (s_req_i.ar_valid && s_resp_o.ar_ready) ar_done_q <= 1'b1;
      if (s_resp_o.r_valid && s_req_i.r_ready) begin
        r_busy_q <= 1'b0; ar_done_q <= 1'b0;
      end
    end
  end
endmodule
