// axil_reg_if: AXI4-lite slave that turns bus transfers into single-cycle
// register accesses for the module that instantiates it.
//
// A write is taken when AW and W are both valid and the parent signals
// wr_ready_i; in that cycle wr_en_o pulses with address, data, strobes and the
// issuer's user ID, and the parent reports wr_err_i. The B response follows one
// cycle later (SLVERR on error). A read pulses rd_en_o; the parent returns
// rd_data_i / rd_err_i combinationally in that cycle and R is valid one cycle
// later. One transfer of each kind is outstanding at a time. This adapter is a
// design choice of this RTL; the paper only names AXI4-lite as the
// configuration bus.
module axil_reg_if
  import hv_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  axil_req_t              s_req_i,
  output axil_resp_t             s_resp_o,
  output logic                   wr_en_o,
  output logic [AXI_ADDR_W-1:0]  wr_addr_o,
  output logic [AXIL_DATA_W-1:0] wr_data_o,
  output logic [3:0]             wr_strb_o,
  output logic [USER_W-1:0]      wr_user_o,
  input  logic                   wr_ready_i,
  input  logic                   wr_err_i,
  output logic                   rd_en_o,
  output logic [AXI_ADDR_W-1:0]  rd_addr_o,
  output logic [USER_W-1:0]      rd_user_o,
  input  logic [AXIL_DATA_W-1:0] rd_data_i,
  input  logic                   rd_err_i
);
  logic                   b_valid_q, r_valid_q;
  axi_resp_e_t            b_resp_q, r_resp_q;
  logic [AXIL_DATA_W-1:0] r_data_q;

  assign wr_en_o   = s_req_i.aw_valid && s_req_i.w_valid && wr_ready_i && !b_valid_q;
  assign wr_addr_o = s_req_i.aw.addr;
  assign wr_data_o = s_req_i.w.data;
  assign wr_strb_o = s_req_i.w.strb;
  assign wr_user_o = s_req_i.aw.user;
  assign rd_en_o   = s_req_i.ar_valid && !r_valid_q;
  assign rd_addr_o = s_req_i.ar.addr;
  assign rd_user_o = s_req_i.ar.user;

  always_comb begin
    s_resp_o          = '0;
    s_resp_o.aw_ready = wr_en_o;
    s_resp_o.w_ready  = wr_en_o;
    s_resp_o.b_valid  = b_valid_q;
    s_resp_o.b_resp   = b_resp_q;
    s_resp_o.ar_ready = rd_en_o;
    s_resp_o.r_valid  = r_valid_q;
    s_resp_o.r_data   = r_data_q;
    s_resp_o.r_resp   = r_resp_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid_q <= 1'b0;
      b_resp_q  <= RESP_OKAY;
      r_valid_q <= 1'b0;
      r_resp_q  <= RESP_OKAY;
      r_data_q  <= '0;
    end else begin
      if (wr_en_o) begin
        b_valid_q <= 1'b1;
        b_resp_q  <= wr_err_i ? RESP_SLVERR : RESP_OKAY;
      end else if (s_req_i.b_ready) begin
        b_valid_q <= 1'b0;
      end
      if (rd_en_o) begin
        r_valid_q <= 1'b1;
        r_data_q  <= rd_data_i;
        r_resp_q  <= rd_err_i ? RESP_SLVERR : RESP_OKAY;
      end else if (s_req_i.r_ready) begin
        r_valid_q <= 1'b0;
      end
    end
  end

`ifndef SYNTHESIS
  // AXI rule: a valid response stays until it is accepted.
  a_b_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_resp_o.b_valid && !s_req_i.b_ready |=> s_resp_o.b_valid);
`endif
endmodule
