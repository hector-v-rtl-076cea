// id_stamp: master-side bus interface that writes the requester's identifier
// into the user signal of every AXI4 and AXI4-lite address phase.
//
// The core ID is a parameter, fixed at design time, so software can never
// change it (paper: "the core ID is hardcoded directly into the interconnect
// interface of the participants"). Process and peripheral ID come from the
// inputs: on the application processor they are set by the entity itself, on
// the RVSCP the hardware scheduler supplies the process ID of the running
// virtual core and the CFI unit the compressed control-flow state. Whatever
// the master drove on its user signal is discarded. Purely combinational: no
// added latency; all other channels pass through unchanged.
module id_stamp
  import hv_pkg::*;
#(
  parameter logic [CORE_ID_W-1:0] CORE_ID = CORE_REE
) (
  input  logic [PROC_ID_W-1:0]   proc_i,
  input  logic [PERIPH_ID_W-1:0] periph_i,
  // from the processor
  input  axi_req_t   s_axi_req_i,
  output axi_resp_t  s_axi_resp_o,
  input  axil_req_t  s_axil_req_i,
  output axil_resp_t s_axil_resp_o,
  // to the interconnect
  output axi_req_t   m_axi_req_o,
  input  axi_resp_t  m_axi_resp_i,
  output axil_req_t  m_axil_req_o,
  input  axil_resp_t m_axil_resp_i
);
  hv_id_t id;
  assign id = '{core: CORE_ID, proc: proc_i, periph: periph_i};

  always_comb begin
    m_axi_req_o          = s_axi_req_i;
    m_axi_req_o.aw.user  = id_to_user(id);
    m_axi_req_o.ar.user  = id_to_user(id);
    m_axil_req_o         = s_axil_req_i;
    m_axil_req_o.aw.user = id_to_user(id);
    m_axil_req_o.ar.user = id_to_user(id);
  end
  assign s_axi_resp_o  = m_axi_resp_i;
  assign s_axil_resp_o = m_axil_resp_i;
endmodule
