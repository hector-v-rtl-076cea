// wrapped_bram: a block RAM behind its own peripheral wrapper.
//
// This is how the SoC builds its protected memories. With CONFIGURABLE = 1 it
// is a claimable BRAM: the security monitor writes the owner's ID into the
// wrapper and only that owner can read or write it (the paper's code BRAMs of
// the virtual cores VC1..VC3). With CONFIGURABLE = 0 the ID is fixed at design
// time (FIXED_ID): the secure storage elements, one per virtual core, and the
// secure code storage of VC0, which no other party can ever reach. Timing is
// that of axi4_bram; the wrapper adds no cycle to an allowed access.
module wrapped_bram
  import hv_pkg::*;
#(
  parameter int unsigned BYTES        = 65536,
  parameter bit          CONFIGURABLE = 1'b1,
  parameter hv_id_t      FIXED_ID     = '0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  axi_req_t   s_axi_req_i,
  output axi_resp_t  s_axi_resp_o,
  input  axil_req_t  s_cfg_req_i,
  output axil_resp_t s_cfg_resp_o,
  output logic       claimed_o,
  output hv_id_t     id_o,
  output logic       deny_o
);
  axi_req_t  mem_req;
  axi_resp_t mem_resp;
  logic irq_ree_unused, irq_tee_unused;  // a BRAM raises no interrupt

  periph_wrapper #(
    .CONFIGURABLE (CONFIGURABLE),
    .FIXED_ID     (FIXED_ID)
  ) u_wrap (
    .clk, .rst_n,
    .s_axi_req_i, .s_axi_resp_o,
    .m_axi_req_o (mem_req), .m_axi_resp_i (mem_resp),
    .s_cfg_req_i, .s_cfg_resp_o,
    .irq_i (1'b0), .irq_ree_o (irq_ree_unused), .irq_tee_o (irq_tee_unused),
    .claimed_o, .id_o, .deny_o
  );

  axi4_bram #(.BYTES(BYTES)) u_mem (
    .clk, .rst_n, .s_req_i (mem_req), .s_resp_o (mem_resp)
  );
endmodule
