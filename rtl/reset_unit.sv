// reset_unit: claimable peripheral that holds the reset lines of the
// application processor (AP, the REE) and of the secure processor (RVSCP, the
// TEE).
//
// It sits behind a peripheral wrapper like any other peripheral, so only the
// party that has claimed it through the security monitor can switch the other
// processor on or off (paper, Reset Unit). One register at offset 0x0 of its
// AXI4 window: bit 0 = hold the AP in reset, bit 1 = hold the RVSCP in reset;
// writes take effect the cycle after the beat, reads return the bits. The
// values after power-on are parameters; the defaults follow the paper's secure
// boot use case (RVSCP running, AP halted). The register layout is this
// design's choice. The outputs are active-low resets combined with the
// system reset.
module reset_unit
  import hv_pkg::*;
#(
  parameter bit AP_HOLD_AT_RESET  = 1'b1,
  parameter bit TEE_HOLD_AT_RESET = 1'b0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axi_req_t  s_req_i,
  output axi_resp_t s_resp_o,
  output logic      ap_rst_no,
  output logic      tee_rst_no
);
  logic                  mem_req, mem_we;
  logic [AXI_ADDR_W-1:0] mem_addr;
  logic [AXI_DATA_W-1:0] mem_wdata, rdata_q;
  logic [AXI_STRB_W-1:0] mem_strb;
  logic [USER_W-1:0]     mem_user;
  logic hold_ap_q, hold_tee_q;

  axi4_slave_port u_port (
    .clk, .rst_n, .s_req_i, .s_resp_o,
    .mem_req_o (mem_req), .mem_we_o (mem_we), .mem_addr_o (mem_addr),
    .mem_wdata_o (mem_wdata), .mem_strb_o (mem_strb), .mem_user_o (mem_user),
    .mem_rdata_i (rdata_q)
  );

  logic sel;
  assign sel = (mem_addr[11:3] == '0);

  // The crossbar has already decoded the upper address bits; only bits 1:0 of
  // the lowest byte lane carry control bits, and the issuer's ID is irrelevant
  // because the wrapper in front of this unit does the access check.
  logic unused_port;
  assign unused_port = ^{mem_addr[31:12], mem_addr[2:0], mem_wdata[63:2], mem_strb[7:1], mem_user};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_ap_q  <= AP_HOLD_AT_RESET;
      hold_tee_q <= TEE_HOLD_AT_RESET;
      rdata_q    <= '0;
    end else if (mem_req) begin
      if (mem_we) begin
        if (sel && mem_strb[0]) begin
          hold_ap_q  <= mem_wdata[0];
          hold_tee_q <= mem_wdata[1];
        end
      end else begin
        rdata_q <= sel ? AXI_DATA_W'({hold_tee_q, hold_ap_q}) : '0;
      end
    end
  end

  assign ap_rst_no  = rst_n && !hold_ap_q;
  assign tee_rst_no = rst_n && !hold_tee_q;
endmodule
