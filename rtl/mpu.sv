// mpu: memory protection unit between the AXI4 crossbar and the external DDR3
// memory controller.
//
// Binding a whole peripheral to one party does not work for the shared DDR3
// memory, so the MPU divides physical memory into up to NUM_REGIONS regions
// (16 in the paper). Each region has an inclusive [base, limit] byte range and
// up to two owner IDs; a region with two valid IDs is shared, e.g. as the
// REE-TEE communication buffer. Every AXI4 transaction to memory is checked
// once, when its address is accepted: it is forwarded to the memory controller
// if some region contains all bytes of the burst and one of that region's IDs
// matches the request's user ID (wildcard rules of hv_pkg::id_match).
// Otherwise it gets SLVERR and never reaches memory.
//
// The MPU is claimed like any peripheral: the security monitor writes its ID
// field over the AXI4-lite port (same layout as periph_wrapper). The party
// holding that ID programs the regions through the register window at
// REG_BASE (REG_BYTES long) on the MPU's AXI4 port; anyone else touching the
// window gets SLVERR. Region r occupies 32 bytes at REG_BASE + 32*r:
//   +0x00 base   +0x08 limit (inclusive)
//   +0x10 ACL: [14:0] ID0, [15] ID0 valid, [30:16] ID1, [31] ID1 valid
// Register reads return data two cycles after the address is accepted. All
// regions are disabled after reset. The region count follows the paper; the
// register layout, two IDs per region and the burst-range check are choices
// of this RTL (the paper says only that regions are exclusive or shared).
module mpu
  import hv_pkg::*;
#(
  parameter int unsigned           NUM_REGIONS = 16,
  parameter logic [AXI_ADDR_W-1:0] REG_BASE    = 32'h4600_0000,
  parameter int unsigned           REG_BYTES   = 4096
) (
  input  logic       clk,
  input  logic       rst_n,
  input  axi_req_t   s_axi_req_i,
  output axi_resp_t  s_axi_resp_o,
  output axi_req_t   m_axi_req_o,   // to the DDR3 controller
  input  axi_resp_t  m_axi_resp_i,
  input  axil_req_t  s_cfg_req_i,
  output axil_resp_t s_cfg_resp_o,
  output logic       claimed_o,
  output hv_id_t     id_o,
  output logic       deny_o
);
  typedef struct packed {
    logic [AXI_ADDR_W-1:0] base;
    logic [AXI_ADDR_W-1:0] limit;
    logic                  v1;
    hv_id_t                id1;
    logic                  v0;
    hv_id_t                id0;
  } region_t;

  region_t regions_q [NUM_REGIONS];
  logic    claimed_q;
  hv_id_t  id_q;

  // ---------------- claim ID field, written by the security monitor
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

  // The ID field is the only configuration register, so the address,
  // strobes and read strobe of the configuration port are not decoded.
  logic unused_cfg;
  assign unused_cfg = ^{cfg_rd, cfg_waddr, cfg_raddr, cfg_wstrb, cfg_wuser, cfg_ruser};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      claimed_q <= 1'b0;
      id_q      <= '0;
    end else if (cfg_wr) begin
      claimed_q <= cfg_wdata[IDREG_CLAIMED_BIT];
      id_q      <= hv_id_t'(cfg_wdata[$bits(hv_id_t)-1:0]);
    end
  end

  // ---------------- access decision
  function automatic logic in_reg_window(logic [AXI_ADDR_W-1:0] a);
    return (a >= REG_BASE) && ({1'b0, a} < {1'b0, REG_BASE} + (AXI_ADDR_W+1)'(REG_BYTES));
  endfunction

  // The decision uses the address, length, size, burst type and user ID of a
  // request; its AXI ID plays no part.
  function automatic logic region_ok(logic [AXI_ADDR_W-1:0] addr, logic [7:0] len,
                                     logic [2:0] size, logic [1:0] burst, hv_id_t rid);
    logic [AXI_ADDR_W:0] last_byte;
    logic ok;
    if (burst == BURST_FIXED)
      last_byte = {1'b0, addr} + ((AXI_ADDR_W+1)'(1) << size) - 1'b1;
    else  // INCR; WRAP bursts are refused below
      last_byte = {1'b0, addr} + (((AXI_ADDR_W+1)'(len) + 1'b1) << size) - 1'b1;
    ok = 1'b0;
    for (int r = 0; r < NUM_REGIONS; r++) begin
      if ((burst == BURST_FIXED || burst == BURST_INCR)
          && (regions_q[r].v0 || regions_q[r].v1)
          && addr >= regions_q[r].base
          && last_byte <= {1'b0, regions_q[r].limit}
          && ((regions_q[r].v0 && id_match(regions_q[r].id0, rid))
              || (regions_q[r].v1 && id_match(regions_q[r].id1, rid))))
        ok = 1'b1;
    end
    return ok;
  endfunction

  function automatic logic [1:0] decide(logic [AXI_ADDR_W-1:0] addr, logic [7:0] len,
                                        logic [2:0] size, logic [1:0] burst, hv_id_t rid);
    if (in_reg_window(addr))
      return (claimed_q && id_match(id_q, rid)) ? 2'd2 : 2'd0;
    return region_ok(addr, len, size, burst, rid) ? 2'd1 : 2'd0;
  endfunction

  logic [1:0] dest_aw, dest_ar;
  assign dest_aw = decide(s_axi_req_i.aw.addr, s_axi_req_i.aw.len, s_axi_req_i.aw.size,
                          s_axi_req_i.aw.burst, user_to_id(s_axi_req_i.aw.user[14:0]));
  assign dest_ar = decide(s_axi_req_i.ar.addr, s_axi_req_i.ar.len, s_axi_req_i.ar.size,
                          s_axi_req_i.ar.burst, user_to_id(s_axi_req_i.ar.user[14:0]));

  axi_req_t  fw_req  [2];
  axi_resp_t fw_resp [2];
  logic aw_deny, ar_deny;

  axi4_firewall u_fw (
    .clk, .rst_n,
    .s_req_i (s_axi_req_i), .s_resp_o (s_axi_resp_o),
    .dest_aw_i (dest_aw), .dest_ar_i (dest_ar),
    .m_req_o (fw_req), .m_resp_i (fw_resp),
    .aw_deny_o (aw_deny), .ar_deny_o (ar_deny)
  );
  assign deny_o      = aw_deny | ar_deny;
  assign m_axi_req_o = fw_req[0];
  assign fw_resp[0]  = m_axi_resp_i;

  // ---------------- region registers (firewall output 1)
  logic                  mem_req, mem_we;
  logic [AXI_ADDR_W-1:0] mem_addr;
  logic [AXI_DATA_W-1:0] mem_wdata, rdata_q;
  logic [AXI_STRB_W-1:0] mem_strb;
  logic [USER_W-1:0]     mem_user;

  axi4_slave_port u_regs (
    .clk, .rst_n, .s_req_i (fw_req[1]), .s_resp_o (fw_resp[1]),
    .mem_req_o (mem_req), .mem_we_o (mem_we), .mem_addr_o (mem_addr),
    .mem_wdata_o (mem_wdata), .mem_strb_o (mem_strb), .mem_user_o (mem_user),
    .mem_rdata_i (rdata_q)
  );

  // Region registers are 32 bits wide in the low half of a 64-bit word and
  // are written whole; the firewall already checked the issuer's ID.
  logic unused_regs;
  assign unused_regs = ^{mem_wdata[63:32], mem_strb[7:1], mem_user};

  localparam int unsigned RIDX_W = (NUM_REGIONS > 1) ? $clog2(NUM_REGIONS) : 1;
  logic [RIDX_W-1:0] ridx;
  logic [1:0]        rsel;
  logic              rvalid;
  assign ridx   = mem_addr[5 +: RIDX_W];
  assign rsel   = mem_addr[4:3];
  assign rvalid = (32'(mem_addr - REG_BASE) >> 5) < NUM_REGIONS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NUM_REGIONS; r++) regions_q[r] <= '0;
      rdata_q <= '0;
    end else if (mem_req) begin
      if (mem_we) begin
        if (rvalid && mem_strb[0]) begin
          unique case (rsel)
            2'd0: regions_q[ridx].base  <= mem_wdata[AXI_ADDR_W-1:0];
            2'd1: regions_q[ridx].limit <= mem_wdata[AXI_ADDR_W-1:0];
            2'd2: {regions_q[ridx].v1, regions_q[ridx].id1,
                   regions_q[ridx].v0, regions_q[ridx].id0} <= mem_wdata[31:0];
            default: ;
          endcase
        end
      end else begin
        rdata_q <= '0;
        if (rvalid) begin
          unique case (rsel)
            2'd0: rdata_q <= AXI_DATA_W'(regions_q[ridx].base);
            2'd1: rdata_q <= AXI_DATA_W'(regions_q[ridx].limit);
            2'd2: rdata_q <= AXI_DATA_W'({regions_q[ridx].v1, regions_q[ridx].id1,
                                          regions_q[ridx].v0, regions_q[ridx].id0});
            default: ;
          endcase
        end
      end
    end
  end

  assign claimed_o = claimed_q;
  assign id_o      = id_q;
endmodule
