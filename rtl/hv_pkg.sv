// hv_pkg: types and constants shared by the HECTOR-V SoC.
//
// The identifier that every bus request carries is the heart of the design. It
// is 15 bits wide: a 1-bit core ID, a 4-bit process ID and a 10-bit peripheral
// ID, carried in a 16-bit AXI user signal (bit 15 is unused and driven 0). The
// field widths and the 16-bit user signal follow the paper. A stored ID field
// whose process or peripheral part is zero ignores that part of a request
// (wildcard), so an ID such as {core, 0, 0} admits every process of a core.
//
// AXI4 and AXI4-lite channels are bundled as packed request/response structs
// (master drives *_req_t, slave drives *_resp_t). Widths are this design's
// choice: 32-bit addresses, 64-bit AXI4 data (the Rocket side of lowRISC),
// 32-bit AXI4-lite data, 4-bit AXI IDs. AXI4-lite address channels also carry
// the user signal, because the security monitor identifies the issuer of a
// command by it.
package hv_pkg;

  // ---------------------------------------------------------------- identifiers
  localparam int unsigned CORE_ID_W   = 1;
  localparam int unsigned PROC_ID_W   = 4;
  localparam int unsigned PERIPH_ID_W = 10;
  localparam int unsigned USER_W      = 16;

  typedef struct packed {
    logic [CORE_ID_W-1:0]   core;
    logic [PROC_ID_W-1:0]   proc;
    logic [PERIPH_ID_W-1:0] periph;
  } hv_id_t;  // 15 bits

  localparam logic [CORE_ID_W-1:0] CORE_REE = 1'b0;  // application processor
  localparam logic [CORE_ID_W-1:0] CORE_TEE = 1'b1;  // RVSCP

  function automatic logic [USER_W-1:0] id_to_user(hv_id_t id);
    return {1'b0, id};
  endfunction

  // Bit 15 of the user signal is not part of the ID; callers pass the low
  // $bits(hv_id_t) bits only.
  function automatic hv_id_t user_to_id(logic [$bits(hv_id_t)-1:0] user);
    return hv_id_t'(user);
  endfunction

  // Does request ID `req` match the stored ID `field`? A zero process or
  // peripheral part of the stored field is a wildcard.
  function automatic logic id_match(hv_id_t field, hv_id_t req);
    return (field.core == req.core)
        && (field.proc == '0 || field.proc == req.proc)
        && (field.periph == '0 || field.periph == req.periph);
  endfunction

  // ---------------------------------------------------------------- AXI4
  localparam int unsigned AXI_ADDR_W = 32;
  localparam int unsigned AXI_DATA_W = 64;
  localparam int unsigned AXI_STRB_W = AXI_DATA_W / 8;
  localparam int unsigned AXI_ID_W   = 4;

  typedef logic [1:0] axi_resp_e_t;
  localparam axi_resp_e_t RESP_OKAY   = 2'b00;
  localparam axi_resp_e_t RESP_SLVERR = 2'b10;
  localparam axi_resp_e_t RESP_DECERR = 2'b11;

  localparam logic [1:0] BURST_FIXED = 2'b00;
  localparam logic [1:0] BURST_INCR  = 2'b01;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_ADDR_W-1:0] addr;
    logic [7:0]            len;
    logic [2:0]            size;
    logic [1:0]            burst;
    logic [USER_W-1:0]     user;
  } axi_ax_t;

  typedef struct packed {
    logic [AXI_DATA_W-1:0] data;
    logic [AXI_STRB_W-1:0] strb;
    logic                  last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    axi_resp_e_t         resp;
  } axi_b_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_DATA_W-1:0] data;
    axi_resp_e_t           resp;
    logic                  last;
  } axi_r_t;

  typedef struct packed {
    axi_ax_t aw;
    logic    aw_valid;
    axi_w_t  w;
    logic    w_valid;
    logic    b_ready;
    axi_ax_t ar;
    logic    ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic   aw_ready;
    logic   w_ready;
    axi_b_t b;
    logic   b_valid;
    logic   ar_ready;
    axi_r_t r;
    logic   r_valid;
  } axi_resp_t;

  // ---------------------------------------------------------------- AXI4-lite
  localparam int unsigned AXIL_DATA_W = 32;

  typedef struct packed {
    logic [AXI_ADDR_W-1:0] addr;
    logic [USER_W-1:0]     user;
  } axil_ax_t;

  typedef struct packed {
    logic [AXIL_DATA_W-1:0]   data;
    logic [AXIL_DATA_W/8-1:0] strb;
  } axil_w_t;

  typedef struct packed {
    axil_ax_t aw;
    logic     aw_valid;
    axil_w_t  w;
    logic     w_valid;
    logic     b_ready;
    axil_ax_t ar;
    logic     ar_valid;
    logic     r_ready;
  } axil_req_t;

  typedef struct packed {
    logic                   aw_ready;
    logic                   w_ready;
    axi_resp_e_t            b_resp;
    logic                   b_valid;
    logic                   ar_ready;
    logic [AXIL_DATA_W-1:0] r_data;
    axi_resp_e_t            r_resp;
    logic                   r_valid;
  } axil_resp_t;

  // ---------------------------------------------------------------- wrapper ID field
  // Layout of the ID register of a peripheral wrapper (and of the MPU), as
  // written by the security monitor: bit 16 = claimed, bits 14:0 = ID.
  localparam int unsigned IDREG_CLAIMED_BIT = 16;

  // ---------------------------------------------------------------- security monitor
  // Command word written to the SM's CMD register (offset 0x0):
  //   [31:29] opcode  [28:25] peripheral index  [24:23] allowed-list slot
  //   [22] entry valid (CONFIG)  [14:0] ID argument
  // Bits [21:15] are reserved and must be zero (the command is INVALID otherwise).
  // For CLAIM only the peripheral-ID part of the argument is used; core and
  // process ID are always the issuer's own.
  typedef enum logic [2:0] {
    SM_NOP      = 3'd0,
    SM_CLAIM    = 3'd1,
    SM_RELEASE  = 3'd2,
    SM_STATUS   = 3'd3,
    SM_WITHDRAW = 3'd4,
    SM_CONFIG   = 3'd5,  // privileged
    SM_TRANSFER = 3'd6   // privileged
  } sm_op_e;

  typedef enum logic [2:0] {
    SM_RES_NONE    = 3'd0,
    SM_RES_OK      = 3'd1,
    SM_RES_DENIED  = 3'd2,  // issuer not permitted / not privileged
    SM_RES_BUSY    = 3'd3,  // peripheral already claimed
    SM_RES_INVALID = 3'd4   // bad opcode or peripheral index
  } sm_res_e;

  typedef struct packed {
    sm_op_e      op;
    logic [3:0]  periph;
    logic [1:0]  slot;
    logic        valid;
    logic [5:0]  rsvd;
    logic        rsvd15;
    hv_id_t      id;
  } sm_cmd_t;  // 32 bits

  // Result register (offset 0x4), one per SM port:
  //   [31] busy  [30:28] result  [27] claimed  [26] withdraw pending
  //   [25] issuer permitted  [24] issuer is SM owner
  localparam logic [AXI_ADDR_W-1:0] SM_REG_CMD    = 32'h0;
  localparam logic [AXI_ADDR_W-1:0] SM_REG_RESULT = 32'h4;

endpackage
