// axi4_bram: on-chip block RAM with an AXI4 slave port.
//
// The paper uses several BRAMs (boot BRAM, claimable code BRAMs, secure code
// storage, secure storage elements) but does not describe their insides, so
// this is a plain word-organised RAM: AXI_DATA_W-bit words with byte strobes,
// synchronous read, no reset of the contents. Bursts are split into beats by
// axi4_slave_port: a write beat takes one cycle, a read beat two. Addresses
// wrap modulo BYTES (only the low log2(BYTES) address bits are decoded; the
// crossbar does the rest). BYTES is this design's choice (not given by the
// paper).
module axi4_bram
  import hv_pkg::*;
#(
  parameter int unsigned BYTES = 65536
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axi_req_t  s_req_i,
  output axi_resp_t s_resp_o
);
  localparam int unsigned WORDS  = BYTES / AXI_STRB_W;
  localparam int unsigned WIDX_W = $clog2(WORDS);
  localparam int unsigned OFFS_W = $clog2(AXI_STRB_W);

  logic                  mem_req, mem_we;
  logic [AXI_ADDR_W-1:0] mem_addr;
  logic [AXI_DATA_W-1:0] mem_wdata, mem_rdata_q;
  logic [AXI_STRB_W-1:0] mem_strb;
  logic [USER_W-1:0]     mem_user;

  axi4_slave_port u_port (
    .clk, .rst_n, .s_req_i, .s_resp_o,
    .mem_req_o (mem_req), .mem_we_o (mem_we), .mem_addr_o (mem_addr),
    .mem_wdata_o (mem_wdata), .mem_strb_o (mem_strb), .mem_user_o (mem_user),
    .mem_rdata_i (mem_rdata_q)
  );

  logic [AXI_DATA_W-1:0] mem [WORDS];
  logic [WIDX_W-1:0] widx;
  assign widx = mem_addr[OFFS_W +: WIDX_W];

  // Only the word index is decoded (the crossbar decoded the base address,
  // accesses are whole 64-bit words with byte strobes), and a plain memory
  // does not look at the issuer's ID.
  logic unused_port;
  assign unused_port = ^{mem_addr, mem_user};

  always_ff @(posedge clk) begin
    if (mem_req) begin
      if (mem_we) begin
        for (int b = 0; b < AXI_STRB_W; b++)
          if (mem_strb[b]) mem[widx][8*b +: 8] <= mem_wdata[8*b +: 8];
      end else begin
        mem_rdata_q <= mem[widx];
      end
    end
  end
endmodule
