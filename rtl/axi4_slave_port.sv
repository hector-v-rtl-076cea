// axi4_slave_port: AXI4 slave front end that turns bursts into one memory
// access per beat, for the BRAMs, the reset unit and the MPU register block.
//
// One transaction is handled at a time; when both are waiting, a write is
// taken before a read. INCR and WRAP bursts advance the address by 2**size
// bytes per beat (WRAP is treated as INCR), FIXED bursts keep it. A write beat
// is issued in the cycle W is accepted (mem_req_o & mem_we_o). A read beat is
// issued in one cycle and its data, returned by the memory one cycle later on
// mem_rdata_i, is presented on R in the next; so a read beat takes two cycles
// and a write beat one. The adapter is a design choice of this RTL: the paper
// gives no timing for its BRAMs.
module axi4_slave_port
  import hv_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  axi_req_t              s_req_i,
  output axi_resp_t             s_resp_o,
  output logic                  mem_req_o,
  output logic                  mem_we_o,
  output logic [AXI_ADDR_W-1:0] mem_addr_o,
  output logic [AXI_DATA_W-1:0] mem_wdata_o,
  output logic [AXI_STRB_W-1:0] mem_strb_o,
  output logic [USER_W-1:0]     mem_user_o,
  input  logic [AXI_DATA_W-1:0] mem_rdata_i
);
  typedef enum logic [2:0] {S_IDLE, S_WR, S_WRESP, S_RREQ, S_RDATA} state_e;
  state_e state_q;
  axi_ax_t ax_q;

  function automatic logic [AXI_ADDR_W-1:0] next_addr(logic [AXI_ADDR_W-1:0] addr,
                                                      logic [2:0] size, logic [1:0] burst);
    if (burst == BURST_FIXED) return addr;
    return addr + (AXI_ADDR_W'(1) << size);
  endfunction

  always_comb begin
    s_resp_o    = '0;
    mem_req_o   = 1'b0;
    mem_we_o    = 1'b0;
    mem_addr_o  = ax_q.addr;
    mem_wdata_o = s_req_i.w.data;
    mem_strb_o  = s_req_i.w.strb;
    mem_user_o  = ax_q.user;
    unique case (state_q)
      S_IDLE: begin
        s_resp_o.aw_ready = 1'b1;
        s_resp_o.ar_ready = !s_req_i.aw_valid;
      end
      S_WR: begin
        s_resp_o.w_ready = 1'b1;
        mem_req_o        = s_req_i.w_valid;
        mem_we_o         = 1'b1;
      end
      S_WRESP: begin
        s_resp_o.b_valid = 1'b1;
        s_resp_o.b.id    = ax_q.id;
        s_resp_o.b.resp  = RESP_OKAY;
      end
      S_RREQ: begin
        mem_req_o = 1'b1;
      end
      S_RDATA: begin
        s_resp_o.r_valid = 1'b1;
        s_resp_o.r.id    = ax_q.id;
        s_resp_o.r.data  = mem_rdata_i;
        s_resp_o.r.resp  = RESP_OKAY;
        s_resp_o.r.last  = (ax_q.len == 8'd0);
      end
      default: ;
    endcase
  end

  // The read data must stay stable while R waits: the memory only changes its
  // output on a new request, and none is issued in S_RDATA.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      ax_q    <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (s_req_i.aw_valid) begin
            ax_q    <= s_req_i.aw;
            state_q <= S_WR;
          end else if (s_req_i.ar_valid) begin
            ax_q    <= s_req_i.ar;
            state_q <= S_RREQ;
          end
        end
        S_WR: if (s_req_i.w_valid) begin
          ax_q.addr <= next_addr(ax_q.addr, ax_q.size, ax_q.burst);
          if (s_req_i.w.last) state_q <= S_WRESP;
        end
        S_WRESP: if (s_req_i.b_ready) state_q <= S_IDLE;
        S_RREQ:  state_q <= S_RDATA;
        S_RDATA: if (s_req_i.r_ready) begin
          if (ax_q.len == 8'd0) state_q <= S_IDLE;
          else begin
            ax_q.len  <= ax_q.len - 8'd1;
            ax_q.addr <= next_addr(ax_q.addr, ax_q.size, ax_q.burst);
            state_q   <= S_RREQ;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
