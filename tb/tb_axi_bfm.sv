// tb_axi_bfm: simple AXI4 master for testbenches. Tasks issue one write or
// read burst at a time (INCR, 8-byte beats) and return the response. Beat i of
// a write carries data + i. Signals change on the falling clock edge and are
// sampled on the rising edge.
module tb_axi_bfm
  import hv_pkg::*;
(
  input  logic      clk,
  output axi_req_t  req_o,
  input  axi_resp_t resp_i
);
  initial req_o = '0;

  task automatic write(input logic [31:0] addr, input logic [63:0] data,
                       input logic [15:0] user, input logic [7:0] len,
                       output logic [1:0] resp);
    @(negedge clk);
    req_o.aw = '{id: 4'h3, addr: addr, len: len, size: 3'd3, burst: BURST_INCR, user: user};
    req_o.aw_valid = 1'b1;
    do @(posedge clk); while (!resp_i.aw_ready);
    @(negedge clk);
    req_o.aw_valid = 1'b0;
    for (int i = 0; i <= int'(len); i++) begin
      req_o.w = '{data: data + 64'(i), strb: '1, last: (i == int'(len))};
      req_o.w_valid = 1'b1;
      do @(posedge clk); while (!resp_i.w_ready);
      @(negedge clk);
    end
    req_o.w_valid = 1'b0;
    req_o.b_ready = 1'b1;
    do @(posedge clk); while (!resp_i.b_valid);
    resp = resp_i.b.resp;
    @(negedge clk);
    req_o.b_ready = 1'b0;
  endtask

  // Reads len+1 beats; returns the first beat's data, the XOR of all beats,
  // the worst response and the number of beats seen.
  task automatic read(input logic [31:0] addr, input logic [15:0] user, input logic [7:0] len,
                      output logic [63:0] data, output logic [63:0] xsum,
                      output logic [1:0] resp, output int beats);
    @(negedge clk);
    req_o.ar = '{id: 4'h5, addr: addr, len: len, size: 3'd3, burst: BURST_INCR, user: user};
    req_o.ar_valid = 1'b1;
    do @(posedge clk); while (!resp_i.ar_ready);
    @(negedge clk);
    req_o.ar_valid = 1'b0;
    req_o.r_ready = 1'b1;
    beats = 0; resp = RESP_OKAY; xsum = '0; data = '0;
    forever begin
      @(posedge clk);
      if (resp_i.r_valid) begin
        if (beats == 0) data = resp_i.r.data;
        xsum ^= resp_i.r.data;
        if (resp_i.r.resp != RESP_OKAY) resp = resp_i.r.resp;
        beats++;
        if (resp_i.r.last) break;
      end
    end
    @(negedge clk);
    req_o.r_ready = 1'b0;
  endtask
endmodule
