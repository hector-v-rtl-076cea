// tb_axil_bfm: simple AXI4-lite master for testbenches. write() presents AW
// and W together and waits for B; read() waits for R. Signals change on the
// falling clock edge and are sampled on the rising edge.
module tb_axil_bfm
  import hv_pkg::*;
(
  input  logic       clk,
  output axil_req_t  req_o,
  input  axil_resp_t resp_i
);
  initial req_o = '0;

  task automatic write(input logic [31:0] addr, input logic [31:0] data,
                       input logic [15:0] user, output logic [1:0] resp);
    logic aw_done, w_done;
    @(negedge clk);
    req_o.aw = '{addr: addr, user: user};
    req_o.w  = '{data: data, strb: '1};
    req_o.aw_valid = 1'b1;
    req_o.w_valid  = 1'b1;
    req_o.b_ready  = 1'b1;
    aw_done = 1'b0; w_done = 1'b0;
    forever begin
      @(posedge clk);
      if (resp_i.aw_ready) aw_done = 1'b1;
      if (resp_i.w_ready)  w_done  = 1'b1;
      if (resp_i.b_valid) begin resp = resp_i.b_resp; break; end
      @(negedge clk);
      if (aw_done) req_o.aw_valid = 1'b0;
      if (w_done)  req_o.w_valid  = 1'b0;
    end
    @(negedge clk);
    req_o.aw_valid = 1'b0; req_o.w_valid = 1'b0; req_o.b_ready = 1'b0;
  endtask

  task automatic read(input logic [31:0] addr, input logic [15:0] user,
                      output logic [31:0] data, output logic [1:0] resp);
    logic ar_done;
    @(negedge clk);
    req_o.ar = '{addr: addr, user: user};
    req_o.ar_valid = 1'b1;
    req_o.r_ready  = 1'b1;
    ar_done = 1'b0;
    forever begin
      @(posedge clk);
      if (resp_i.ar_ready) ar_done = 1'b1;
      if (resp_i.r_valid) begin data = resp_i.r_data; resp = resp_i.r_resp; break; end
      @(negedge clk);
      if (ar_done) req_o.ar_valid = 1'b0;
    end
    @(negedge clk);
    req_o.ar_valid = 1'b0; req_o.r_ready = 1'b0;
  endtask
endmodule
