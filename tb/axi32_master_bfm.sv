// axi32_master_bfm: behavioural 32-bit AXI4 master for testbenches.
// write_burst/read_burst run one INCR burst of 4-byte beats; the address
// is issued first, then data, then the response is taken. Data of a write
// burst is wdata[i]; a read fills rdata[i]. Not synthesizable intent.
module axi32_master_bfm
  import soc_pkg::*;
(
  input  logic       clk,
  output axi32_req_t req,
  input  axi32_rsp_t rsp
);
  initial req = '0;

  task automatic write_burst(input logic [31:0] addr, input int len, input logic [AXI_ID_W-1:0] id,
                             input logic [31:0] wdata [], output logic [1:0] resp);
    req.aw <= '{id: id, addr: addr, len: 8'(len - 1), size: 3'd2, burst: AXI_BURST_INCR};
    req.aw_valid <= 1'b1;
    do @(negedge clk); while (!rsp.aw_ready);
    @(posedge clk);
    req.aw_valid <= 1'b0;
    for (int i = 0; i < len; i++) begin
      req.w_data <= wdata[i]; req.w_strb <= 4'hF; req.w_last <= (i == len - 1); req.w_valid <= 1'b1;
      do @(negedge clk); while (!rsp.w_ready);
    @(posedge clk);
    end
    req.w_valid <= 1'b0;
    req.b_ready <= 1'b1;
    do @(negedge clk); while (!rsp.b_valid);
    resp = rsp.b_resp;
    @(posedge clk);
    req.b_ready <= 1'b0;
  endtask

  task automatic read_burst(input logic [31:0] addr, input int len, input logic [AXI_ID_W-1:0] id,
                            output logic [31:0] rdata [], output logic [1:0] resp, output bit last_ok);
    rdata = new[len];
    last_ok = 1'b1;
    resp = 2'b00;
    req.ar <= '{id: id, addr: addr, len: 8'(len - 1), size: 3'd2, burst: AXI_BURST_INCR};
    req.ar_valid <= 1'b1;
    do @(negedge clk); while (!rsp.ar_ready);
    @(posedge clk);
    req.ar_valid <= 1'b0;
    req.r_ready <= 1'b1;
    for (int i = 0; i < len; i++) begin
      do @(negedge clk); while (!rsp.r_valid);
      rdata[i] = rsp.r_data;
      if (rsp.r_resp != 2'b00) resp = rsp.r_resp;
      if (rsp.r_last != (i == len - 1)) last_ok = 1'b0;
      @(posedge clk);
    end
    req.r_ready <= 1'b0;
  endtask
endmodule
