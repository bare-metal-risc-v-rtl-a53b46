// ahb_master_bfm: behavioural AHB-Lite master for testbenches.
// run() issues n transfers back to back, AHB-pipelined: the address phase
// of transfer i overlaps the data phase of transfer i-1, and both wait
// while HREADY is low. HREADY/HRESP/HRDATA are sampled on the falling
// edge. write()/read() are single transfers followed by IDLE. The number
// of cycles of the last run() is left in last_cycles.
module ahb_master_bfm
  import soc_pkg::*;
(
  input  logic     clk,
  output ahb_m2s_t req,
  input  ahb_s2m_t rsp
);
  int last_cycles;
  initial begin
    req = '0;
    req.htrans = HTRANS_IDLE;
    req.hsize  = 3'd2;
  end

  task automatic run(input int n, input logic [31:0] a [], input bit w [], input logic [31:0] wd [],
                     input logic [2:0] sz [], output logic [31:0] rd [], output bit err []);
    int dp, c;
    dp  = -1;
    c   = 0;
    rd  = new[n];
    err = new[n];
    for (int i = 0; i <= n; i++) begin
      if (i < n) begin
        req.haddr  <= a[i];
        req.htrans <= HTRANS_NONSEQ;
        req.hwrite <= w[i];
        req.hsize  <= sz[i];
      end else begin
        req.htrans <= HTRANS_IDLE;
        req.hwrite <= 1'b0;
      end
      if (dp >= 0) req.hwdata <= wd[dp];
      forever begin
        @(negedge clk);
        c++;
        if (dp >= 0 && rsp.hresp) err[dp] = 1'b1;
        if (rsp.hready) begin
          if (dp >= 0) rd[dp] = rsp.hrdata;
          break;
        end
        @(posedge clk);
      end
      @(posedge clk);
      dp = i;
    end
    last_cycles = c;
  endtask

  task automatic write(input logic [31:0] addr, input logic [31:0] data, output bit e);
    logic [31:0] a [], wd [], rd [];
    logic [2:0]  sz [];
    bit          w [], er [];
    a = new[1]; w = new[1]; wd = new[1]; sz = new[1];
    a[0] = addr; w[0] = 1'b1; wd[0] = data; sz[0] = 3'd2;
    run(1, a, w, wd, sz, rd, er);
    e = er[0];
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] data, output bit e);
    logic [31:0] a [], wd [], rd [];
    logic [2:0]  sz [];
    bit          w [], er [];
    a = new[1]; w = new[1]; wd = new[1]; sz = new[1];
    a[0] = addr; w[0] = 1'b0; wd[0] = 32'h0; sz[0] = 3'd2;
    run(1, a, w, wd, sz, rd, er);
    data = rd[0];
    e = er[0];
  endtask
endmodule
