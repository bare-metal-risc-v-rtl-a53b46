// tb_axi_dwidth_conv_nvfull: a 512-bit AXI4 master (as NVDLA's nv_full DBB)
// writes and reads bursts through the width converter into a 32-bit
// memory model. Checks: each wide beat lands as RATIO little-endian 32-bit
// words, byte strobes are honoured, read beats are repacked in order with
// RLAST on the last one, the 32-bit burst is RATIO times as long, and a
// wide beat costs RATIO cycles on the 32-bit side when nothing stalls.
module tb_axi_dwidth_conv_nvfull;
  import soc_pkg::*;
  localparam int W = 512;                // wide (DBB) data width, nv_full
  typedef axi512_req_t sreq_t;
  typedef axi512_rsp_t srsp_t;
  localparam int RATIO = W / 32;
  localparam int MAXB  = 8;              // longest wide burst tried

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  sreq_t      s_req;
  srsp_t      s_rsp;
  axi32_req_t m_req;
  axi32_rsp_t m_rsp;

  axi_dwidth_conv #(.SLV_W(W), .slv_req_t(sreq_t), .slv_rsp_t(srsp_t)) dut (.clk, .rst_n, .s_req, .s_rsp, .m_req, .m_rsp);
  axi_mem_model #(.LAT(1), .STALL(1'b0)) mem (.clk, .rst_n, .req(m_req), .rsp(m_rsp));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // narrow burst lengths seen on the 32-bit side
  int last_m_awlen, last_m_arlen;
  always @(posedge clk) begin
    if (m_req.aw_valid && m_rsp.aw_ready) last_m_awlen = m_req.aw.len;
    if (m_req.ar_valid && m_rsp.ar_ready) last_m_arlen = m_req.ar.len;
  end

  function automatic logic [W-1:0] rnd_wide();
    logic [W-1:0] v;
    for (int k = 0; k < RATIO; k++) v[32 * k +: 32] = $urandom;
    return v;
  endfunction

  task automatic wr_wide(input logic [31:0] addr, input int n, input logic [W-1:0] d [], input logic [W/8-1:0] strb [],
                         output int data_cycles);
    int c0;
    s_req.aw <= '{id: 8'h3, addr: addr, len: 8'(n - 1), size: 3'($clog2(W / 8)), burst: AXI_BURST_INCR};
    s_req.aw_valid <= 1'b1;
    do @(negedge clk); while (!s_rsp.aw_ready);
    @(posedge clk);
    s_req.aw_valid <= 1'b0;
    c0 = $time / 10;
    for (int i = 0; i < n; i++) begin
      s_req.w_data <= d[i]; s_req.w_strb <= strb[i]; s_req.w_last <= (i == n - 1); s_req.w_valid <= 1'b1;
      do @(negedge clk); while (!s_rsp.w_ready);
      @(posedge clk);
    end
    data_cycles = $time / 10 - c0;
    s_req.w_valid <= 1'b0;
    s_req.b_ready <= 1'b1;
    do @(negedge clk); while (!s_rsp.b_valid);
    check(s_rsp.b_resp == 2'b00 && s_rsp.b_id == 8'h3, "bresp/bid");
    @(posedge clk);
    s_req.b_ready <= 1'b0;
  endtask

  task automatic rd_wide(input logic [31:0] addr, input int n, output logic [W-1:0] d []);
    d = new[n];
    s_req.ar <= '{id: 8'h5, addr: addr, len: 8'(n - 1), size: 3'($clog2(W / 8)), burst: AXI_BURST_INCR};
    s_req.ar_valid <= 1'b1;
    do @(negedge clk); while (!s_rsp.ar_ready);
    @(posedge clk);
    s_req.ar_valid <= 1'b0;
    for (int i = 0; i < n; i++) begin
      forever begin
        s_req.r_ready <= ($urandom_range(0, 2) != 0);
        @(negedge clk);
        if (s_rsp.r_valid && s_req.r_ready) break;
        @(posedge clk);
      end
      d[i] = s_rsp.r_data;
      check(s_rsp.r_last == (i == n - 1), "rlast position");
      check(s_rsp.r_id == 8'h5, "rid");
      @(posedge clk);
    end
    s_req.r_ready <= 1'b0;
  endtask

  initial begin
    logic [W-1:0]   d [], q [];
    logic [W/8-1:0] st [];
    int cyc;
    s_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      automatic int n = 1 + (t % MAXB);
      automatic logic [31:0] a = 32'h0020_0000 + t * 32'h1000;
      d = new[n]; st = new[n];
      foreach (d[i]) begin
        d[i] = rnd_wide();
        for (int k = 0; k < W / 8; k++) st[i][k] = (t % 3 == 2) ? 1'($urandom) : 1'b1;
      end
      wr_wide(a, n, d, st, cyc);
      check(last_m_awlen == RATIO * n - 1, $sformatf("awlen %0d for %0d beats", last_m_awlen, n));
      if (t % 3 != 2) check(cyc == RATIO * n, $sformatf("write took %0d cycles for %0d beats", cyc, n));
      // memory content, worked out from the strobes and the untouched init pattern
      for (int i = 0; i < n; i++)
        for (int h = 0; h < RATIO; h++) begin
          automatic logic [31:0] wa = a + (W / 8) * i + 4 * h;
          automatic logic [31:0] exp = 32'h5A5A_0000 ^ wa;
          for (int b = 0; b < 4; b++) if (st[i][4*h + b]) exp[8*b +: 8] = d[i][32*h + 8*b +: 8];
          check(mem.peek(wa) == exp, $sformatf("word %h = %h, expected %h", wa, mem.peek(wa), exp));
        end
      rd_wide(a, n, q);
      check(last_m_arlen == RATIO * n - 1, "arlen");
      for (int i = 0; i < n; i++)
        for (int h = 0; h < RATIO; h++)
          check(q[i][32 * h +: 32] == mem.peek(a + (W / 8) * i + 4 * h), $sformatf("read beat %0d slice %0d", i, h));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
