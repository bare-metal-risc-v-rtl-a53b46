// tb_axi_arbiter: two AXI4 masters (core side, NVDLA side) hammer one
// memory through the arbiter. Checks: every burst's data is intact, the
// DRAM port never carries beats of one master while the other is granted
// (checked by AXI ID), and under contention the grant alternates.
module tb_axi_arbiter;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi32_req_t s0_req, s1_req, m_req;
  axi32_rsp_t s0_rsp, s1_rsp, m_rsp;

  axi32_master_bfm bfm0 (.clk, .req(s0_req), .rsp(s0_rsp));
  axi32_master_bfm bfm1 (.clk, .req(s1_req), .rsp(s1_rsp));
  axi_arbiter dut (.clk, .rst_n, .s0_req, .s0_rsp, .s1_req, .s1_rsp, .m_req, .m_rsp);
  axi_mem_model #(.LAT(1)) mem (.clk, .rst_n, .req(m_req), .rsp(m_rsp));

  // ---- monitor: ID of the active burst on the DRAM side and fairness
  int cur_rd_id = -1, cur_wr_id = -1, last_grant = -1, contention = 0;
  always @(posedge clk) if (rst_n) begin
    if (m_req.ar_valid && m_rsp.ar_ready) cur_rd_id = m_req.ar.id;
    if (m_req.aw_valid && m_rsp.aw_ready) cur_wr_id = m_req.aw.id;
    // beats towards a port must belong to that port's burst
    if (s0_rsp.r_valid || s1_rsp.r_valid) begin
      checks++;
      if ((s0_rsp.r_valid && cur_rd_id != 0) || (s1_rsp.r_valid && cur_rd_id != 1)) begin
        failures++; $display("FAIL read beat to wrong master (id %0d)", cur_rd_id);
      end
    end
    if (m_req.w_valid && m_rsp.w_ready) begin
      checks++;
      if (cur_wr_id < 0 || (cur_wr_id == 0 ? !s0_req.w_valid : !s1_req.w_valid) ||
          m_req.w_data != (cur_wr_id == 0 ? s0_req.w_data : s1_req.w_data)) begin
        failures++; $display("FAIL write beat not from the granted master");
      end
    end
    // grant decision in IDLE with both requesting
    if (dut.state == dut.S_IDLE && (s0_req.ar_valid || s0_req.aw_valid) && (s1_req.ar_valid || s1_req.aw_valid)) begin
      contention++;
      checks++;
      if (last_grant >= 0 && int'(dut.pick) == last_grant) begin
        failures++; $display("FAIL round robin: master %0d granted twice in a row", last_grant);
      end
    end
    if (dut.state == dut.S_IDLE && (s0_req.ar_valid || s0_req.aw_valid || s1_req.ar_valid || s1_req.aw_valid))
      last_grant = int'(dut.pick);
  end

  task automatic run_master(input int m, input int n);
    logic [31:0] wd [], rd [];
    logic [1:0] resp; bit lok;
    for (int t = 0; t < n; t++) begin
      int len;
      logic [31:0] a;
      len = 1 + (t % 8);
      a = 32'h0010_0000 + m * 32'h1_0000 + t * 32'h40;
      wd = new[len];
      foreach (wd[i]) wd[i] = $urandom;
      if (m == 0) bfm0.write_burst(a, len, 8'(m), wd, resp); else bfm1.write_burst(a, len, 8'(m), wd, resp);
      checks++; if (resp != 0) begin failures++; $display("FAIL bresp"); end
      if (m == 0) bfm0.read_burst(a, len, 8'(m), rd, resp, lok); else bfm1.read_burst(a, len, 8'(m), rd, resp, lok);
      checks++;
      if (!lok || resp != 0) begin failures++; $display("FAIL rlast/rresp m%0d t%0d", m, t); end
      foreach (wd[i]) begin
        checks++;
        if (rd[i] !== wd[i]) begin failures++; $display("FAIL m%0d t%0d beat %0d: %h != %h", m, t, i, rd[i], wd[i]); end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      run_master(0, 20);
      run_master(1, 20);
    join
    checks++;
    if (contention < 5) begin failures++; $display("FAIL too little contention: %0d", contention); end
    $display("contention events: %0d", contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
