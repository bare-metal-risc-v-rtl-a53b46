// tb_ahb2apb_bridge: AHB-Lite master -> bridge -> APB register-file slave
// with random wait states and PSLVERR at one address. Checks: written
// registers hold the written data, reads return them, back-to-back
// pipelined transfers keep order, the APB SETUP/ACCESS sequence is kept
// (PENABLE only after a SETUP cycle, address/data stable during ACCESS),
// PSLVERR becomes an AHB ERROR, and a zero-wait access takes 3 cycles.
module tb_ahb2apb_bridge;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ahb_m2s_t h_req;
  ahb_s2m_t h_rsp;
  apb_req_t p_req;
  apb_rsp_t p_rsp;
  bit       waits = 1'b1;

  ahb_master_bfm bfm (.clk, .req(h_req), .rsp(h_rsp));
  ahb2apb_bridge dut (.clk, .rst_n, .hsel(1'b1), .hready_in(h_rsp.hready), .s_req(h_req), .s_rsp(h_rsp),
                      .apb_req(p_req), .apb_rsp(p_rsp));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // APB slave: 64 registers, random wait states, PSLVERR at 0xFC
  logic [31:0] regs [64];
  logic        wait_now;
  apb_req_t    prev;
  always_ff @(posedge clk) wait_now <= waits && ($urandom_range(0, 2) == 0);
  always_comb begin
    p_rsp.pready  = !wait_now;
    p_rsp.prdata  = regs[p_req.paddr[7:2]];
    p_rsp.pslverr = (p_req.paddr[7:0] == 8'hFC);
  end
  always @(posedge clk) begin
    if (p_req.psel && p_req.penable && p_rsp.pready && p_req.pwrite) regs[p_req.paddr[7:2]] <= p_req.pwdata;
    if (rst_n && p_req.penable) begin
      check(p_req.psel && prev.psel, "PENABLE without SETUP");
      check(p_req.paddr == prev.paddr && p_req.pwrite == prev.pwrite, "address changed in ACCESS");
      if (p_req.pwrite) check(p_req.pwdata == prev.pwdata, "wdata changed in ACCESS");
    end
    prev <= p_req;
  end

  initial begin
    logic [31:0] shadow [64];
    logic [31:0] d;
    bit e;
    foreach (regs[i]) begin regs[i] = 0; shadow[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      automatic int r = $urandom_range(0, 62);
      automatic logic [31:0] v = $urandom;
      bfm.write(32'h4000_0000 | (r << 2), v, e);
      shadow[r] = v;
      check(!e, "write error");
      bfm.read(32'h4000_0000 | ($urandom_range(0, 62) << 2), d, e);
    end
    for (int r = 0; r < 63; r++) begin
      bfm.read(32'h4000_0000 | (r << 2), d, e);
      check(!e && d == shadow[r], $sformatf("reg %0d = %h, expected %h", r, d, shadow[r]));
    end
    // pipelined write/read pairs
    begin
      logic [31:0] a [] = new[6], wd [] = new[6], rd [];
      bit w [] = new[6], er [];
      logic [2:0] sz [] = new[6];
      for (int i = 0; i < 6; i++) begin
        a[i] = 32'h10 + 4 * (i / 2); w[i] = (i % 2 == 0); wd[i] = $urandom; sz[i] = 3'd2;
      end
      bfm.run(6, a, w, wd, sz, rd, er);
      for (int i = 1; i < 6; i += 2) check(rd[i] == wd[i - 1], $sformatf("pipelined read %0d", i));
    end
    bfm.write(32'h0000_00FC, 32'h1, e);
    check(e, "PSLVERR not reported");
    bfm.read(32'h0000_0004, d, e);
    check(!e, "error sticks");
    // timing with no wait states: address phase + SETUP + ACCESS + response
    waits = 1'b0;
    repeat (2) @(posedge clk);
    bfm.read(32'h0000_0008, d, e);
    check(bfm.last_cycles == 4, $sformatf("zero-wait read took %0d bus cycles (expected 4: address, 3 data)", bfm.last_cycles));
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
