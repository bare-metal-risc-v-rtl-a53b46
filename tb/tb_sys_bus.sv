// tb_sys_bus: one AHB-Lite master, two slave models (NVDLA path, DRAM
// path) behind the system bus. Checks the address map at and around every
// range boundary: each transfer reaches exactly the slave that owns its
// address, read data and wait states come back from that slave, writes
// land there, and addresses above the DRAM window get the ERROR response.
module tb_sys_bus;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ahb_m2s_t m_req, s_req;
  ahb_s2m_t m_rsp, n_rsp, d_rsp;
  logic     s_hready, n_sel, d_sel;

  ahb_master_bfm bfm (.clk, .req(m_req), .rsp(m_rsp));
  sys_bus dut (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_hready, .nvdla_hsel(n_sel), .dram_hsel(d_sel),
               .nvdla_rsp(n_rsp), .dram_rsp(d_rsp));
  ahb_slave_model #(.TAG(32'hA000_0000)) nv (.clk, .rst_n, .hsel(n_sel), .hready_in(s_hready), .req(s_req), .rsp(n_rsp));
  ahb_slave_model #(.TAG(32'hB000_0000)) dr (.clk, .rst_n, .hsel(d_sel), .hready_in(s_hready), .req(s_req), .rsp(d_rsp));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // 0 = NVDLA, 1 = DRAM, 2 = unmapped, from the address map
  function automatic int owner(input logic [31:0] a);
    if (a <= 32'h000F_FFFF) return 0;
    if (a >= 32'h0010_0000 && a <= 32'h200F_FFFF) return 1;
    return 2;
  endfunction

  initial begin
    logic [31:0] addrs [$] = '{32'h0, 32'h4, 32'h000F_FFFC, 32'h0010_0000, 32'h0010_0004, 32'h1234_5678,
                               32'h200F_FFFC, 32'h2010_0000, 32'h8000_0000, 32'hFFFF_FFFC, 32'h0008_0000};
    logic [31:0] d;
    bit e;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 40; k++) addrs.push_back({$urandom_range(0, 32'h2FFF_FFFF)} & 32'hFFFF_FFFC);
    foreach (addrs[i]) begin
      automatic logic [31:0] a = addrs[i] & 32'hFFFF_FFFC;
      automatic int o = owner(a);
      automatic int n0 = nv.n_xfer, d0 = dr.n_xfer;
      automatic logic [31:0] v = $urandom;
      bfm.write(a, v, e);
      @(negedge clk);   // let the slave model store the data phase
      check(e == (o == 2), $sformatf("write %h: error=%0d", a, e));
      check((nv.n_xfer - n0) == (o == 0) && (dr.n_xfer - d0) == (o == 1), $sformatf("write %h went to wrong slave", a));
      if (o == 0) check(nv.peek(a) == v, "NVDLA-side write data");
      if (o == 1) check(dr.peek(a) == v, "DRAM-side write data");
      bfm.read(a, d, e);
      check(e == (o == 2), $sformatf("read %h: error=%0d", a, e));
      if (o < 2) check(d == v, $sformatf("read %h = %h, expected %h", a, d, v));
    end
    // pipelined mix across both slaves
    begin
      logic [31:0] a [] = new[8], wd [] = new[8], rd [];
      bit w [] = new[8], er [];
      logic [2:0] sz [] = new[8];
      for (int i = 0; i < 8; i++) begin
        a[i] = (i % 2) ? 32'h0010_0040 + 4 * i : 32'h0000_0040 + 4 * i;
        w[i] = 1'b0; wd[i] = 0; sz[i] = 3'd2;
      end
      bfm.run(8, a, w, wd, sz, rd, er);
      for (int i = 0; i < 8; i++)
        check(rd[i] == ((i % 2) ? dr.peek(a[i]) : nv.peek(a[i])), $sformatf("pipelined read %0d", i));
    end
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
