// tb_nvdla_wrapper_nvfull: as tb_nvdla_wrapper, with the 512-bit DBB of
// NVDLA's nv_full configuration. The wrapper between an AHB-Lite master, the NVDLA
// stand-in model and two AXI4 memory models (one per AXI master port, as
// the arbiter sits outside the wrapper). Checks: register writes and reads
// reach the accelerator over AHB -> APB -> CSB; core loads and stores reach
// DRAM over AHB -> AXI; a DMA job's W-bit DBB traffic arrives on the
// 32-bit port with the right data; the accelerator interrupt reaches irq.
module tb_nvdla_wrapper_nvfull;
  import soc_pkg::*;
  localparam int W = 512;                // DBB width, nv_full
  typedef axi512_req_t dbb_req_t;
  typedef axi512_rsp_t dbb_rsp_t;
  localparam int RATIO = W / 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ahb_m2s_t   h_req;
  ahb_s2m_t   h_rsp, nv_rsp, dr_rsp;
  logic       sel_nv, sel_dr, last_nv;
  axi32_req_t c_req, d_req;
  axi32_rsp_t c_rsp, d_rsp;
  logic        csb_valid, csb_ready, csb_write, csb_nposted, rd_valid, dla_intr, irq;
  logic [15:0] csb_addr;
  logic [31:0] csb_wdat, rd_data;
  dbb_req_t    dbb_req;
  dbb_rsp_t    dbb_rsp;

  // minimal decode: bit 20 and up clear -> NVDLA, otherwise DRAM
  assign sel_nv = (h_req.haddr[31:20] == 0);
  assign sel_dr = !sel_nv;
  always_ff @(posedge clk) if (h_rsp.hready) last_nv <= sel_nv;
  assign h_rsp = last_nv ? nv_rsp : dr_rsp;

  ahb_master_bfm bfm (.clk, .req(h_req), .rsp(h_rsp));
  nvdla_wrapper #(.DBB_W(W), .dbb_req_t(dbb_req_t), .dbb_rsp_t(dbb_rsp_t)) dut (.clk, .rst_n, .ahb_req(h_req), .ahb_hready(h_rsp.hready),
    .nvdla_hsel(sel_nv), .nvdla_rsp(nv_rsp), .dram_hsel(sel_dr), .dram_rsp(dr_rsp),
    .cpu_axi_req(c_req), .cpu_axi_rsp(c_rsp), .dla_axi_req(d_req), .dla_axi_rsp(d_rsp),
    .csb2nvdla_valid(csb_valid), .csb2nvdla_ready(csb_ready), .csb2nvdla_addr(csb_addr),
    .csb2nvdla_wdat(csb_wdat), .csb2nvdla_write(csb_write), .csb2nvdla_nposted(csb_nposted),
    .nvdla2csb_valid(rd_valid), .nvdla2csb_data(rd_data), .dbb_req, .dbb_rsp, .dla_intr, .irq);
  nvdla_model #(.W(W), .req_t(dbb_req_t), .rsp_t(dbb_rsp_t)) nv (.clk, .rst_n, .csb2nvdla_valid(csb_valid), .csb2nvdla_ready(csb_ready),
    .csb2nvdla_addr(csb_addr), .csb2nvdla_wdat(csb_wdat), .csb2nvdla_write(csb_write),
    .csb2nvdla_nposted(csb_nposted), .nvdla2csb_valid(rd_valid), .nvdla2csb_data(rd_data),
    .dbb_req, .dbb_rsp, .dla_intr);
  axi_mem_model #(.INIT_XOR(32'h1111_0000)) cmem (.clk, .rst_n, .req(c_req), .rsp(c_rsp));
  axi_mem_model #(.INIT_XOR(32'h2222_0000)) dmem (.clk, .rst_n, .req(d_req), .rsp(d_rsp));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam logic [31:0] SRC = 32'h0010_8000, DST = 32'h0011_0000, LEN = 10, ADD = 32'h0000_0101;

  initial begin
    logic [31:0] d;
    bit e;
    repeat (3) @(posedge clk);
    rst_n = 1;
    bfm.read(32'h0, d, e);
    check(!e && d == 32'h4E56_0001, $sformatf("ID register = %h", d));
    bfm.write(32'h4, SRC, e);   bfm.write(32'h8, DST, e);
    bfm.write(32'hC, LEN, e);   bfm.write(32'h10, ADD, e);
    bfm.read(32'h8, d, e);
    check(d == DST, "register read-back");
    check(nv.n_csb_wr == 4 && nv.n_csb_rd == 2, "CSB access count");
    // core-side DRAM traffic
    bfm.write(32'h0012_0000, 32'hCAFE_F00D, e);
    check(!e && cmem.peek(32'h0012_0000) == 32'hCAFE_F00D, "core store to DRAM");
    bfm.read(32'h0012_0004, d, e);
    check(!e && d == (32'h1111_0000 ^ 32'h0012_0004), "core load from DRAM");
    check(!irq, "irq before job");
    bfm.write(32'h14, 32'h1, e);   // start
    fork begin : wait_irq
      while (!irq) @(posedge clk);
    end join
    check(irq == dla_intr && irq, "irq follows dla_intr");
    for (int i = 0; i < RATIO * LEN; i++)
      check(dmem.peek(DST + 4 * i) == (32'h2222_0000 ^ (SRC + 4 * i)) + ADD, $sformatf("DMA word %0d", i));
    check(nv.n_dbb_rd_bursts == 3 && nv.n_dbb_wr_bursts == 3, "DBB burst count");
    check(dmem.max_rd_len == 4 * RATIO - 1 && dmem.max_wr_len == 4 * RATIO - 1, "32-bit bursts are RATIO times as long");
    bfm.read(32'h18, d, e);
    check(d[1], "status done");
    bfm.write(32'h18, 32'h2, e);
    repeat (2) @(posedge clk);
    check(!irq, "irq cleared");
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
