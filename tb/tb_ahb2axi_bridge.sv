// tb_ahb2axi_bridge: an AHB-Lite master drives the bridge, whose AXI4 side
// goes to a memory model. Checks: word, half-word and byte writes update
// exactly the addressed bytes; reads return the memory word; back-to-back
// pipelined transfers keep their order; every AXI transaction is a single
// beat; a SLVERR from the memory becomes an AHB ERROR; an idle write costs
// a bounded number of cycles.
module tb_ahb2axi_bridge;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ahb_m2s_t   h_req;
  ahb_s2m_t   h_rsp;
  axi32_req_t a_req;
  axi32_rsp_t a_rsp;

  ahb_master_bfm bfm (.clk, .req(h_req), .rsp(h_rsp));
  ahb2axi_bridge dut (.clk, .rst_n, .hsel(1'b1), .hready_in(h_rsp.hready), .s_req(h_req), .s_rsp(h_rsp),
                      .m_req(a_req), .m_rsp(a_rsp));
  axi_mem_model #(.LAT(2), .ERR_LO(32'h0F00_0000), .ERR_HI(32'h0F00_00FF)) mem (.clk, .rst_n, .req(a_req), .rsp(a_rsp));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge clk) begin
    if (a_req.ar_valid) check(a_req.ar.len == 0, "AR not single beat");
    if (a_req.aw_valid) check(a_req.aw.len == 0, "AW not single beat");
  end

  logic [31:0] model [logic [29:0]];
  function automatic logic [31:0] ref_word(input logic [31:0] a);
    return model.exists(a[31:2]) ? model[a[31:2]] : (32'h5A5A_0000 ^ {a[31:2], 2'b00});
  endfunction

  initial begin
    logic [31:0] d;
    bit e;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // word writes and reads
    for (int i = 0; i < 16; i++) begin
      automatic logic [31:0] a = 32'h0010_0000 + 4 * i;
      automatic logic [31:0] v = $urandom;
      bfm.write(a, v, e);
      model[a[31:2]] = v;
      check(!e, "write error");
      check(bfm.last_cycles <= 12, $sformatf("write took %0d cycles", bfm.last_cycles));
    end
    for (int i = 0; i < 16; i++) begin
      automatic logic [31:0] a = 32'h0010_0000 + 4 * i;
      bfm.read(a, d, e);
      check(!e && d == ref_word(a), $sformatf("read %h = %h, expected %h", a, d, ref_word(a)));
    end
    // sub-word writes, pipelined with reads
    begin
      logic [31:0] aa [] = new[8], wd [] = new[8], rd [];
      bit w [] = new[8], er [];
      logic [2:0] sz [] = new[8];
      for (int i = 0; i < 8; i++) begin
        aa[i] = 32'h0010_0100 + (i / 2) * 4 + ((i % 2) ? 0 : (i % 4));
        w[i]  = (i % 2 == 0);
        sz[i] = (i % 4 == 0) ? 3'd0 : 3'd1;
        aa[i] = (i % 2) ? {aa[i][31:2], 2'b00} : (sz[i] == 3'd1 ? {aa[i][31:2], 2'b10} : {aa[i][31:2], 2'b01});
        wd[i] = $urandom;
      end
      bfm.run(8, aa, w, wd, sz, rd, er);
      for (int i = 0; i < 8; i++) begin
        if (w[i]) begin
          automatic logic [31:0] old = ref_word(aa[i]);
          automatic int nb = (sz[i] == 0) ? 1 : 2;
          for (int b = 0; b < nb; b++) old[8 * (aa[i][1:0] + b) +: 8] = wd[i][8 * (aa[i][1:0] + b) +: 8];
          model[aa[i][31:2]] = old;
        end else begin
          check(rd[i] == ref_word(aa[i]), $sformatf("pipelined read %0d: %h vs %h", i, rd[i], ref_word(aa[i])));
        end
        check(!er[i], "pipelined error");
      end
      for (int i = 0; i < 4; i++) check(mem.peek(32'h0010_0100 + 4 * i) == ref_word(32'h0010_0100 + 4 * i), "sub-word merge");
    end
    // error responses
    bfm.read(32'h0F00_0010, d, e);
    check(e, "read SLVERR not reported");
    bfm.write(32'h0F00_0020, 32'h1234, e);
    check(e, "write SLVERR not reported");
    bfm.read(32'h0010_0000, d, e);
    check(!e && d == ref_word(32'h0010_0000), "read after error");
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
