// tb_prog_mem: loads words through the load port and fetches them over
// AHB-Lite. Checks: fetched words equal the loaded ones, a burst of
// pipelined fetches runs at one word per cycle (no wait states), AHB
// writes are refused with ERROR and do not change the memory, and
// addresses wrap at the memory size.
module tb_prog_mem;
  import soc_pkg::*;
  localparam int WORDS = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ahb_m2s_t    h_req;
  ahb_s2m_t    h_rsp;
  logic        load_en;
  logic [31:0] load_addr, load_data;

  ahb_master_bfm bfm (.clk, .req(h_req), .rsp(h_rsp));
  prog_mem #(.WORDS(WORDS)) dut (.clk, .rst_n, .hsel(1'b1), .hready_in(h_rsp.hready), .s_req(h_req), .s_rsp(h_rsp),
                                 .load_en, .load_addr, .load_data);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [31:0] img(input int i);
    return 32'h1357_9BDF ^ (i * 32'h0101_0007);
  endfunction

  initial begin
    logic [31:0] d;
    bit e;
    load_en = 0; load_addr = 0; load_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      load_en <= 1; load_addr <= 4 * i; load_data <= img(i);
      @(posedge clk);
    end
    load_en <= 0;
    @(posedge clk);
    for (int i = 0; i < 256; i += 17) begin
      bfm.read(4 * i, d, e);
      check(!e && d == img(i), $sformatf("word %0d = %h", i, d));
      check(bfm.last_cycles == 2, "single fetch not zero-wait");
    end
    begin
      logic [31:0] a [] = new[64], wd [] = new[64], rd [];
      bit w [] = new[64], er [];
      logic [2:0] sz [] = new[64];
      for (int i = 0; i < 64; i++) begin a[i] = 4 * (i + 100); w[i] = 0; wd[i] = 0; sz[i] = 3'd2; end
      bfm.run(64, a, w, wd, sz, rd, er);
      check(bfm.last_cycles == 65, $sformatf("64 fetches took %0d cycles, expected 65", bfm.last_cycles));
      for (int i = 0; i < 64; i++) check(rd[i] == img(i + 100) && !er[i], $sformatf("burst word %0d", i));
    end
    bfm.write(32'h8, 32'hFFFF_FFFF, e);
    check(e, "AHB write not refused");
    bfm.read(32'h8, d, e);
    check(!e && d == img(2), "AHB write changed memory");
    bfm.read(32'h8 + 4 * WORDS, d, e);
    check(d == img(2), "address does not wrap");
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
