// tb_apb2csb: an APB master drives the adapter; a CSB responder with a
// register file, random request back-pressure and random read latency
// stands in for NVDLA. Checks: each APB access makes exactly one CSB
// request with address PADDR[17:2], write flag, data and nposted=0; a write
// completes in the cycle CSB accepts it; a read completes in the cycle the
// read data returns and PRDATA carries it.
module tb_apb2csb;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  apb_req_t p_req;
  apb_rsp_t p_rsp;
  logic        csb_valid, csb_ready, csb_write, csb_nposted, rd_valid;
  logic [15:0] csb_addr;
  logic [31:0] csb_wdat, rd_data;

  apb2csb dut (.clk, .rst_n, .apb_req(p_req), .apb_rsp(p_rsp),
               .csb2nvdla_valid(csb_valid), .csb2nvdla_ready(csb_ready), .csb2nvdla_addr(csb_addr),
               .csb2nvdla_wdat(csb_wdat), .csb2nvdla_write(csb_write), .csb2nvdla_nposted(csb_nposted),
               .nvdla2csb_valid(rd_valid), .nvdla2csb_data(rd_data));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // CSB responder
  logic [31:0] regs [logic [15:0]];
  int          n_req = 0;
  int          rd_delay = -1;
  logic [15:0] rd_addr;
  always_ff @(posedge clk) csb_ready <= ($urandom_range(0, 2) != 0);
  always_comb begin
    rd_valid = (rd_delay == 0);
    rd_data  = regs.exists(rd_addr) ? regs[rd_addr] : {16'hDEAD, rd_addr};
  end
  always @(posedge clk) if (rst_n) begin
    if (rd_delay > 0) rd_delay <= rd_delay - 1;
    if (rd_valid) rd_delay <= -1;
    if (csb_valid && csb_ready) begin
      n_req++;
      check(!csb_nposted, "nposted set");
      if (csb_write) regs[csb_addr] = csb_wdat;
      else begin rd_addr <= csb_addr; rd_delay <= $urandom_range(1, 4); end
    end
  end

  task automatic apb(input logic [31:0] addr, input bit wr, input logic [31:0] wd, output logic [31:0] rd,
                     output bit ok_timing);
    p_req <= '{paddr: addr, psel: 1'b1, penable: 1'b0, pwrite: wr, pwdata: wd};
    @(posedge clk);
    p_req.penable <= 1'b1;
    ok_timing = 1'b1;
    forever begin
      @(negedge clk);
      if (p_rsp.pready) begin
        // completion must coincide with the CSB event that ends the access
        if (wr)  ok_timing = csb_valid && csb_ready;
        else     ok_timing = rd_valid;
        rd = p_rsp.prdata;
        break;
      end
      @(posedge clk);
    end
    @(posedge clk);
    p_req <= '0;
    @(posedge clk);
  endtask

  initial begin
    logic [31:0] shadow [logic [15:0]];
    logic [31:0] d;
    bit ok;
    int n_exp = 0;
    p_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      automatic logic [15:0] w = 16'($urandom_range(0, 31) * 16'h101);
      automatic logic [31:0] v = $urandom;
      apb({12'h000, 2'b00, w, 2'b00}, 1'b1, v, d, ok);
      n_exp++;
      shadow[w] = v;
      check(ok, "write PREADY not in the CSB accept cycle");
      check(regs.exists(w) && regs[w] == v, $sformatf("CSB reg %h not written", w));
    end
    foreach (shadow[w]) begin
      apb({12'h000, 2'b00, w, 2'b00}, 1'b0, 32'h0, d, ok);
      n_exp++;
      check(ok, "read PREADY not with read return");
      check(d == shadow[w], $sformatf("read %h = %h, expected %h", w, d, shadow[w]));
    end
    check(n_req == n_exp, $sformatf("%0d CSB requests for %0d APB accesses", n_req, n_exp));
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
