// tb_soc_top: end-to-end test of the SoC at its default size.
// A bare-metal program, assembled here, is loaded into program memory and
// run by an RV32I model of the core. Like code generated from a recorded
// NVDLA register trace, it is straight-line register programming: it
// stores part of the input into DRAM, reads and checks the accelerator's
// ID register, writes the job registers and starts the job, copies a DRAM
// block of its own while the accelerator streams data over the DBB (so
// both fight for the DRAM arbiter), touches an unmapped address, sleeps
// in WFI until the accelerator interrupt, polls the status register,
// clears it, sums the result in DRAM and stores a signature.
// The accelerator is the nvdla_model stand-in and DRAM is axi_mem_model.
// Checks: the result and copy regions and the signature against values
// computed here; every mechanism (CSB write, CSB read, DBB read and write
// bursts, core DRAM access, arbiter contention, decode error, interrupt
// wake-up) happens at least once.
module tb_soc_top;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- DUT
  logic        prog_load_en;
  logic [31:0] prog_load_addr, prog_load_data;
  ahb_m2s_t    imem_req, dmem_req;
  ahb_s2m_t    imem_rsp, dmem_rsp;
  logic        irq, csb_valid, csb_ready, csb_write, csb_nposted, rd_valid, dla_intr;
  logic [15:0] csb_addr;
  logic [31:0] csb_wdat, rd_data;
  axi64_req_t  dbb_req;
  axi64_rsp_t  dbb_rsp;
  axi32_req_t  dram_req;
  axi32_rsp_t  dram_rsp;
  logic        core_rst_n = 0;

  soc_top dut (
    .clk, .rst_n, .prog_load_en, .prog_load_addr, .prog_load_data,
    .imem_req, .imem_rsp, .dmem_req, .dmem_rsp, .irq,
    .csb2nvdla_valid(csb_valid), .csb2nvdla_ready(csb_ready), .csb2nvdla_addr(csb_addr),
    .csb2nvdla_wdat(csb_wdat), .csb2nvdla_write(csb_write), .csb2nvdla_nposted(csb_nposted),
    .nvdla2csb_valid(rd_valid), .nvdla2csb_data(rd_data),
    .dbb_req, .dbb_rsp, .dla_intr, .dram_req, .dram_rsp);

  rv32_model cpu (.clk, .rst_n(core_rst_n), .imem_req, .imem_rsp, .dmem_req, .dmem_rsp, .irq);
  nvdla_model nv (.clk, .rst_n, .csb2nvdla_valid(csb_valid), .csb2nvdla_ready(csb_ready),
    .csb2nvdla_addr(csb_addr), .csb2nvdla_wdat(csb_wdat), .csb2nvdla_write(csb_write),
    .csb2nvdla_nposted(csb_nposted), .nvdla2csb_valid(rd_valid), .nvdla2csb_data(rd_data),
    .dbb_req, .dbb_rsp, .dla_intr);
  axi_mem_model #(.INIT_XOR(32'h3C3C_0000)) dram (.clk, .rst_n, .req(dram_req), .rsp(dram_rsp));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [31:0] init_word(input logic [31:0] a);
    return 32'h3C3C_0000 ^ a;
  endfunction

  // ---------------------------------------------------------------- assembler
  localparam int T0 = 5, T1 = 6, T2 = 7, T3 = 28, T4 = 29, T5 = 30, T6 = 31;
  logic [31:0] prog [$];

  function automatic logic [31:0] i_type(int imm, int rs1, int f3, int rd, logic [6:0] op);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), op};
  endfunction
  function automatic void addi(int rd, int rs1, int imm); prog.push_back(i_type(imm, rs1, 0, rd, 7'b0010011)); endfunction
  function automatic void andi(int rd, int rs1, int imm); prog.push_back(i_type(imm, rs1, 7, rd, 7'b0010011)); endfunction
  function automatic void lw(int rd, int rs1, int off);   prog.push_back(i_type(off, rs1, 2, rd, 7'b0000011)); endfunction
  function automatic void add(int rd, int rs1, int rs2);  prog.push_back({7'b0, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b0110011}); endfunction
  function automatic void sw(int rs2, int rs1, int off);
    logic [11:0] o = 12'(off);
    prog.push_back({o[11:5], 5'(rs2), 5'(rs1), 3'b010, o[4:0], 7'b0100011});
  endfunction
  function automatic void branch(int f3, int rs1, int rs2, int target_idx);
    logic [12:0] o = 13'((target_idx - prog.size()) * 4);
    prog.push_back({o[12], o[10:5], 5'(rs2), 5'(rs1), 3'(f3), o[4:1], o[11], 7'b1100011});
  endfunction
  function automatic void li(int rd, logic [31:0] v);
    logic [31:0] hi = v + 32'h800;
    prog.push_back({hi[31:12], 5'(rd), 7'b0110111});
    addi(rd, rd, int'($signed(v[11:0])));
  endfunction

  // ---------------------------------------------------------------- job
  localparam logic [31:0] SRC = 32'h0020_0000, DST = 32'h0030_0000, LEN = 64, ADD = 32'h0001_0003;
  localparam logic [31:0] CPY_SRC = 32'h0040_0000, CPY_DST = 32'h0040_8000, CPY_N = 24;
  localparam logic [31:0] SIG = 32'h0050_0000, BAD = 32'h3000_0000;
  localparam logic [31:0] ID = 32'h4E56_0001;
  logic [31:0] in_vals [4] = '{32'h0000_0011, 32'h0000_0022, 32'h7FFF_FFFF, 32'hFFFF_FFF0};

  function automatic void build();
    int loop, fail_fix, poll, sum;
    for (int k = 0; k < 4; k++) begin li(T1, in_vals[k]); li(T0, SRC + 4 * k); sw(T1, T0, 0); end
    // read_reg: ID
    lw(T1, 0, 0); li(T2, ID);
    fail_fix = prog.size(); prog.push_back(32'h0);             // bne t1, t2, fail (patched)
    // write_reg: job registers, then start
    li(T1, SRC); sw(T1, 0, 4);
    li(T1, DST); sw(T1, 0, 8);
    li(T1, LEN); sw(T1, 0, 12);
    li(T1, ADD); sw(T1, 0, 16);
    li(T1, 1);   sw(T1, 0, 20);
    // own DRAM work while the accelerator runs
    li(T3, CPY_SRC); li(T4, CPY_DST); li(T5, CPY_N);
    loop = prog.size();
    lw(T1, T3, 0); sw(T1, T4, 0); addi(T3, T3, 4); addi(T4, T4, 4); addi(T5, T5, -1);
    branch(1, T5, 0, loop);
    li(T0, BAD); lw(T1, T0, 0);                                 // unmapped: bus error
    prog.push_back(32'h1050_0073);                              // wfi
    poll = prog.size();
    lw(T1, 0, 24); andi(T1, T1, 2); branch(0, T1, 0, poll);     // read_reg: poll done
    li(T1, 2); sw(T1, 0, 24);                                   // clear done
    li(T3, DST); li(T5, 2 * LEN); li(T6, 0);
    sum = prog.size();
    lw(T1, T3, 0); add(T6, T6, T1); addi(T3, T3, 4); addi(T5, T5, -1);
    branch(1, T5, 0, sum);
    li(T0, SIG); sw(T6, T0, 0);
    li(T1, 1); sw(T1, T0, 4);
    prog.push_back(32'h0010_0073);                              // ebreak
    begin                                                       // fail: mark and stop
      int fail = prog.size();
      logic [12:0] o = 13'((fail - fail_fix) * 4);
      prog[fail_fix] = {o[12], o[10:5], 5'(T2), 5'(T1), 3'b001, o[4:1], o[11], 7'b1100011};
      li(T0, SIG); li(T1, 32'hBAD); sw(T1, T0, 4);
      prog.push_back(32'h0010_0073);
    end
  endfunction

  // ---------------------------------------------------------------- monitors
  int contention = 0, cpu_dram = 0, irq_rises = 0;
  logic irq_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_arbiter.state == dut.u_arbiter.S_IDLE &&
        (dut.cpu_axi_req.ar_valid || dut.cpu_axi_req.aw_valid) &&
        (dut.dla_axi_req.ar_valid || dut.dla_axi_req.aw_valid)) contention++;
    if (dut.cpu_axi_req.ar_valid && dut.cpu_axi_rsp.ar_ready ||
        dut.cpu_axi_req.aw_valid && dut.cpu_axi_rsp.aw_ready) cpu_dram++;
    irq_q <= irq;
    if (irq && !irq_q) irq_rises++;
  end

  task automatic mech(input string name, input int n);
    $display("  %-28s %0d", name, n);
    check(n > 0, {"mechanism never happened: ", name});
  endtask

  int cycles;
  initial begin
    prog_load_en = 0; prog_load_addr = 0; prog_load_data = 0;
    build();
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (prog[i]) begin
      prog_load_en <= 1; prog_load_addr <= 4 * i; prog_load_data <= prog[i];
      @(posedge clk);
    end
    prog_load_en <= 0;
    @(posedge clk);
    core_rst_n = 1;
    cycles = 0;
    while (!cpu.halted) begin @(posedge clk); cycles++; end
    repeat (5) @(posedge clk);
    $display("program of %0d words ran %0d instructions in %0d cycles", prog.size(), cpu.retired, cycles);
    check(!cpu.illegal, "illegal instruction");
    check(dram.peek(SIG + 4) == 32'h1, $sformatf("program marker %h", dram.peek(SIG + 4)));
    begin
      logic [31:0] sum = 0;
      for (int i = 0; i < 2 * LEN; i++) begin
        automatic logic [31:0] inw = (i < 4) ? in_vals[i] : init_word(SRC + 4 * i);
        automatic logic [31:0] exp = inw + ADD;
        sum += exp;
        check(dram.peek(DST + 4 * i) == exp, $sformatf("result word %0d = %h, expected %h", i, dram.peek(DST + 4 * i), exp));
      end
      check(dram.peek(SIG) == sum, $sformatf("signature %h, expected %h", dram.peek(SIG), sum));
    end
    for (int i = 0; i < CPY_N; i++)
      check(dram.peek(CPY_DST + 4 * i) == init_word(CPY_SRC + 4 * i), $sformatf("copied word %0d", i));
    check(cpu.bus_errors == 1, $sformatf("%0d bus errors, expected 1", cpu.bus_errors));
    check(!irq, "interrupt not cleared");
    $display("mechanisms:");
    mech("CSB register writes", nv.n_csb_wr);
    mech("CSB register reads", nv.n_csb_rd);
    mech("DBB read bursts", nv.n_dbb_rd_bursts);
    mech("DBB write bursts", nv.n_dbb_wr_bursts);
    mech("core DRAM accesses", cpu_dram);
    mech("arbiter contention", contention);
    mech("decode errors", cpu.bus_errors);
    mech("interrupt wake-ups", (cpu.wfi_waits > 0 && irq_rises > 0) ? irq_rises : 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
