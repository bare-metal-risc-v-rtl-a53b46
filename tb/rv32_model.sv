// rv32_model: behavioural stand-in for the SoC's RISC-V core, for
// testbenches only (the real core is a separate product and is not part of
// this RTL). It interprets the RV32I base integer instructions that
// straight-line register-programming code needs (LUI, AUIPC, JAL, JALR,
// branches, LW/SW, OP-IMM, OP) plus WFI (wait until irq is high) and
// EBREAK (halt). Instructions are fetched over the instruction AHB-Lite
// port and loads/stores go over the data AHB-Lite port, one transfer at a
// time. A data transfer that ends in an AHB ERROR is counted and the
// instruction completes (a load returns 0).
module rv32_model
  import soc_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0
) (
  input  logic     clk,
  input  logic     rst_n,
  output ahb_m2s_t imem_req,
  input  ahb_s2m_t imem_rsp,
  output ahb_m2s_t dmem_req,
  input  ahb_s2m_t dmem_rsp,
  input  logic     irq
);
  ahb_master_bfm ibus (.clk, .req(imem_req), .rsp(imem_rsp));
  ahb_master_bfm dbus (.clk, .req(dmem_req), .rsp(dmem_rsp));

  logic [31:0] x [32];
  logic [31:0] pc;
  bit          halted = 0, illegal = 0;
  int unsigned retired = 0, bus_errors = 0, fetch_errors = 0, wfi_waits = 0, loads = 0, stores = 0;

  function automatic logic [31:0] sext(input logic [31:0] v, input int bits);
    return 32'($signed(v << (32 - bits)) >>> (32 - bits));
  endfunction

  initial begin
    logic [31:0] ins, a, b, imm, res, d;
    logic [4:0]  rd;
    bit          e, wr;
    foreach (x[i]) x[i] = 0;
    pc = RESET_PC;
    @(posedge clk);
    while (!rst_n) @(posedge clk);
    while (!halted) begin
      ibus.read(pc, ins, e);
      if (e) fetch_errors++;
      rd = ins[11:7];
      a  = x[ins[19:15]];
      b  = x[ins[24:20]];
      wr = 1'b1;
      res = 32'h0;
      unique case (ins[6:0])
        7'b0110111: begin res = {ins[31:12], 12'h0}; pc += 4; end                       // LUI
        7'b0010111: begin res = pc + {ins[31:12], 12'h0}; pc += 4; end                  // AUIPC
        7'b1101111: begin                                                               // JAL
          res = pc + 4;
          pc += sext({ins[31], ins[19:12], ins[20], ins[30:21], 1'b0}, 21);
        end
        7'b1100111: begin res = pc + 4; pc = (a + sext(ins[31:20], 12)) & ~32'h1; end   // JALR
        7'b1100011: begin                                                               // branches
          bit t;
          wr = 1'b0;
          unique case (ins[14:12])
            3'b000: t = (a == b);
            3'b001: t = (a != b);
            3'b100: t = ($signed(a) < $signed(b));
            3'b101: t = ($signed(a) >= $signed(b));
            3'b110: t = (a < b);
            3'b111: t = (a >= b);
            default: begin t = 0; illegal = 1; end
          endcase
          pc += t ? sext({ins[31], ins[7], ins[30:25], ins[11:8], 1'b0}, 13) : 32'd4;
        end
        7'b0000011: begin                                                               // LW
          dbus.read(a + sext(ins[31:20], 12), d, e);
          loads++;
          if (e) begin bus_errors++; d = 0; end
          res = d; pc += 4;
        end
        7'b0100011: begin                                                               // SW
          dbus.write(a + sext({ins[31:25], ins[11:7]}, 12), b, e);
          stores++;
          if (e) bus_errors++;
          wr = 1'b0; pc += 4;
        end
        7'b0010011: begin                                                               // OP-IMM
          imm = sext(ins[31:20], 12);
          unique case (ins[14:12])
            3'b000: res = a + imm;
            3'b010: res = {31'b0, $signed(a) < $signed(imm)};
            3'b011: res = {31'b0, a < imm};
            3'b100: res = a ^ imm;
            3'b110: res = a | imm;
            3'b111: res = a & imm;
            3'b001: res = a << ins[24:20];
            3'b101: res = ins[30] ? 32'($signed(a) >>> ins[24:20]) : a >> ins[24:20];
          endcase
          pc += 4;
        end
        7'b0110011: begin                                                               // OP
          unique case ({ins[30], ins[14:12]})
            4'b0000: res = a + b;
            4'b1000: res = a - b;
            4'b0100: res = a ^ b;
            4'b0110: res = a | b;
            4'b0111: res = a & b;
            4'b0001: res = a << b[4:0];
            4'b0101: res = a >> b[4:0];
            default: illegal = 1;
          endcase
          pc += 4;
        end
        7'b1110011: begin                                                               // SYSTEM
          wr = 1'b0;
          if (ins == 32'h1050_0073) begin                                               // WFI
            wfi_waits++;
            while (!irq) @(posedge clk);
            pc += 4;
          end else begin                                                                // EBREAK/ECALL
            halted = 1;
          end
        end
        default: begin illegal = 1; halted = 1; wr = 1'b0; end
      endcase
      if (wr && rd != 0) x[rd] = res;
      retired++;
    end
  end
endmodule
