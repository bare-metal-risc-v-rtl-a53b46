// soc_top: bare-metal RISC-V + NVDLA system-on-chip.
//
// A 32-bit RISC-V core runs straight-line code that writes and polls
// NVDLA's configuration registers with ordinary loads and stores; NVDLA
// then streams weights and activations from external DRAM on its own. This
// module wires the SoC around those two engines, following the paper's SoC
// diagram:
//   core instruction port -> prog_mem (AHB-Lite, zero wait states)
//   core data port        -> sys_bus decoder:
//        0x0000_0000..0x000F_FFFF -> AHB-APB bridge -> APB-CSB -> NVDLA CSB
//        0x0010_0000..0x200F_FFFF -> AHB-AXI bridge -> arbiter port 0
//        anything else            -> AHB ERROR
//   NVDLA DBB (64-bit AXI4, nv_small) -> width converter -> arbiter port 1
//   arbiter -> 32-bit AXI4 DRAM port
//   NVDLA dla_intr -> core irq
// The core, NVDLA and DRAM are not part of this RTL; their pins are the
// ports of this module (core ports named imem_*/dmem_*, NVDLA ports with
// NVDLA's own names, DRAM as one 32-bit AXI4 master). One clock, one
// asynchronous active-low reset. The program memory load port lets the
// program be written before the core leaves reset. DBB_W and the DBB
// types select NVDLA's data backbone: 64 bits for nv_small (the default and
// the configuration this SoC is built for), 512 bits for nv_full.
module soc_top
  import soc_pkg::*;
#(
  parameter int unsigned PROG_WORDS = 262144,
  parameter int unsigned DBB_W      = soc_pkg::DBB_DATA_W,
  parameter type         dbb_req_t  = soc_pkg::axi64_req_t,
  parameter type         dbb_rsp_t  = soc_pkg::axi64_rsp_t
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // program memory load port
  input  logic                  prog_load_en,
  input  logic [31:0]           prog_load_addr,
  input  logic [31:0]           prog_load_data,
  // RISC-V core: instruction AHB-Lite master
  input  ahb_m2s_t              imem_req,
  output ahb_s2m_t              imem_rsp,
  // RISC-V core: data AHB-Lite master
  input  ahb_m2s_t              dmem_req,
  output ahb_s2m_t              dmem_rsp,
  output logic                  irq,
  // NVDLA core pins
  output logic                  csb2nvdla_valid,
  input  logic                  csb2nvdla_ready,
  output logic [CSB_ADDR_W-1:0] csb2nvdla_addr,
  output logic [31:0]           csb2nvdla_wdat,
  output logic                  csb2nvdla_write,
  output logic                  csb2nvdla_nposted,
  input  logic                  nvdla2csb_valid,
  input  logic [31:0]           nvdla2csb_data,
  input  dbb_req_t              dbb_req,
  output dbb_rsp_t              dbb_rsp,
  input  logic                  dla_intr,
  // external DRAM (AXI4, 32-bit)
  output axi32_req_t            dram_req,
  input  axi32_rsp_t            dram_rsp
);

  // ------------------------------------------------------------ program memory
  prog_mem #(.WORDS(PROG_WORDS)) u_prog_mem (
    .clk, .rst_n,
    .hsel      (1'b1),
    .hready_in (imem_rsp.hready),
    .s_req     (imem_req),
    .s_rsp     (imem_rsp),
    .load_en   (prog_load_en),
    .load_addr (prog_load_addr),
    .load_data (prog_load_data)
  );

  // ------------------------------------------------------------ system bus
  ahb_m2s_t bus_req;
  logic     bus_hready, nvdla_hsel, dram_hsel;
  ahb_s2m_t nvdla_ahb_rsp, dram_ahb_rsp;

  sys_bus u_sys_bus (
    .clk, .rst_n,
    .m_req      (dmem_req),
    .m_rsp      (dmem_rsp),
    .s_req      (bus_req),
    .s_hready   (bus_hready),
    .nvdla_hsel (nvdla_hsel),
    .dram_hsel  (dram_hsel),
    .nvdla_rsp  (nvdla_ahb_rsp),
    .dram_rsp   (dram_ahb_rsp)
  );

  // ------------------------------------------------------------ NVDLA wrapper
  axi32_req_t cpu_axi_req, dla_axi_req;
  axi32_rsp_t cpu_axi_rsp, dla_axi_rsp;

  nvdla_wrapper #(.DBB_W(DBB_W), .dbb_req_t(dbb_req_t), .dbb_rsp_t(dbb_rsp_t)) u_wrapper (
    .clk, .rst_n,
    .ahb_req    (bus_req),
    .ahb_hready (bus_hready),
    .nvdla_hsel,
    .nvdla_rsp  (nvdla_ahb_rsp),
    .dram_hsel,
    .dram_rsp   (dram_ahb_rsp),
    .cpu_axi_req, .cpu_axi_rsp,
    .dla_axi_req, .dla_axi_rsp,
    .csb2nvdla_valid, .csb2nvdla_ready, .csb2nvdla_addr, .csb2nvdla_wdat,
    .csb2nvdla_write, .csb2nvdla_nposted, .nvdla2csb_valid, .nvdla2csb_data,
    .dbb_req, .dbb_rsp,
    .dla_intr,
    .irq
  );

  // ------------------------------------------------------------ DRAM arbiter
  axi_arbiter u_arbiter (
    .clk, .rst_n,
    .s0_req (cpu_axi_req),
    .s0_rsp (cpu_axi_rsp),
    .s1_req (dla_axi_req),
    .s1_rsp (dla_axi_rsp),
    .m_req  (dram_req),
    .m_rsp  (dram_rsp)
  );

endmodule
