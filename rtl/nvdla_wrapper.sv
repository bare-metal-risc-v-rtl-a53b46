// nvdla_wrapper: the block that joins NVDLA to the core's bus and to DRAM.
//
// It holds the interface logic around the accelerator: an AHB-Lite to APB
// bridge and an APB-to-CSB adapter that turn the core's loads and stores in
// the NVDLA address range into CSB register accesses; an AXI data width
// converter that narrows NVDLA's 64-bit data backbone (DBB) to the 32-bit
// AXI4 memory path; and the AHB-Lite to AXI4 bridge through which the core
// reaches DRAM. Both AXI4 masters leave the wrapper towards the DRAM
// arbiter, as drawn in the paper's SoC diagram. The NVDLA core itself is
// not part of this RTL; its CSB, DBB and interrupt pins are this module's
// ports (with NVDLA's own signal names), and dla_intr goes straight out as
// the core's irq. The wrapper adds no logic or latency of its own.
// The DBB width and its AXI4 types are parameters, passed on to the width
// converter: 64 bits for nv_small (the default), 512 for nv_full.
module nvdla_wrapper
  import soc_pkg::*;
#(
  parameter int unsigned DBB_W     = soc_pkg::DBB_DATA_W,
  parameter type         dbb_req_t = soc_pkg::axi64_req_t,
  parameter type         dbb_rsp_t = soc_pkg::axi64_rsp_t
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // system bus side (AHB-Lite)
  input  ahb_m2s_t              ahb_req,
  input  logic                  ahb_hready,
  input  logic                  nvdla_hsel,
  output ahb_s2m_t              nvdla_rsp,
  input  logic                  dram_hsel,
  output ahb_s2m_t              dram_rsp,
  // AXI4 masters towards the arbiter
  output axi32_req_t            cpu_axi_req,
  input  axi32_rsp_t            cpu_axi_rsp,
  output axi32_req_t            dla_axi_req,
  input  axi32_rsp_t            dla_axi_rsp,
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
  output logic                  irq
);

  apb_req_t apb_req;
  apb_rsp_t apb_rsp;

  ahb2apb_bridge u_ahb2apb (
    .clk, .rst_n,
    .hsel      (nvdla_hsel),
    .hready_in (ahb_hready),
    .s_req     (ahb_req),
    .s_rsp     (nvdla_rsp),
    .apb_req, .apb_rsp
  );

  apb2csb u_apb2csb (
    .clk, .rst_n,
    .apb_req, .apb_rsp,
    .csb2nvdla_valid, .csb2nvdla_ready, .csb2nvdla_addr, .csb2nvdla_wdat,
    .csb2nvdla_write, .csb2nvdla_nposted, .nvdla2csb_valid, .nvdla2csb_data
  );

  ahb2axi_bridge #(.AXI_ID('0)) u_ahb2axi (
    .clk, .rst_n,
    .hsel      (dram_hsel),
    .hready_in (ahb_hready),
    .s_req     (ahb_req),
    .s_rsp     (dram_rsp),
    .m_req     (cpu_axi_req),
    .m_rsp     (cpu_axi_rsp)
  );

  axi_dwidth_conv #(.SLV_W(DBB_W), .slv_req_t(dbb_req_t), .slv_rsp_t(dbb_rsp_t)) u_dwc (
    .clk, .rst_n,
    .s_req (dbb_req),
    .s_rsp (dbb_rsp),
    .m_req (dla_axi_req),
    .m_rsp (dla_axi_rsp)
  );

  assign irq = dla_intr;

endmodule
