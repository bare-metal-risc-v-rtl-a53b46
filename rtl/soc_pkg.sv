// soc_pkg: types and constants shared by the RISC-V + NVDLA SoC.
//
// The SoC joins a 32-bit RISC-V core to an nv_small NVDLA accelerator over
// three bus families: AHB-Lite (the core's data port), APB/CSB (NVDLA's
// configuration registers) and AXI4 (DRAM, reached by the core through a
// bridge and by NVDLA's 64-bit data backbone through a width converter).
// This package holds the address map and one packed struct per bus
// direction, so that every block speaks the same field names.
//
// Taken from the paper: the address map (NVDLA at 0x0-0xFFFFF, DRAM at
// 0x100000-0x200FFFFF), the 32-bit AHB-Lite and AXI4 widths, the 64-bit
// DBB width of nv_small and the 512-bit one of nv_full. The AXI ID width (8) and CSB address width (16) follow the
// open-source NVDLA release and are this design's choice where the paper is
// silent.
package soc_pkg;

  // ---------------------------------------------------------------- address map
  localparam logic [31:0] NVDLA_BASE = 32'h0000_0000;
  localparam logic [31:0] NVDLA_LAST = 32'h000F_FFFF;
  localparam logic [31:0] DRAM_BASE  = 32'h0010_0000;
  localparam logic [31:0] DRAM_LAST  = 32'h200F_FFFF;   // 512 MiB window

  // ---------------------------------------------------------------- widths
  localparam int unsigned ADDR_W     = 32;
  localparam int unsigned AXI_ID_W   = 8;
  localparam int unsigned MEM_DATA_W = 32;   // DRAM side AXI4
  localparam int unsigned DBB_DATA_W = 64;   // NVDLA data backbone, nv_small
  localparam int unsigned DBB_FULL_W = 512;  // the same for nv_full
  localparam int unsigned CSB_ADDR_W = 16;   // NVDLA CSB word address

  // ---------------------------------------------------------------- AHB-Lite
  typedef enum logic [1:0] {
    HTRANS_IDLE   = 2'b00,
    HTRANS_BUSY   = 2'b01,
    HTRANS_NONSEQ = 2'b10,
    HTRANS_SEQ    = 2'b11
  } htrans_e;

  // master -> slave signals (HSEL and HREADY are routed separately)
  typedef struct packed {
    logic [ADDR_W-1:0] haddr;
    htrans_e           htrans;
    logic              hwrite;
    logic [2:0]        hsize;
    logic [2:0]        hburst;
    logic [3:0]        hprot;
    logic [31:0]       hwdata;
  } ahb_m2s_t;

  // slave -> master signals
  typedef struct packed {
    logic [31:0] hrdata;
    logic        hready;     // HREADYOUT of a slave, HREADY at the master
    logic        hresp;      // 0 OKAY, 1 ERROR
  } ahb_s2m_t;

  // ---------------------------------------------------------------- APB3
  typedef struct packed {
    logic [ADDR_W-1:0] paddr;
    logic              psel;
    logic              penable;
    logic              pwrite;
    logic [31:0]       pwdata;
  } apb_req_t;

  typedef struct packed {
    logic [31:0] prdata;
    logic        pready;
    logic        pslverr;
  } apb_rsp_t;

  // ---------------------------------------------------------------- AXI4
  localparam logic [1:0] AXI_BURST_INCR = 2'b01;
  localparam logic [1:0] AXI_RESP_OKAY  = 2'b00;
  localparam logic [1:0] AXI_RESP_SLVERR = 2'b10;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [ADDR_W-1:0]   addr;
    logic [7:0]          len;     // beats - 1
    logic [2:0]          size;    // log2(bytes per beat)
    logic [1:0]          burst;
  } axi_ax_t;

  typedef struct packed {
    axi_ax_t                 aw;
    logic                    aw_valid;
    logic [MEM_DATA_W-1:0]   w_data;
    logic [MEM_DATA_W/8-1:0] w_strb;
    logic                    w_last;
    logic                    w_valid;
    logic                    b_ready;
    axi_ax_t                 ar;
    logic                    ar_valid;
    logic                    r_ready;
  } axi32_req_t;

  typedef struct packed {
    logic                    aw_ready;
    logic                    w_ready;
    logic [AXI_ID_W-1:0]     b_id;
    logic [1:0]              b_resp;
    logic                    b_valid;
    logic                    ar_ready;
    logic [AXI_ID_W-1:0]     r_id;
    logic [MEM_DATA_W-1:0]   r_data;
    logic [1:0]              r_resp;
    logic                    r_last;
    logic                    r_valid;
  } axi32_rsp_t;

  typedef struct packed {
    axi_ax_t                 aw;
    logic                    aw_valid;
    logic [DBB_DATA_W-1:0]   w_data;
    logic [DBB_DATA_W/8-1:0] w_strb;
    logic                    w_last;
    logic                    w_valid;
    logic                    b_ready;
    axi_ax_t                 ar;
    logic                    ar_valid;
    logic                    r_ready;
  } axi64_req_t;

  typedef struct packed {
    logic                    aw_ready;
    logic                    w_ready;
    logic [AXI_ID_W-1:0]     b_id;
    logic [1:0]              b_resp;
    logic                    b_valid;
    logic                    ar_ready;
    logic [AXI_ID_W-1:0]     r_id;
    logic [DBB_DATA_W-1:0]   r_data;
    logic [1:0]              r_resp;
    logic                    r_last;
    logic                    r_valid;
  } axi64_rsp_t;

  // nv_full's 512-bit data backbone, for building the SoC around the larger
  // NVDLA configuration
  typedef struct packed {
    axi_ax_t                 aw;
    logic                    aw_valid;
    logic [DBB_FULL_W-1:0]   w_data;
    logic [DBB_FULL_W/8-1:0] w_strb;
    logic                    w_last;
    logic                    w_valid;
    logic                    b_ready;
    axi_ax_t                 ar;
    logic                    ar_valid;
    logic                    r_ready;
  } axi512_req_t;

  typedef struct packed {
    logic                    aw_ready;
    logic                    w_ready;
    logic [AXI_ID_W-1:0]     b_id;
    logic [1:0]              b_resp;
    logic                    b_valid;
    logic                    ar_ready;
    logic [AXI_ID_W-1:0]     r_id;
    logic [DBB_FULL_W-1:0]   r_data;
    logic [1:0]              r_resp;
    logic                    r_last;
    logic                    r_valid;
  } axi512_rsp_t;

endpackage
