// sys_bus: AHB-Lite system bus between the core's data port and the two
// memory-mapped slaves of the SoC.
//
// The decoder looks at HADDR in the address phase of every NONSEQ/SEQ
// transfer and selects one slave: the NVDLA register path for
// NVDLA_BASE..NVDLA_LAST, the DRAM path for DRAM_BASE..DRAM_LAST (both
// ranges as the paper's address map gives them). The choice is registered
// when HREADY is high, so that HRDATA/HREADY/HRESP of the data phase come
// from the slave addressed one transfer earlier, as AHB-Lite requires.
// Any other address goes to a built-in default slave that answers with the
// two-cycle AHB ERROR response; IDLE/BUSY transfers to it get a zero-wait
// OKAY. The paper's bus also holds arbitration logic; with the single
// master drawn in the SoC it always grants that master, so no arbiter is
// instantiated here. Requests reach both slaves unchanged; only HSEL
// differs. Combinational from the slaves' responses to m_rsp.
module sys_bus
  import soc_pkg::*;
#(
  parameter logic [31:0] NVDLA_BASE_P = soc_pkg::NVDLA_BASE,
  parameter logic [31:0] NVDLA_LAST_P = soc_pkg::NVDLA_LAST,
  parameter logic [31:0] DRAM_BASE_P  = soc_pkg::DRAM_BASE,
  parameter logic [31:0] DRAM_LAST_P  = soc_pkg::DRAM_LAST
) (
  input  logic     clk,
  input  logic     rst_n,
  // master (core data port)
  input  ahb_m2s_t m_req,
  output ahb_s2m_t m_rsp,
  // slaves
  output ahb_m2s_t s_req,       // shared request to both slaves
  output logic     s_hready,    // HREADY broadcast to both slaves
  output logic     nvdla_hsel,
  output logic     dram_hsel,
  input  ahb_s2m_t nvdla_rsp,
  input  ahb_s2m_t dram_rsp
);

  typedef enum logic [1:0] {SEL_NONE, SEL_NVDLA, SEL_DRAM, SEL_DEFAULT} sel_e;

  sel_e addr_sel, data_sel;
  logic active;

  assign active = (m_req.htrans == HTRANS_NONSEQ) || (m_req.htrans == HTRANS_SEQ);

  // address-phase decode
  always_comb begin
    if (m_req.haddr >= NVDLA_BASE_P && m_req.haddr <= NVDLA_LAST_P)
      addr_sel = SEL_NVDLA;
    else if (m_req.haddr >= DRAM_BASE_P && m_req.haddr <= DRAM_LAST_P)
      addr_sel = SEL_DRAM;
    else
      addr_sel = SEL_DEFAULT;
  end

  assign s_req      = m_req;
  assign s_hready   = m_rsp.hready;
  assign nvdla_hsel = (addr_sel == SEL_NVDLA);
  assign dram_hsel  = (addr_sel == SEL_DRAM);

  // default slave: ERROR takes two cycles (HREADY low, then high), HRESP=1 in both
  logic def_err_pend, def_err_second;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_sel       <= SEL_NONE;
      def_err_pend   <= 1'b0;
      def_err_second <= 1'b0;
    end else begin
      if (m_rsp.hready) begin
        data_sel     <= (addr_sel == SEL_DEFAULT && !active) ? SEL_NONE : addr_sel;
        def_err_pend <= active && (addr_sel == SEL_DEFAULT);
        def_err_second <= 1'b0;
      end else if (data_sel == SEL_DEFAULT && def_err_pend) begin
        def_err_pend   <= 1'b0;
        def_err_second <= 1'b1;
      end
    end
  end

  // data-phase response multiplexer
  always_comb begin
    m_rsp = '{hrdata: '0, hready: 1'b1, hresp: 1'b0};
    unique case (data_sel)
      SEL_NVDLA:   m_rsp = nvdla_rsp;
      SEL_DRAM:    m_rsp = dram_rsp;
      SEL_DEFAULT: begin
        m_rsp.hready = !def_err_pend;
        m_rsp.hresp  = def_err_pend || def_err_second;
      end
      default: ;
    endcase
  end

endmodule
