// ahb2apb_bridge: AHB-Lite slave to APB3 master, the first step of the
// core's path to NVDLA's configuration registers.
//
// A selected NONSEQ/SEQ transfer is captured in its AHB address phase. The
// bridge then runs the APB sequence: one SETUP cycle (PSEL=1, PENABLE=0),
// then ACCESS cycles (PSEL=PENABLE=1) until PREADY. For writes the SETUP
// cycle is the AHB data phase, where HWDATA is taken. HREADYOUT is low from
// the first data-phase cycle until the ACCESS cycle with PREADY; PRDATA is
// registered and shown with HREADYOUT=1 one cycle later. PSLVERR gives the
// two-cycle AHB ERROR response. So an access costs 3 cycles plus APB wait
// states. The paper takes this bridge from an ARM open-source design and
// gives only its function; this is the standard state machine, written
// here independently.
module ahb2apb_bridge
  import soc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     hsel,
  input  logic     hready_in,
  input  ahb_m2s_t s_req,
  output ahb_s2m_t s_rsp,
  output apb_req_t apb_req,
  input  apb_rsp_t apb_rsp
);

  typedef enum logic [2:0] {S_IDLE, S_SETUP, S_ACCESS, S_DONE, S_ERR1, S_ERR2} state_e;

  state_e      state;
  logic [31:0] addr_q, wdata_q, rdata_q;
  logic        write_q;

  logic start;
  assign start = hsel && hready_in &&
                 (s_req.htrans == HTRANS_NONSEQ || s_req.htrans == HTRANS_SEQ);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      addr_q  <= '0;
      wdata_q <= '0;
      rdata_q <= '0;
      write_q <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE, S_ERR2: begin
          if (start) begin
            addr_q  <= s_req.haddr;
            write_q <= s_req.hwrite;
            state   <= S_SETUP;
          end else begin
            state   <= S_IDLE;
          end
        end
        S_SETUP: begin
          if (write_q) wdata_q <= s_req.hwdata;
          state <= S_ACCESS;
        end
        S_ACCESS: if (apb_rsp.pready) begin
          rdata_q <= apb_rsp.prdata;
          state   <= apb_rsp.pslverr ? S_ERR1 : S_DONE;
        end
        S_ERR1:  state <= S_ERR2;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    apb_req.paddr   = addr_q;
    apb_req.pwrite  = write_q;
    apb_req.psel    = (state == S_SETUP) || (state == S_ACCESS);
    apb_req.penable = (state == S_ACCESS);
    // in SETUP the write data is still on HWDATA; from ACCESS on it is held
    apb_req.pwdata  = (state == S_SETUP) ? s_req.hwdata : wdata_q;
  end

  always_comb begin
    s_rsp.hrdata = rdata_q;
    s_rsp.hready = 1'b1;
    s_rsp.hresp  = 1'b0;
    unique case (state)
      S_SETUP, S_ACCESS: s_rsp.hready = 1'b0;
      S_ERR1: begin s_rsp.hready = 1'b0; s_rsp.hresp = 1'b1; end
      S_ERR2: s_rsp.hresp = 1'b1;
      default: ;
    endcase
  end

endmodule
