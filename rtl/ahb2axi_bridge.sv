// ahb2axi_bridge: AHB-Lite slave to AXI4 master, used by the core to reach
// the AXI4 DRAM port.
//
// Every AHB-Lite NONSEQ or SEQ transfer becomes one single-beat AXI4
// transaction (LEN=0, INCR, SIZE=HSIZE, ID=AXI_ID); AHB bursts are therefore
// split into singles. Flow: the address phase is captured when HSEL and
// HREADY are high. For a read, AR is issued at once and HREADYOUT stays low
// until the R beat arrives; HRDATA is the R data. For a write, the bridge
// waits one cycle for HWDATA (the AHB data phase), then issues AW and W
// together and holds HREADYOUT low until B. SLVERR/DECERR become the
// two-cycle AHB ERROR response. Write strobes are formed from HSIZE and
// HADDR[1:0]. One transfer is outstanding at a time.
// The paper uses a vendor bridge here and gives only its function; this
// minimal single-outstanding form is this design's own.
module ahb2axi_bridge
  import soc_pkg::*;
#(
  parameter logic [AXI_ID_W-1:0] AXI_ID = '0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       hsel,
  input  logic       hready_in,
  input  ahb_m2s_t   s_req,
  output ahb_s2m_t   s_rsp,
  output axi32_req_t m_req,
  input  axi32_rsp_t m_rsp
);

  typedef enum logic [2:0] {
    S_IDLE,      // waiting for a transfer
    S_WDATA,     // write: HWDATA is on the bus this cycle
    S_AXI_W,     // write: AW/W issued, waiting for handshakes and B
    S_AXI_R,     // read: AR issued, waiting for R
    S_ERR1,      // first cycle of an ERROR response (HREADYOUT low)
    S_ERR2       // second cycle of an ERROR response
  } state_e;

  state_e      state;
  logic [31:0] addr_q;
  logic [2:0]  size_q;
  logic [31:0] wdata_q;
  logic        aw_done, w_done, ar_done;
  logic [31:0] rdata_q;

  logic start;
  assign start = hsel && hready_in &&
                 (s_req.htrans == HTRANS_NONSEQ || s_req.htrans == HTRANS_SEQ);

  function automatic logic [3:0] strb_of(input logic [2:0] size, input logic [1:0] a);
    unique case (size)
      3'd0:    strb_of = 4'b0001 << a;
      3'd1:    strb_of = a[1] ? 4'b1100 : 4'b0011;
      default: strb_of = 4'b1111;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      addr_q  <= '0;
      size_q  <= '0;
      wdata_q <= '0;
      aw_done <= 1'b0;
      w_done  <= 1'b0;
      ar_done <= 1'b0;
      rdata_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          addr_q  <= s_req.haddr;
          size_q  <= s_req.hsize;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          ar_done <= 1'b0;
          state   <= s_req.hwrite ? S_WDATA : S_AXI_R;
        end
        S_WDATA: begin
          wdata_q <= s_req.hwdata;
          state   <= S_AXI_W;
        end
        S_AXI_W: begin
          if (m_req.aw_valid && m_rsp.aw_ready) aw_done <= 1'b1;
          if (m_req.w_valid  && m_rsp.w_ready)  w_done  <= 1'b1;
          if (m_rsp.b_valid && aw_done && w_done) begin
            state <= m_rsp.b_resp[1] ? S_ERR1 : S_IDLE;
          end
        end
        S_AXI_R: begin
          if (m_req.ar_valid && m_rsp.ar_ready) ar_done <= 1'b1;
          if (m_rsp.r_valid && ar_done) begin
            rdata_q <= m_rsp.r_data;
            state   <= m_rsp.r_resp[1] ? S_ERR1 : S_IDLE;
          end
        end
        S_ERR1: state <= S_ERR2;
        S_ERR2: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI master
  always_comb begin
    m_req          = '0;
    m_req.aw       = '{id: AXI_ID, addr: addr_q, len: 8'd0, size: size_q, burst: AXI_BURST_INCR};
    m_req.ar       = m_req.aw;
    m_req.aw_valid = (state == S_AXI_W) && !aw_done;
    m_req.w_valid  = (state == S_AXI_W) && !w_done;
    m_req.w_data   = wdata_q;
    m_req.w_strb   = strb_of(size_q, addr_q[1:0]);
    m_req.w_last   = 1'b1;
    m_req.b_ready  = (state == S_AXI_W) && aw_done && w_done;
    m_req.ar_valid = (state == S_AXI_R) && !ar_done;
    m_req.r_ready  = (state == S_AXI_R) && ar_done;
  end

  // AHB response: HREADYOUT low while a transfer is in the AXI domain; the
  // read data / OKAY is given in the cycle after the AXI response arrives,
  // which is the S_IDLE cycle following it.
  always_comb begin
    s_rsp.hrdata = rdata_q;
    s_rsp.hresp  = 1'b0;
    s_rsp.hready = 1'b1;
    unique case (state)
      S_WDATA, S_AXI_W, S_AXI_R: s_rsp.hready = 1'b0;
      S_ERR1: begin s_rsp.hready = 1'b0; s_rsp.hresp = 1'b1; end
      S_ERR2: begin s_rsp.hready = 1'b1; s_rsp.hresp = 1'b1; end
      default: ;
    endcase
  end

endmodule
