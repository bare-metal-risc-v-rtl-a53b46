// axi_dwidth_conv: AXI4 data width converter from NVDLA's wide data
// backbone (DBB) down to the SoC's 32-bit AXI4 memory path.
//
// The wide side is SLV_W bits (64 for nv_small, the default; 512 for
// nv_full), so each wide beat is RATIO = SLV_W/32 narrow beats. A wide INCR
// burst of N beats becomes one 32-bit INCR burst of RATIO*N beats at the
// same start address (AxLEN' = RATIO*(AxLEN+1)-1, AxSIZE' = 2).
// Writes: every wide W beat is sent as RATIO narrow beats, lowest 32 bits
// first (little endian), each with its slice of WSTRB; WLAST goes out with
// the last slice of the last beat. Reads: RATIO narrow R beats are
// collected and returned as one wide beat, lowest first; RRESP is the
// worst of them. B is passed back unchanged. Read and write paths are
// independent, each carrying one burst at a time; address channels pass
// combinationally when the path is free, data moves one 32-bit beat per
// cycle, so a wide beat takes RATIO cycles on each side.
// The paper uses a vendor converter and gives only its function (64-bit
// DBB to 32-bit memory, and a wider DBB for nv_full); this design supports
// what NVDLA issues (full-width, aligned INCR bursts) and checks that with
// assertions. The request/response types are parameters so the same
// module serves either width.
module axi_dwidth_conv
  import soc_pkg::*;
#(
  parameter int unsigned SLV_W = soc_pkg::DBB_DATA_W,
  parameter type         slv_req_t = soc_pkg::axi64_req_t,
  parameter type         slv_rsp_t = soc_pkg::axi64_rsp_t
) (
  input  logic       clk,
  input  logic       rst_n,
  input  slv_req_t   s_req,
  output slv_rsp_t   s_rsp,
  output axi32_req_t m_req,
  input  axi32_rsp_t m_rsp
);

  localparam int unsigned RATIO = SLV_W / MEM_DATA_W;
  localparam int unsigned RB    = $clog2(RATIO);
  localparam logic [2:0]  WIDE_SIZE = 3'($clog2(SLV_W / 8));

  logic                 rd_busy;
  logic [RB-1:0]        r_idx;
  logic [SLV_W-1:0]     r_buf;
  logic [1:0]           r_resp_q;
  logic                 wr_busy;
  logic [RB-1:0]        w_idx;
  logic                 r_end, w_end;

  assign r_end = (r_idx == RB'(RATIO - 1));
  assign w_end = (w_idx == RB'(RATIO - 1));

  function automatic axi_ax_t narrow(input axi_ax_t a);
    narrow      = a;
    narrow.len  = 8'(((16'(a.len) + 16'd1) << RB) - 16'd1);
    narrow.size = 3'd2;
  endfunction

  // ---------------------------------------------------------------- read
  always_comb begin
    m_req.ar       = narrow(s_req.ar);
    m_req.ar_valid = s_req.ar_valid && !rd_busy;
    s_rsp.ar_ready = m_rsp.ar_ready && !rd_busy;
    m_req.r_ready  = !r_end || s_req.r_ready;
    s_rsp.r_valid  = r_end && m_rsp.r_valid;
    s_rsp.r_id     = m_rsp.r_id;
    s_rsp.r_data   = r_buf;
    s_rsp.r_data[SLV_W-1 -: MEM_DATA_W] = m_rsp.r_data;
    s_rsp.r_resp   = (m_rsp.r_resp > r_resp_q) ? m_rsp.r_resp : r_resp_q;
    s_rsp.r_last   = m_rsp.r_last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy  <= 1'b0;
      r_idx    <= '0;
      r_buf    <= '0;
      r_resp_q <= '0;
    end else begin
      if (s_req.ar_valid && s_rsp.ar_ready) rd_busy <= 1'b1;
      if (m_rsp.r_valid && m_req.r_ready) begin
        r_buf[r_idx * MEM_DATA_W +: MEM_DATA_W] <= m_rsp.r_data;
        if (!r_end) begin
          r_idx    <= r_idx + 1'b1;
          r_resp_q <= (r_idx == '0 || m_rsp.r_resp > r_resp_q) ? m_rsp.r_resp : r_resp_q;
        end else begin
          r_idx <= '0;
          if (m_rsp.r_last) rd_busy <= 1'b0;
        end
      end
    end
  end

  // ---------------------------------------------------------------- write
  always_comb begin
    m_req.aw       = narrow(s_req.aw);
    m_req.aw_valid = s_req.aw_valid && !wr_busy;
    s_rsp.aw_ready = m_rsp.aw_ready && !wr_busy;
    m_req.w_valid  = s_req.w_valid && wr_busy;
    m_req.w_data   = s_req.w_data[w_idx * MEM_DATA_W +: MEM_DATA_W];
    m_req.w_strb   = s_req.w_strb[w_idx * (MEM_DATA_W / 8) +: (MEM_DATA_W / 8)];
    m_req.w_last   = w_end && s_req.w_last;
    s_rsp.w_ready  = w_end && m_rsp.w_ready && wr_busy;
    m_req.b_ready  = s_req.b_ready;
    s_rsp.b_valid  = m_rsp.b_valid;
    s_rsp.b_id     = m_rsp.b_id;
    s_rsp.b_resp   = m_rsp.b_resp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_busy <= 1'b0;
      w_idx   <= '0;
    end else begin
      if (s_req.aw_valid && s_rsp.aw_ready) wr_busy <= 1'b1;
      if (m_req.w_valid && m_rsp.w_ready) w_idx <= w_end ? '0 : w_idx + 1'b1;
      if (m_rsp.b_valid && m_req.b_ready) wr_busy <= 1'b0;
    end
  end

  // ---------------------------------------------------------------- checks
  initial assert (RATIO >= 2 && (RATIO & (RATIO - 1)) == 0 && $bits(s_req.w_data) == SLV_W)
    else $error("axi_dwidth_conv: SLV_W must be a power-of-two multiple of 32 matching slv_req_t");
  a_ar_full_width: assert property (@(posedge clk) disable iff (!rst_n)
    s_req.ar_valid |-> (s_req.ar.size == WIDE_SIZE && s_req.ar.addr[WIDE_SIZE-1:0] == '0 &&
                        (int'(s_req.ar.len) + 1) * RATIO <= 256));
  a_aw_full_width: assert property (@(posedge clk) disable iff (!rst_n)
    s_req.aw_valid |-> (s_req.aw.size == WIDE_SIZE && s_req.aw.addr[WIDE_SIZE-1:0] == '0 &&
                        (int'(s_req.aw.len) + 1) * RATIO <= 256));

endmodule
