// axi_arbiter: shares the single 32-bit AXI4 DRAM port between the core
// (slave port 0, through the AHB-to-AXI bridge) and NVDLA (slave port 1,
// through the DBB width converter).
//
// The paper asks for mutual exclusion between the two on DRAM. This arbiter
// grants the whole port to one master for one complete transaction: a read
// (AR, then every R beat up to RLAST) or a write (AW, every W beat up to
// WLAST, then B). Only the granted master's channels are connected; the
// other sees all ready/valid signals low. When both request in the same
// cycle the grant alternates (round robin, port 0 first after reset); a
// master that requests both a read and a write is given the read first.
// Grant takes one cycle in IDLE; channels then pass combinationally.
// The policy and the per-transaction grant are this design's choices.
module axi_arbiter
  import soc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  axi32_req_t s0_req,
  output axi32_rsp_t s0_rsp,
  input  axi32_req_t s1_req,
  output axi32_rsp_t s1_rsp,
  output axi32_req_t m_req,
  input  axi32_rsp_t m_rsp
);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE} state_e;

  state_e state;
  logic   owner;        // granted master
  logic   last_owner;   // for round robin
  logic   w_done;       // all W beats of the granted write passed

  logic req0, req1, pick;
  assign req0 = s0_req.ar_valid || s0_req.aw_valid;
  assign req1 = s1_req.ar_valid || s1_req.aw_valid;
  // round robin: prefer the master that was not served last
  always_comb begin
    if (req0 && req1) pick = !last_owner;
    else              pick = req1;
  end

  axi32_req_t sel_req;
  assign sel_req = owner ? s1_req : s0_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      owner      <= 1'b0;
      last_owner <= 1'b1;
      w_done     <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (req0 || req1) begin
          owner      <= pick;
          last_owner <= pick;
          w_done     <= 1'b0;
          if (pick ? s1_req.ar_valid : s0_req.ar_valid) state <= S_READ;
          else                                          state <= S_WRITE;
        end
        S_READ: if (m_rsp.r_valid && m_req.r_ready && m_rsp.r_last) state <= S_IDLE;
        S_WRITE: begin
          if (m_req.w_valid && m_rsp.w_ready && m_req.w_last) w_done <= 1'b1;
          if (m_rsp.b_valid && m_req.b_ready) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    m_req  = '0;
    s0_rsp = '0;
    s1_rsp = '0;
    m_req.aw = sel_req.aw;
    m_req.ar = sel_req.ar;
    m_req.w_data = sel_req.w_data;
    m_req.w_strb = sel_req.w_strb;
    m_req.w_last = sel_req.w_last;
    if (state == S_READ) begin
      m_req.ar_valid = sel_req.ar_valid;
      m_req.r_ready  = sel_req.r_ready;
    end
    if (state == S_WRITE) begin
      m_req.aw_valid = sel_req.aw_valid;
      m_req.w_valid  = sel_req.w_valid && !w_done;
      m_req.b_ready  = sel_req.b_ready;
    end
    if (state != S_IDLE) begin
      if (owner) begin
        s1_rsp = m_rsp;
        s1_rsp.ar_ready = (state == S_READ)  && m_rsp.ar_ready;
        s1_rsp.r_valid  = (state == S_READ)  && m_rsp.r_valid;
        s1_rsp.aw_ready = (state == S_WRITE) && m_rsp.aw_ready;
        s1_rsp.w_ready  = (state == S_WRITE) && m_rsp.w_ready && !w_done;
        s1_rsp.b_valid  = (state == S_WRITE) && m_rsp.b_valid;
      end else begin
        s0_rsp = m_rsp;
        s0_rsp.ar_ready = (state == S_READ)  && m_rsp.ar_ready;
        s0_rsp.r_valid  = (state == S_READ)  && m_rsp.r_valid;
        s0_rsp.aw_ready = (state == S_WRITE) && m_rsp.aw_ready;
        s0_rsp.w_ready  = (state == S_WRITE) && m_rsp.w_ready && !w_done;
        s0_rsp.b_valid  = (state == S_WRITE) && m_rsp.b_valid;
      end
    end
  end

endmodule
