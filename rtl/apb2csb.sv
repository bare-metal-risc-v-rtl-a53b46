// apb2csb: APB3 slave to NVDLA configuration space bus (CSB).
//
// NVDLA's registers are reached over CSB, a valid/ready request channel
// (address, write data, write flag, non-posted flag) plus a read-return
// channel (nvdla2csb_valid/nvdla2csb_data) with no back-pressure. In the
// APB ACCESS phase this adapter raises csb2nvdla_valid once; the register
// word address is PADDR[17:2]. A write is posted (nposted=0) and completes
// on the APB side (PREADY=1) in the cycle CSB accepts it. A read is
// accepted the same way and then PREADY waits for nvdla2csb_valid, whose
// data is passed to PRDATA in that cycle. PSLVERR is always 0.
// The paper reuses the adapter shipped with NVDLA and only names it; this
// module is written from the CSB protocol and is this design's own.
module apb2csb
  import soc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  apb_req_t              apb_req,
  output apb_rsp_t              apb_rsp,
  output logic                  csb2nvdla_valid,
  input  logic                  csb2nvdla_ready,
  output logic [CSB_ADDR_W-1:0] csb2nvdla_addr,
  output logic [31:0]           csb2nvdla_wdat,
  output logic                  csb2nvdla_write,
  output logic                  csb2nvdla_nposted,
  input  logic                  nvdla2csb_valid,
  input  logic [31:0]           nvdla2csb_data
);

  logic access;     // APB ACCESS phase
  logic req_sent;   // CSB request of this ACCESS already accepted (reads)

  assign access = apb_req.psel && apb_req.penable;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_sent <= 1'b0;
    end else if (access && apb_rsp.pready) begin
      req_sent <= 1'b0;
    end else if (csb2nvdla_valid && csb2nvdla_ready) begin
      req_sent <= 1'b1;
    end
  end

  assign csb2nvdla_valid   = access && !req_sent;
  assign csb2nvdla_addr    = apb_req.paddr[CSB_ADDR_W+1:2];
  assign csb2nvdla_wdat    = apb_req.pwdata;
  assign csb2nvdla_write   = apb_req.pwrite;
  assign csb2nvdla_nposted = 1'b0;

  always_comb begin
    apb_rsp.pslverr = 1'b0;
    apb_rsp.prdata  = nvdla2csb_data;
    if (apb_req.pwrite) apb_rsp.pready = csb2nvdla_valid && csb2nvdla_ready;
    else                apb_rsp.pready = nvdla2csb_valid && (req_sent || csb2nvdla_ready);
  end

  // a read return may only arrive for a read that has been sent
  property p_no_stray_return;
    @(posedge clk) disable iff (!rst_n)
      nvdla2csb_valid |-> (access && !apb_req.pwrite && (req_sent || (csb2nvdla_valid && csb2nvdla_ready)));
  endproperty
  a_no_stray_return: assert property (p_no_stray_return);

endmodule
