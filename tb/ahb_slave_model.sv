// ahb_slave_model: behavioural AHB-Lite slave for testbenches. A sparse
// word memory with random wait states; unwritten words read as
// TAG ^ address so a reader can tell which slave answered. Counts the
// transfers it was selected for. Not synthesizable intent.
module ahb_slave_model
  import soc_pkg::*;
#(
  parameter logic [31:0] TAG = 32'hA000_0000
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     hsel,
  input  logic     hready_in,
  input  ahb_m2s_t req,
  output ahb_s2m_t rsp
);
  logic [31:0] mem [logic [29:0]];
  int unsigned n_xfer = 0;
  logic        pend, pend_w, stall;
  logic [31:0] pend_a;

  function automatic logic [31:0] peek(input logic [31:0] a);
    return mem.exists(a[31:2]) ? mem[a[31:2]] : (TAG ^ {a[31:2], 2'b00});
  endfunction

  always_comb begin
    rsp.hready = !(pend && stall);
    rsp.hresp  = 1'b0;
    rsp.hrdata = pend ? peek(pend_a) : 32'h0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= 1'b0; pend_w <= 1'b0; pend_a <= '0; stall <= 1'b0;
    end else begin
      if (pend && !stall && pend_w) mem[pend_a[31:2]] = req.hwdata;
      if (hready_in) begin
        pend   <= hsel && (req.htrans == HTRANS_NONSEQ || req.htrans == HTRANS_SEQ);
        pend_w <= req.hwrite;
        pend_a <= req.haddr;
        stall  <= ($urandom_range(0, 2) == 0);
        if (hsel && (req.htrans == HTRANS_NONSEQ || req.htrans == HTRANS_SEQ)) n_xfer <= n_xfer + 1;
      end else if (pend && stall) begin
        stall <= ($urandom_range(0, 1) == 0);
      end
    end
  end
endmodule
