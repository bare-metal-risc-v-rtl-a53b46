// prog_mem: program memory of the RISC-V core, an AHB-Lite read-only slave
// on the core's instruction port.
//
// The memory is a WORDS x 32-bit array (block RAM on an FPGA). The core
// reads it over AHB-Lite: the word at HADDR is read at the end of the
// address phase and returned in the following data phase with HREADYOUT=1,
// so instruction fetch has no wait states. AHB writes are refused with the
// two-cycle ERROR response. Before the core is released from reset the
// program (the bare-metal code produced from an NVDLA register trace) is
// written through a separate word-wide load port (load_en, byte address,
// data); a load and a read in the same cycle are both served. Addresses
// wrap modulo the memory size.
// The paper gives the block's role and says it is loaded from a .mem file;
// the size (1 MiB, close to the 232 block-RAM tiles reported for it), the
// load port and the read-only AHB side are this design's choices.
module prog_mem
  import soc_pkg::*;
#(
  parameter int unsigned WORDS = 262144
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hsel,
  input  logic        hready_in,
  input  ahb_m2s_t    s_req,
  output ahb_s2m_t    s_rsp,
  input  logic        load_en,
  input  logic [31:0] load_addr,
  input  logic [31:0] load_data
);

  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic [31:0] rdata_q;
  logic        err1, err2;

  logic active;
  assign active = hsel && hready_in &&
                  (s_req.htrans == HTRANS_NONSEQ || s_req.htrans == HTRANS_SEQ);

  always_ff @(posedge clk) begin
    if (load_en) mem[load_addr[AW+1:2]] <= load_data;
    if (active && !s_req.hwrite) rdata_q <= mem[s_req.haddr[AW+1:2]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err1 <= 1'b0;
      err2 <= 1'b0;
    end else begin
      err1 <= active && s_req.hwrite;
      err2 <= err1;
    end
  end

  assign s_rsp.hrdata = rdata_q;
  assign s_rsp.hready = !err1;
  assign s_rsp.hresp  = err1 || err2;

endmodule
