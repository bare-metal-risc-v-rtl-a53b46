// axi_mem_model: behavioural 32-bit AXI4 memory (stands in for external
// DRAM in simulation; not synthesizable intent).
//
// Sparse storage in an associative array of 32-bit words; a word never
// written reads as INIT_XOR ^ byte address, so a reader can predict it.
// One read burst and one write burst at a time, INCR bursts of 4-byte
// beats. READY signals are randomly withheld when STALL is set, and R/B
// come after LAT cycles. Addresses in [ERR_LO, ERR_HI] answer SLVERR. It
// counts bursts and beats for the testbenches, and records the AXI ID of
// every burst so a testbench can tell the masters apart.
module axi_mem_model
  import soc_pkg::*;
#(
  parameter int unsigned LAT    = 2,
  parameter bit          STALL  = 1'b1,
  parameter logic [31:0] INIT_XOR = 32'h5A5A_0000,
  parameter logic [31:0] ERR_LO = 32'hFFFF_FFF0,
  parameter logic [31:0] ERR_HI = 32'hFFFF_FFFF
) (
  input  logic       clk,
  input  logic       rst_n,
  input  axi32_req_t req,
  output axi32_rsp_t rsp
);

  logic [31:0] mem [logic [29:0]];
  int unsigned n_rd_bursts = 0, n_wr_bursts = 0, n_rd_beats = 0, n_wr_beats = 0;
  int unsigned max_rd_len = 0, max_wr_len = 0;

  function automatic logic [31:0] peek(input logic [31:0] a);
    if (mem.exists(a[31:2])) return mem[a[31:2]];
    return INIT_XOR ^ {a[31:2], 2'b00};
  endfunction

  task automatic poke(input logic [31:0] a, input logic [31:0] d);
    mem[a[31:2]] = d;
  endtask

  function automatic bit is_err(input logic [31:0] a);
    return a >= ERR_LO && a <= ERR_HI;
  endfunction

  // ------------------------------------------------------------- reads
  logic        rd_act;
  logic [31:0] rd_addr;
  logic [7:0]  rd_left;
  logic [AXI_ID_W-1:0] rd_id;
  int unsigned rd_wait;
  logic        rd_err;

  // ------------------------------------------------------------- writes
  logic        wr_act, wr_data_done;
  logic [31:0] wr_addr;
  logic [AXI_ID_W-1:0] wr_id;
  int unsigned wr_wait;
  logic        wr_err;
  logic        rnd_a, rnd_b, rnd_c;

  always_ff @(posedge clk) begin
    rnd_a <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
    rnd_b <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
    rnd_c <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  always_comb begin
    rsp = '0;
    rsp.ar_ready = !rd_act && rnd_a;
    rsp.r_valid  = rd_act && rd_wait == 0;
    rsp.r_id     = rd_id;
    rsp.r_data   = peek(rd_addr);
    rsp.r_resp   = rd_err ? AXI_RESP_SLVERR : AXI_RESP_OKAY;
    rsp.r_last   = rd_left == 0;
    rsp.aw_ready = !wr_act && rnd_b;
    rsp.w_ready  = wr_act && !wr_data_done && rnd_c;
    rsp.b_valid  = wr_act && wr_data_done && wr_wait == 0;
    rsp.b_id     = wr_id;
    rsp.b_resp   = wr_err ? AXI_RESP_SLVERR : AXI_RESP_OKAY;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_act <= 1'b0; rd_addr <= '0; rd_left <= '0; rd_id <= '0; rd_wait <= 0; rd_err <= 1'b0;
      wr_act <= 1'b0; wr_data_done <= 1'b0; wr_addr <= '0; wr_id <= '0; wr_wait <= 0; wr_err <= 1'b0;
    end else begin
      if (req.ar_valid && rsp.ar_ready) begin
        rd_act <= 1'b1; rd_addr <= req.ar.addr; rd_left <= req.ar.len; rd_id <= req.ar.id;
        rd_wait <= LAT; rd_err <= is_err(req.ar.addr);
        n_rd_bursts <= n_rd_bursts + 1;
        if (req.ar.len > max_rd_len) max_rd_len <= req.ar.len;
      end else if (rd_act && rd_wait != 0) begin
        rd_wait <= rd_wait - 1;
      end else if (rsp.r_valid && req.r_ready) begin
        n_rd_beats <= n_rd_beats + 1;
        if (rd_left == 0) rd_act <= 1'b0;
        rd_left <= rd_left - 1;
        rd_addr <= rd_addr + 4;
      end

      if (req.aw_valid && rsp.aw_ready) begin
        wr_act <= 1'b1; wr_data_done <= 1'b0; wr_addr <= req.aw.addr; wr_id <= req.aw.id;
        wr_err <= is_err(req.aw.addr);
        n_wr_bursts <= n_wr_bursts + 1;
        if (req.aw.len > max_wr_len) max_wr_len <= req.aw.len;
      end
      if (req.w_valid && rsp.w_ready) begin
        logic [31:0] old;
        old = peek(wr_addr);
        for (int b = 0; b < 4; b++) if (req.w_strb[b]) old[8*b +: 8] = req.w_data[8*b +: 8];
        if (!wr_err) mem[wr_addr[31:2]] = old;
        wr_addr <= wr_addr + 4;
        n_wr_beats <= n_wr_beats + 1;
        if (req.w_last) begin wr_data_done <= 1'b1; wr_wait <= LAT; end
      end else if (wr_data_done && wr_wait != 0) begin
        wr_wait <= wr_wait - 1;
      end
      if (rsp.b_valid && req.b_ready) wr_act <= 1'b0;
    end
  end

endmodule
