// nvdla_model: behavioural stand-in for the accelerator's pins, for
// testbenches only. It is NOT NVDLA: it has NVDLA's CSB, DBB (W bits, 64
// as in nv_small by default) and interrupt ports, but behind them only a
// tiny register file and a DMA job that reads LEN W-bit words from SRC,
// adds ADDEND to each 32-bit
// lane and writes them to DST, in bursts of up to 4 beats, then sets DONE
// and raises dla_intr. That is enough to exercise every path of the SoC:
// register writes and reads over CSB, DBB reads and writes, interrupt.
// CSB word registers: 0 ID (read only), 1 SRC, 2 DST, 3 LEN, 4 ADDEND,
// 5 CTRL (write 1 starts), 6 STATUS (bit 0 busy, bit 1 done; writing 1 to
// bit 1 clears done). CSB accepts requests with random back-pressure;
// read data returns 2 cycles after acceptance.
module nvdla_model
  import soc_pkg::*;
#(
  parameter logic [31:0] ID_VALUE = 32'h4E56_0001,
  parameter int unsigned W        = 64,
  parameter type         req_t    = axi64_req_t,
  parameter type         rsp_t    = axi64_rsp_t
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csb2nvdla_valid,
  output logic        csb2nvdla_ready,
  input  logic [15:0] csb2nvdla_addr,
  input  logic [31:0] csb2nvdla_wdat,
  input  logic        csb2nvdla_write,
  input  logic        csb2nvdla_nposted,
  output logic        nvdla2csb_valid,
  output logic [31:0] nvdla2csb_data,
  output req_t        dbb_req,
  input  rsp_t        dbb_rsp,
  output logic        dla_intr
);
  logic [31:0] src, dst, len, addend;
  logic        busy, done, start;
  logic        job_end;
  int unsigned n_csb_wr = 0, n_csb_rd = 0, n_dbb_rd_bursts = 0, n_dbb_wr_bursts = 0, n_jobs = 0;

  // ------------------------------------------------------------------ CSB
  logic [1:0]  rd_pipe;
  logic [31:0] rd_q0, rd_q1;
  always_ff @(posedge clk) csb2nvdla_ready <= ($urandom_range(0, 3) != 0);

  function automatic logic [31:0] reg_rd(input logic [15:0] a);
    unique case (a)
      16'd0:   return ID_VALUE;
      16'd1:   return src;
      16'd2:   return dst;
      16'd3:   return len;
      16'd4:   return addend;
      16'd6:   return {30'd0, done, busy};
      default: return 32'h0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src <= 0; dst <= 0; len <= 0; addend <= 0; start <= 0;
      rd_pipe <= 0; rd_q0 <= 0; rd_q1 <= 0;
    end else begin
      start   <= 1'b0;
      rd_pipe <= {rd_pipe[0], 1'b0};
      rd_q1   <= rd_q0;
      if (csb2nvdla_valid && csb2nvdla_ready) begin
        if (csb2nvdla_write) begin
          n_csb_wr <= n_csb_wr + 1;
          unique case (csb2nvdla_addr)
            16'd1: src    <= csb2nvdla_wdat;
            16'd2: dst    <= csb2nvdla_wdat;
            16'd3: len    <= csb2nvdla_wdat;
            16'd4: addend <= csb2nvdla_wdat;
            16'd5: start  <= csb2nvdla_wdat[0];
            default: ;
          endcase
        end else begin
          n_csb_rd <= n_csb_rd + 1;
          rd_pipe[0] <= 1'b1;
          rd_q0      <= reg_rd(csb2nvdla_addr);
        end
      end
    end
  end
  assign nvdla2csb_valid = rd_pipe[1];
  assign nvdla2csb_data  = rd_q1;

  // ------------------------------------------------------------------ DMA job
  logic clear_done;
  assign clear_done = csb2nvdla_valid && csb2nvdla_ready && csb2nvdla_write &&
                      csb2nvdla_addr == 16'd6 && csb2nvdla_wdat[1];
  assign dla_intr = done;

  always @(posedge clk or negedge rst_n)
    if (!rst_n) done <= 1'b0;
    else if (clear_done) done <= 1'b0;
    else if (job_end) done <= 1'b1;

  initial begin
    logic [W-1:0] bufw [4];
    dbb_req = '0;
    busy = 1'b0;
    job_end = 1'b0;
    forever begin
      @(posedge clk);
      if (start && rst_n) begin
        busy = 1'b1;
        n_jobs++;
        for (int unsigned b = 0; b < len; b += 4) begin
          automatic int n = (len - b >= 4) ? 4 : int'(len - b);
          // read burst
          dbb_req.ar <= '{id: 8'h1, addr: src + (W / 8) * b, len: 8'(n - 1), size: 3'($clog2(W / 8)), burst: AXI_BURST_INCR};
          dbb_req.ar_valid <= 1'b1;
          do @(negedge clk); while (!dbb_rsp.ar_ready);
          @(posedge clk);
          dbb_req.ar_valid <= 1'b0;
          dbb_req.r_ready  <= 1'b1;
          n_dbb_rd_bursts++;
          for (int i = 0; i < n; i++) begin
            do @(negedge clk); while (!dbb_rsp.r_valid);
            for (int k = 0; k < W / 32; k++) bufw[i][32 * k +: 32] = dbb_rsp.r_data[32 * k +: 32] + addend;
            @(posedge clk);
          end
          dbb_req.r_ready <= 1'b0;
          // write burst
          dbb_req.aw <= '{id: 8'h2, addr: dst + (W / 8) * b, len: 8'(n - 1), size: 3'($clog2(W / 8)), burst: AXI_BURST_INCR};
          dbb_req.aw_valid <= 1'b1;
          do @(negedge clk); while (!dbb_rsp.aw_ready);
          @(posedge clk);
          dbb_req.aw_valid <= 1'b0;
          n_dbb_wr_bursts++;
          for (int i = 0; i < n; i++) begin
            dbb_req.w_data <= bufw[i]; dbb_req.w_strb <= '1; dbb_req.w_last <= (i == n - 1);
            dbb_req.w_valid <= 1'b1;
            do @(negedge clk); while (!dbb_rsp.w_ready);
            @(posedge clk);
          end
          dbb_req.w_valid <= 1'b0;
          dbb_req.b_ready <= 1'b1;
          do @(negedge clk); while (!dbb_rsp.b_valid);
          @(posedge clk);
          dbb_req.b_ready <= 1'b0;
        end
        job_end <= 1'b1;
        @(posedge clk);
        job_end <= 1'b0;
        busy = 1'b0;
      end
    end
  end
endmodule
