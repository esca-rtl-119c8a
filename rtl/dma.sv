// dma: moves data between DRAM and the accelerator's on-chip storage.
//
// Read transfers (cmd_*) copy cmd_len consecutive DRAM bytes starting at
// cmd_src into the input buffer, the weight buffer or the SFU bias table,
// starting at on-chip address 0. Requests are issued back to back as long as
// the memory accepts them; responses return in order and are written at
// consecutive addresses. cmd_done pulses when the last byte is written.
// The write channel (wr_*) forwards result bytes from the SFU path to DRAM
// whenever no read transfer is active.
//
// Memory port: a request is accepted when mem_req_valid && mem_req_ready;
// read data comes back on mem_rsp_valid, in order, any number of cycles later.
//
// The paper names the DMA between DRAM and the buffers and shows the SFU's
// results returning through it; the byte-wide port, the single outstanding
// command and the read-before-write priority are this design's own choices.
//
// rst_n resets the registers asynchronously; it also appears in the
// assertions' disable iff clause, which lint reports as a synchronous use.
module dma
  import esca_pkg::*;
#(
  parameter int unsigned BUF_AW = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  dma_dst_e          cmd_dst,
  input  logic [31:0]       cmd_src,
  input  logic [31:0]       cmd_len,
  output logic              cmd_done,
  // result write channel
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [31:0]       wr_addr,
  input  logic [7:0]        wr_data,
  // on-chip buffer write port
  output logic              ibuf_we,
  output logic              wbuf_we,
  output logic              bias_we,
  output logic [BUF_AW-1:0] buf_waddr,
  output logic [7:0]        buf_wdata,
  // DRAM port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [31:0]       mem_req_addr,
  output logic [7:0]        mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  logic [7:0]        mem_rsp_rdata
);

  logic        busy;
  dma_dst_e    dst_q;
  logic [31:0] src_q, len_q, issued, received;

  assign cmd_ready = !busy;

  always_comb begin
    if (busy) begin
      mem_req_valid = issued < len_q;
      mem_req_we    = 1'b0;
      mem_req_addr  = src_q + issued;
      mem_req_wdata = '0;
      wr_ready      = 1'b0;
    end else begin
      mem_req_valid = wr_valid;
      mem_req_we    = 1'b1;
      mem_req_addr  = wr_addr;
      mem_req_wdata = wr_data;
      wr_ready      = mem_req_ready;
    end
    buf_waddr = BUF_AW'(received);
    buf_wdata = mem_rsp_rdata;
    ibuf_we   = busy && mem_rsp_valid && dst_q == DMA_TO_IBUF;
    wbuf_we   = busy && mem_rsp_valid && dst_q == DMA_TO_WBUF;
    bias_we   = busy && mem_rsp_valid && dst_q == DMA_TO_BIAS;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      dst_q    <= DMA_TO_IBUF;
      src_q    <= '0;
      len_q    <= '0;
      issued   <= '0;
      received <= '0;
      cmd_done <= 1'b0;
    end else begin
      cmd_done <= 1'b0;
      if (!busy) begin
        if (cmd_valid) begin
          dst_q    <= cmd_dst;
          src_q    <= cmd_src;
          len_q    <= cmd_len;
          issued   <= '0;
          received <= '0;
          if (cmd_len == 0) cmd_done <= 1'b1;
          else              busy     <= 1'b1;
        end
      end else begin
        if (mem_req_valid && mem_req_ready) issued <= issued + 1;
        if (mem_rsp_valid) begin
          received <= received + 1;
          if (received + 1 == len_q) begin
            busy     <= 1'b0;
            cmd_done <= 1'b1;
          end
        end
      end
    end
  end

  // responses only for reads that were issued
  a_rsp_expected : assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> busy && received < issued);

endmodule
