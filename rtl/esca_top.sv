// esca_top: Codec Avatar accelerator with input combining.
//
// A 16x16 weight-stationary systolic array of input-combining PEs, fed from
// an input buffer through an activation-side im2col engine and preloaded from a
// weight buffer through a weight-side im2col engine. Results leave the array's
// right edge into an accumulator, pass the special function unit (bias,
// LeakyReLU, requantisation) and return to DRAM through the DMA, which also
// fills both buffers and the bias table. A register file holds an encoder and a
// decoder layer descriptor; a frame scheduler starts encode and decode jobs
// under the overlapped pipeline's rules, and the controller sequences each job.
//
// Ports: a 32-bit register port for the host (reg_*), the job triggers from the
// rest of the headset (frame_sensed: a camera frame is ready to encode;
// latent_received: a remote latent code has arrived) with their completion
// pulses (enc_done, dec_done), and a byte-wide DRAM port (mem_*) with in-order
// read responses.
//
// Status words (register words 16..19): 16 = {busy, 3'b0, dec_pending[3:0],
// enc_pending[3:0], dropped[7:0], dec_waits[11:0]} (dec_waits counts cycles a
// received latent code waited for the busy accelerator and is shown modulo
// 4096); 17 = cycles in which a pixel entered the array during the last job;
// 18 = busy cycles of the last job; 19 = {dec_count, enc_count}.
//
// The accumulator's vector count, the SFU's output-valid flag and the top four
// bits of dec_waits are produced but not used here: the controller times the
// drain pipeline itself, and the status word has room for twelve bits of the
// wait counter. Lint reports them as unused signals, which is intended.
//
// Which parts follow the paper and which are this design's own is said in
// each block's header.
//
// rst_n resets the registers asynchronously; the sub-blocks' assertions also
// use it in their disable iff clauses, which lint reports as a synchronous use.
module esca_top
  import esca_pkg::*;
#(
  parameter int unsigned IBUF_DEPTH = 65536,
  parameter int unsigned WBUF_DEPTH = 65536,
  parameter int unsigned ACC_DEPTH  = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  // host register port
  input  logic        reg_we,
  input  logic [7:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  // job triggers
  input  logic        frame_sensed,
  input  logic        latent_received,
  output logic        enc_done,
  output logic        dec_done,
  // DRAM port
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_we,
  output logic [31:0] mem_req_addr,
  output logic [7:0]  mem_req_wdata,
  input  logic        mem_rsp_valid,
  input  logic [7:0]  mem_rsp_rdata
);

  localparam int unsigned N    = ARRAY_DIM;
  localparam int unsigned IAW  = $clog2(IBUF_DEPTH);
  localparam int unsigned WAW  = $clog2(WBUF_DEPTH);
  localparam int unsigned BAW  = (IAW > WAW) ? IAW : WAW;
  localparam int unsigned CIW  = $clog2(ACC_DEPTH);

  layer_cfg_t cfg_slot [2];
  layer_cfg_t cfg;
  logic [31:0] status [4];

  // scheduler
  logic        job_start, job_done, sched_busy;
  job_e        job_type;
  logic [3:0]  enc_pending, dec_pending;
  logic [15:0] enc_count, dec_count, dec_waits;
  logic [7:0]  dropped;

  // DMA
  logic        dma_cmd_valid, dma_cmd_ready, dma_cmd_done;
  dma_dst_e    dma_cmd_dst;
  logic [31:0] dma_cmd_src, dma_cmd_len;
  logic        dma_wr_valid, dma_wr_ready;
  logic [31:0] dma_wr_addr;
  logic [7:0]  dma_wr_data;
  logic        ibuf_we, wbuf_we, bias_we;
  logic [BAW-1:0] buf_waddr;
  logic [7:0]  buf_wdata;

  // im2col engines and buffers
  logic        map_start, map_first, phase, map_done, map_more;
  col_map_t    col_map [N];
  logic        wl_start, wl_done, ow0_par;
  logic [7:0]  cog;
  logic        pix_valid;
  logic [11:0] oh, ow;
  logic [IAW-1:0] ib_raddr [2*N];
  logic [7:0]     ib_rdata [2*N];
  logic [WAW-1:0] wb_raddr [2*N];
  logic [7:0]     wb_rdata [2*N];

  // array
  logic                     w_load;
  logic [$clog2(N)-1:0]     w_row;
  logic signed [7:0]        w1 [N];
  logic signed [7:0]        w2 [N];
  logic [PAT_LEN-1:0]       pat;
  logic                     x_valid;
  logic signed [7:0]        x1 [N];
  logic signed [7:0]        x2 [N];
  logic                     y_valid;
  logic signed [ACC_W-1:0]  y [N];

  // accumulator and SFU
  logic                     acc_pass_start, acc_first;
  logic [CIW-1:0]           acc_rd_addr;
  logic signed [ACC_W-1:0]  acc_rd_data [N];
  logic [CIW:0]             acc_count;
  logic                     sfu_valid, sfu_out_valid;
  logic signed [7:0]        sfu_q [N];

  logic [31:0] stat_stream, stat_cycles;

  assign status[0] = {sched_busy, 3'd0, dec_pending, enc_pending, dropped, dec_waits[11:0]};
  assign status[1] = stat_stream;
  assign status[2] = stat_cycles;
  assign status[3] = {dec_count, enc_count};

  reg_file #(.NSTAT(4)) u_regs (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata,
    .status, .cfg(cfg_slot)
  );

  frame_scheduler #(.CW(4)) u_sched (
    .clk, .rst_n, .frame_sensed, .latent_received,
    .job_start, .job_type, .job_done, .busy(sched_busy),
    .enc_done, .dec_done, .enc_pending, .dec_pending,
    .enc_count, .dec_count, .dec_waits, .dropped
  );

  esca_ctrl #(
    .ROWS(N), .ACC_DEPTH(ACC_DEPTH), .IBUF_DEPTH(IBUF_DEPTH), .WBUF_DEPTH(WBUF_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .cfg_slot, .start(job_start), .job(job_type), .job_done, .cfg,
    .dma_cmd_valid, .dma_cmd_ready, .dma_cmd_dst, .dma_cmd_src, .dma_cmd_len,
    .dma_cmd_done, .dma_wr_valid, .dma_wr_ready, .dma_wr_addr, .dma_wr_data,
    .map_start, .map_first, .phase, .map_done, .map_more,
    .wl_start, .cog, .ow0_par, .wl_done,
    .pix_valid, .oh, .ow,
    .acc_pass_start, .acc_first, .acc_rd_addr, .sfu_valid, .sfu_q,
    .stat_stream, .stat_cycles
  );

  dma #(.BUF_AW(BAW)) u_dma (
    .clk, .rst_n,
    .cmd_valid(dma_cmd_valid), .cmd_ready(dma_cmd_ready), .cmd_dst(dma_cmd_dst),
    .cmd_src(dma_cmd_src), .cmd_len(dma_cmd_len), .cmd_done(dma_cmd_done),
    .wr_valid(dma_wr_valid), .wr_ready(dma_wr_ready), .wr_addr(dma_wr_addr),
    .wr_data(dma_wr_data),
    .ibuf_we, .wbuf_we, .bias_we, .buf_waddr, .buf_wdata,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata
  );

  sram_buffer #(.DEPTH(IBUF_DEPTH), .DW(8), .NRD(2*N)) u_ibuf (
    .clk, .we(ibuf_we), .waddr(buf_waddr[IAW-1:0]), .wdata(buf_wdata),
    .raddr(ib_raddr), .rdata(ib_rdata)
  );

  sram_buffer #(.DEPTH(WBUF_DEPTH), .DW(8), .NRD(2*N)) u_wbuf (
    .clk, .we(wbuf_we), .waddr(buf_waddr[WAW-1:0]), .wdata(buf_wdata),
    .raddr(wb_raddr), .rdata(wb_rdata)
  );

  im2col_engine #(.COLS(N), .IBUF_DEPTH(IBUF_DEPTH)) u_im2col (
    .clk, .rst_n, .cfg,
    .map_start, .map_first, .phase, .map_done, .map_more, .col_map,
    .pix_valid, .oh, .ow, .x_valid, .x1, .x2,
    .ib_raddr, .ib_rdata
  );

  weight_im2col #(.ROWS(N), .COLS(N), .WBUF_DEPTH(WBUF_DEPTH)) u_wim2col (
    .clk, .rst_n, .cfg, .start(wl_start), .cog, .ow0_par, .col_map,
    .wb_raddr, .wb_rdata, .w_load, .w_row, .w1, .w2, .pat, .done(wl_done)
  );

  systolic_array #(.ROWS(N), .COLS(N)) u_array (
    .clk, .rst_n, .int4(cfg.int4),
    .w_load, .w_row, .w1, .w2, .pat,
    .x_valid, .x1, .x2, .y_valid, .y
  );

  accumulator #(.LANES(N), .DEPTH(ACC_DEPTH)) u_acc (
    .clk, .rst_n, .pass_start(acc_pass_start), .first(acc_first),
    .in_valid(y_valid), .in_data(y),
    .rd_addr(acc_rd_addr), .rd_data(acc_rd_data), .count(acc_count)
  );

  sfu #(.LANES(N)) u_sfu (
    .clk, .rst_n, .cfg,
    .bias_we, .bias_waddr(buf_waddr[$clog2(MAX_COUT*4)-1:0]), .bias_wdata(buf_wdata),
    .in_valid(sfu_valid), .cog, .in_acc(acc_rd_data),
    .out_valid(sfu_out_valid), .out_q(sfu_q)
  );

endmodule
