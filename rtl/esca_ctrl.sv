// esca_ctrl: layer sequencer of the accelerator.
//
// Runs one layer job from start to job_done:
//   1. DMA the input map, the weights and the biases into the input buffer,
//      the weight buffer and the SFU bias table.
//   2. For every group of 16 output channels (one per array row), for every
//      phase (input combining: even and odd output rows; dense: one phase),
//      and for every block of up to ACC_DEPTH output pixels of that phase:
//        for every K-chunk (16 matrix rows, one per array column):
//          map the chunk's rows to the columns, preload the weights, stream the
//          block's pixels through the array one per cycle, and accumulate;
//        then drain the block through the SFU and DMA its bytes to DRAM.
//   3. Pulse job_done.
// The all-zero tiles of a transposed convolution are skipped because the
// im2col engine never maps them; combined pairs halve the rows again.
//
// Interface: start/job pick a descriptor slot. The ports to the other blocks
// are plain strobes and data (see esca_top). stat_stream counts cycles in which
// a pixel entered the array and stat_cycles counts all busy cycles of the last
// job; both reset at start.
//
// The paper gives the blocks this controller drives but not the controller
// itself; the loop order, the pixel blocking and the fixed drain wait are this
// design's own choices.
//
// rst_n resets the registers asynchronously; it also appears in the
// assertions' disable iff clause, which lint reports as a synchronous use.
module esca_ctrl
  import esca_pkg::*;
#(
  parameter int unsigned ROWS       = ARRAY_DIM,
  parameter int unsigned ACC_DEPTH  = 1024,
  parameter int unsigned IBUF_DEPTH = 65536,
  parameter int unsigned WBUF_DEPTH = 65536,
  parameter int unsigned LAT        = 2 * ARRAY_DIM + 8,
  localparam int unsigned IW        = $clog2(ACC_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  layer_cfg_t       cfg_slot [2],
  input  logic             start,
  input  job_e             job,
  output logic             job_done,
  output layer_cfg_t       cfg,
  // DMA
  output logic             dma_cmd_valid,
  input  logic             dma_cmd_ready,
  output dma_dst_e         dma_cmd_dst,
  output logic [31:0]      dma_cmd_src,
  output logic [31:0]      dma_cmd_len,
  input  logic             dma_cmd_done,
  output logic             dma_wr_valid,
  input  logic             dma_wr_ready,
  output logic [31:0]      dma_wr_addr,
  output logic [7:0]       dma_wr_data,
  // im2col engines
  output logic             map_start,
  output logic             map_first,
  output logic             phase,
  input  logic             map_done,
  input  logic             map_more,
  output logic             wl_start,
  output logic [7:0]       cog,
  output logic             ow0_par,
  input  logic             wl_done,
  output logic             pix_valid,
  output logic [11:0]      oh,
  output logic [11:0]      ow,
  // accumulator and SFU
  output logic             acc_pass_start,
  output logic             acc_first,
  output logic [IW-1:0]    acc_rd_addr,
  output logic             sfu_valid,
  input  logic signed [7:0] sfu_q [ROWS],
  // statistics
  output logic [31:0]      stat_stream,
  output logic [31:0]      stat_cycles
);

  typedef enum logic [4:0] {
    S_IDLE, S_LD_ACT, S_LD_ACT_W, S_LD_WGT, S_LD_WGT_W, S_LD_BIAS, S_LD_BIAS_W,
    S_PHASE, S_BLK, S_MAP, S_MAP_W, S_WLD, S_WLD_W, S_STREAM, S_LAT,
    S_DR_RD, S_DR_ACC, S_DR_SFU, S_DR_WR, S_DONE
  } state_e;

  state_e      st;
  logic        comb;
  logic [11:0] ho, wo;
  logic [7:0]  n_cog;
  logic [11:0] oh0, ow0, oh_e, ow_e;
  logic        chunk_first;
  logic [IW:0] cnt, blk_len;
  logic [7:0]  lat_cnt;
  logic [4:0]  lane;
  logic [31:0] co;

  assign comb  = combine_ok(cfg);
  assign ho    = out_dim(cfg.hin, cfg);
  assign wo    = out_dim(cfg.win, cfg);
  assign n_cog = 8'((32'(cfg.cout) + ROWS - 1) / ROWS);
  assign co    = 32'(cog) * ROWS + 32'(lane);

  // next pixel of the current phase in raster order
  logic [11:0] oh_n, ow_n;
  always_comb begin
    if (ow + 12'd1 < wo) begin
      oh_n = oh;
      ow_n = ow + 12'd1;
    end else begin
      oh_n = oh + (comb ? 12'd2 : 12'd1);
      ow_n = '0;
    end
  end

  always_comb begin
    dma_cmd_valid = st inside {S_LD_ACT, S_LD_WGT, S_LD_BIAS};
    dma_cmd_dst   = st == S_LD_WGT ? DMA_TO_WBUF : (st == S_LD_BIAS ? DMA_TO_BIAS : DMA_TO_IBUF);
    dma_cmd_src   = st == S_LD_WGT ? cfg.wgt_addr : (st == S_LD_BIAS ? cfg.bias_addr : cfg.act_addr);
    unique case (st)
      S_LD_WGT:  dma_cmd_len = 32'(cfg.cout) * 32'(cfg.cin) * 32'(cfg.k) * 32'(cfg.k);
      S_LD_BIAS: dma_cmd_len = 32'(cfg.cout) * 4;
      default:   dma_cmd_len = 32'(cfg.cin) * 32'(cfg.hin) * 32'(cfg.win);
    endcase
    dma_wr_valid = st == S_DR_WR && co < 32'(cfg.cout);
    dma_wr_addr  = cfg.out_addr + co * 32'(ho) * 32'(wo) + 32'(oh) * 32'(wo) + 32'(ow);
    dma_wr_data  = sfu_q[lane[$clog2(ROWS)-1:0]];
    map_start    = st == S_MAP;
    map_first    = chunk_first;
    wl_start     = st == S_WLD;
    ow0_par      = ow0[0];
    pix_valid    = st == S_STREAM;
    acc_first    = chunk_first;
    acc_rd_addr  = IW'(cnt);
    sfu_valid    = st == S_DR_ACC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st             <= S_IDLE;
      cfg            <= '0;
      job_done       <= 1'b0;
      phase          <= 1'b0;
      cog            <= '0;
      oh             <= '0;
      ow             <= '0;
      oh0            <= '0;
      ow0            <= '0;
      oh_e           <= '0;
      ow_e           <= '0;
      chunk_first    <= 1'b1;
      cnt            <= '0;
      blk_len        <= '0;
      lat_cnt        <= '0;
      lane           <= '0;
      acc_pass_start <= 1'b0;
      stat_stream    <= '0;
      stat_cycles    <= '0;
    end else begin
      job_done       <= 1'b0;
      acc_pass_start <= 1'b0;
      if (st != S_IDLE) stat_cycles <= stat_cycles + 1;
      if (pix_valid)    stat_stream <= stat_stream + 1;
      unique case (st)
        S_IDLE: if (start) begin
          cfg         <= cfg_slot[job];
          stat_stream <= '0;
          stat_cycles <= '0;
          st          <= S_LD_ACT;
        end
        S_LD_ACT:    if (dma_cmd_ready) st <= S_LD_ACT_W;
        S_LD_ACT_W:  if (dma_cmd_done)  st <= S_LD_WGT;
        S_LD_WGT:    if (dma_cmd_ready) st <= S_LD_WGT_W;
        S_LD_WGT_W:  if (dma_cmd_done)  st <= S_LD_BIAS;
        S_LD_BIAS:   if (dma_cmd_ready) st <= S_LD_BIAS_W;
        S_LD_BIAS_W: if (dma_cmd_done) begin
          cog   <= '0;
          phase <= 1'b0;
          st    <= S_PHASE;
        end
        S_PHASE: begin
          // first pixel of this phase: row `phase`, column 0
          oh0 <= 12'(phase);
          ow0 <= '0;
          if (12'(phase) < ho) begin
            st <= S_BLK;
          end else if (cog + 1 < n_cog) begin  // no odd rows: a one-row output
            cog   <= cog + 1'b1;
            phase <= 1'b0;
          end else begin
            st <= S_DONE;
          end
        end
        S_BLK: begin
          chunk_first <= 1'b1;
          st          <= S_MAP;
        end
        S_MAP:   st <= S_MAP_W;
        S_MAP_W: if (map_done) st <= S_WLD;
        S_WLD:   st <= S_WLD_W;
        S_WLD_W: if (wl_done) begin
          acc_pass_start <= 1'b1;
          oh  <= oh0;
          ow  <= ow0;
          cnt <= '0;
          st  <= S_STREAM;
        end
        S_STREAM: begin
          oh  <= oh_n;
          ow  <= ow_n;
          cnt <= cnt + 1'b1;
          if (cnt + 1 == (IW+1)'(ACC_DEPTH) || oh_n >= ho) begin
            oh_e    <= oh_n;
            ow_e    <= ow_n;
            blk_len <= cnt + 1'b1;
            lat_cnt <= '0;
            st      <= S_LAT;
          end
        end
        S_LAT: begin
          lat_cnt <= lat_cnt + 1'b1;
          if (lat_cnt == 8'(LAT)) begin
            if (map_more) begin
              chunk_first <= 1'b0;
              st          <= S_MAP;
            end else begin
              oh  <= oh0;
              ow  <= ow0;
              cnt <= '0;
              st  <= S_DR_RD;
            end
          end
        end
        S_DR_RD:  st <= S_DR_ACC;
        S_DR_ACC: st <= S_DR_SFU;
        S_DR_SFU: begin
          lane <= '0;
          st   <= S_DR_WR;
        end
        S_DR_WR: begin
          if (!dma_wr_valid || dma_wr_ready) begin
            if (lane == 5'(ROWS - 1) || !dma_wr_valid) begin
              // lanes past cout are empty, so the first empty lane ends the pixel
              oh  <= oh_n;
              ow  <= ow_n;
              cnt <= cnt + 1'b1;
              if (cnt + 1 == blk_len) begin
                if (oh_e < ho) begin
                  oh0 <= oh_e;
                  ow0 <= ow_e;
                  st  <= S_BLK;
                end else if (comb && !phase) begin
                  phase <= 1'b1;
                  st    <= S_PHASE;
                end else if (cog + 1 < n_cog) begin
                  cog   <= cog + 1'b1;
                  phase <= 1'b0;
                  st    <= S_PHASE;
                end else begin
                  st <= S_DONE;
                end
              end else begin
                st <= S_DR_RD;
              end
            end else begin
              lane <= lane + 1'b1;
            end
          end
        end
        S_DONE: begin
          job_done <= 1'b1;
          st       <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // the layer must fit the on-chip storage (no spatial or channel tiling)
  a_ibuf_fits : assert property (@(posedge clk) disable iff (!rst_n)
    st == S_LD_ACT |-> 32'(cfg.cin) * 32'(cfg.hin) * 32'(cfg.win) <= IBUF_DEPTH);
  a_wbuf_fits : assert property (@(posedge clk) disable iff (!rst_n)
    st == S_LD_WGT |-> dma_cmd_len <= WBUF_DEPTH);
  a_bias_fits : assert property (@(posedge clk) disable iff (!rst_n)
    st == S_LD_BIAS |-> 32'(cfg.cout) <= MAX_COUT);

endmodule
