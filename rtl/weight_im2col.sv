// weight_im2col: weight-side im2col engine that preloads the systolic array.
//
// The weights of a layer sit in the weight buffer as [cout][cin][kh][kw]
// bytes, which is the reshaped weight matrix W_mat with one row per output
// channel. For the current K-chunk, array column c holds matrix row col_map[c]
// (chosen by the activation-side engine), and array row r holds output channel
// cog*ROWS + r. This engine reads, for one array row per cycle, the weight pair
// of every column (W1 at kw, W2 at kw+1 in combined mode) and loads it. It
// also builds the PE select sequence: in combined mode the live tap of a pair
// alternates with the output column, starting with parity (pad_e + ow0) for a
// block whose first pixel is in column ow0, so the sequence is 0101... or
// 1010...; in dense mode it is all zeros (always W1/Xi1).
//
// Timing: start is registered; over the next ROWS cycles one array row is read
// per cycle and loaded (w_load) one cycle after its read, so the first w_load
// follows start by two clock edges and done pulses with the last w_load,
// ROWS+1 edges after start.
//
// The paper only names an "Im2col Engine" next to the weight buffer; what it
// does here (weight fetch in the activation engine's row order and select
// sequence generation) is this design's own reading of that block.
module weight_im2col
  import esca_pkg::*;
#(
  parameter int unsigned ROWS        = ARRAY_DIM,
  parameter int unsigned COLS        = ARRAY_DIM,
  parameter int unsigned DW          = DATA_W,
  parameter int unsigned PL          = PAT_LEN,
  parameter int unsigned WBUF_DEPTH  = 65536,
  localparam int unsigned WAW        = $clog2(WBUF_DEPTH),
  localparam int unsigned RW         = $clog2(ROWS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  layer_cfg_t            cfg,
  input  logic                  start,
  input  logic [7:0]            cog,
  input  logic                  ow0_par,
  input  col_map_t              col_map [COLS],
  output logic [WAW-1:0]        wb_raddr [2*COLS],
  input  logic [DW-1:0]         wb_rdata [2*COLS],
  output logic                  w_load,
  output logic [RW-1:0]         w_row,
  output logic signed [DW-1:0]  w1 [COLS],
  output logic signed [DW-1:0]  w2 [COLS],
  output logic [PL-1:0]         pat,
  output logic                  done
);

  logic          comb;
  logic          busy;
  logic [RW-1:0] row;
  logic          rd_v;
  logic [RW-1:0] rd_row;
  logic          m1_q [COLS];
  logic          m2_q [COLS];
  logic [31:0]   co, ckk, kk;
  logic          co_ok;

  assign comb  = combine_ok(cfg);
  assign kk    = 32'(cfg.k) * 32'(cfg.k);
  assign ckk   = 32'(cfg.cin) * kk;
  assign co    = 32'(cog) * ROWS + 32'(row);
  assign co_ok = co < 32'(cfg.cout);

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic [31:0] a;
      a = co * ckk + 32'(col_map[c].cin) * kk + 32'(col_map[c].kh) * 32'(cfg.k)
          + 32'(col_map[c].kw);
      wb_raddr[2*c]   = WAW'(a);
      wb_raddr[2*c+1] = WAW'(a + 32'd1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      row    <= '0;
      rd_v   <= 1'b0;
      rd_row <= '0;
      for (int c = 0; c < COLS; c++) begin
        m1_q[c] <= 1'b0;
        m2_q[c] <= 1'b0;
      end
    end else begin
      rd_v <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        row  <= '0;
      end else if (busy) begin
        rd_v   <= 1'b1;
        rd_row <= row;
        for (int c = 0; c < COLS; c++) begin
          m1_q[c] <= co_ok && col_map[c].valid;
          m2_q[c] <= co_ok && col_map[c].valid && comb;
        end
        row <= row + 1'b1;
        if (row == RW'(ROWS - 1)) busy <= 1'b0;
      end
    end
  end

  always_comb begin
    w_load = rd_v;
    w_row  = rd_row;
    done   = rd_v && (rd_row == RW'(ROWS - 1));
    for (int c = 0; c < COLS; c++) begin
      w1[c] = m1_q[c] ? signed'(wb_rdata[2*c])   : '0;
      w2[c] = m2_q[c] ? signed'(wb_rdata[2*c+1]) : '0;
    end
    for (int i = 0; i < PL; i++)
      pat[i] = comb && (i[0] ^ cfg.pad_e[0] ^ ow0_par);
  end

endmodule
