// im2col_engine: activation-side im2col generator with input combining.
//
// A transposed convolution is an ordinary stride-1 convolution over an
// "expanded" input in which S-1 zeros are inserted between neighbouring pixels
// and pad_e rows/columns of zeros surround the map. Lowered to a matrix
// product, each output pixel needs one column of the im2col matrix, with one
// row per (input channel, kh, kw). This engine never stores the expanded map:
// for every output pixel it computes, per array column, which input-buffer
// byte (if any) lies under that kernel tap, reads it, and sends zero for
// inserted zeros and padding.
//
// Input combining (combine_ok): for S = 2 and an even kernel the im2col matrix
// splits into 4x4 tiles (4 kw taps of one kh, 4 neighbouring pixels of one
// output row) that are either checkerboards or all zero. For an output row of
// parity p only the kh with (oh + kh - pad_e) even can hit a real pixel, so the
// engine maps only those kh (the all-zero tiles are never issued), and it pairs
// the taps kw = 2j and 2j+1, of which exactly one hits a real column for any
// given pixel. Each array column then gets the pair (Xi1, Xi2) and the PE picks
// the live one. The number of matrix rows per input channel falls from K*K to
// (K/2)*(K/2): a quarter, the paper's "up to 75%" fewer operations.
//
// Interface and timing:
//   map_start/map_first/phase: assign the next ARRAY_DIM matrix rows to the
//     columns (map_first restarts at row 0); this takes COLS cycles and ends
//     with a map_done pulse. map_more says whether rows remain after them.
//   pix_valid/oh/ow: one output pixel per cycle; x_valid/x1/x2 follow one
//     cycle later (the input buffer's read latency).
//   col_map: the current row of every column, for the weight-side engine.
//
// From the paper: the zero-insertion rule W' = W + 2(K-P-1) + (W-1)(S-1), the
// 4x4 tiling, dropping all-zero tiles and two activations per PE of which one
// is zero. This design's own choices: generating the matrix on the fly by
// address arithmetic, the row order (input channel outermost, kw innermost),
// per-output-row parity phases, and the optional output stride for the
// encoder's standard convolutions.
//
// rst_n resets the registers asynchronously; it also appears in the
// assertions' disable iff clause, which lint reports as a synchronous use.
module im2col_engine
  import esca_pkg::*;
#(
  parameter int unsigned COLS        = ARRAY_DIM,
  parameter int unsigned DW          = DATA_W,
  parameter int unsigned IBUF_DEPTH  = 65536,
  localparam int unsigned IAW        = $clog2(IBUF_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  layer_cfg_t            cfg,
  // row-to-column mapping
  input  logic                  map_start,
  input  logic                  map_first,
  input  logic                  phase,
  output logic                  map_done,
  output logic                  map_more,
  output col_map_t              col_map [COLS],
  // pixel stream
  input  logic                  pix_valid,
  input  logic [11:0]           oh,
  input  logic [11:0]           ow,
  output logic                  x_valid,
  output logic signed [DW-1:0]  x1 [COLS],
  output logic signed [DW-1:0]  x2 [COLS],
  // input buffer read ports: 2c for Xi1, 2c+1 for Xi2 of column c
  output logic [IAW-1:0]        ib_raddr [2*COLS],
  input  logic [DW-1:0]         ib_rdata [2*COLS]
);

  logic comb;
  logic [3:0] lim;        // K or K/2 loop limit of the two kernel indices
  assign comb = combine_ok(cfg);
  assign lim  = comb ? {1'b0, cfg.k[3:1]} : cfg.k;

  // ---------------- row enumeration ----------------
  logic [11:0] r_cin;
  logic [3:0]  r_a, r_j;       // kernel row / column index (halved in combined mode)
  logic        r_phase;
  logic        mapping;
  logic [$clog2(COLS+1)-1:0] mcnt;
  logic [31:0] cbase [COLS];   // cin*Hin*Win of each column

  logic [3:0] kh_of, kw_of;
  always_comb begin
    kh_of = comb ? 4'({r_a, 1'b0} + 5'((cfg.pad_e[0] ^ r_phase))) : r_a;
    kw_of = comb ? {r_j[2:0], 1'b0} : r_j;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_cin    <= '0;
      r_a      <= '0;
      r_j      <= '0;
      r_phase  <= 1'b0;
      mapping  <= 1'b0;
      mcnt     <= '0;
      map_done <= 1'b0;
      for (int c = 0; c < COLS; c++) begin
        col_map[c] <= '0;
        cbase[c]   <= '0;
      end
    end else begin
      map_done <= 1'b0;
      if (map_start) begin
        mapping <= 1'b1;
        mcnt    <= '0;
        r_phase <= phase;
        if (map_first) begin
          r_cin <= '0;
          r_a   <= '0;
          r_j   <= '0;
        end
      end else if (mapping) begin
        col_map[mcnt[$clog2(COLS)-1:0]] <= '{valid: (r_cin < cfg.cin), cin: r_cin, kh: kh_of, kw: kw_of};
        cbase[mcnt[$clog2(COLS)-1:0]]   <= 32'(r_cin) * 32'(cfg.hin) * 32'(cfg.win);
        if (r_cin < cfg.cin) begin
          if (r_j + 4'd1 < lim) begin
            r_j <= r_j + 4'd1;
          end else begin
            r_j <= '0;
            if (r_a + 4'd1 < lim) begin
              r_a <= r_a + 4'd1;
            end else begin
              r_a   <= '0;
              r_cin <= r_cin + 12'd1;
            end
          end
        end
        if (mcnt == ($clog2(COLS+1))'(COLS - 1)) begin
          mapping  <= 1'b0;
          map_done <= 1'b1;
        end
        mcnt <= mcnt + 1'b1;
      end
    end
  end

  assign map_more = (r_cin < cfg.cin);

  // ---------------- per-pixel address generation ----------------
  logic        m1 [COLS];
  logic        m2 [COLS];
  logic        m1_q [COLS];
  logic        m2_q [COLS];
  logic [11:0] smask;
  assign smask = (12'd1 << cfg.s_log2) - 12'd1;

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic signed [13:0] ye, xe1, xe2;
      logic [11:0] y, xa, xb;
      logic yok, xok1, xok2;
      ye   = (14'(oh) << cfg.os_log2) + 14'(col_map[c].kh) - 14'(cfg.pad_e);
      xe1  = (14'(ow) << cfg.os_log2) + 14'(col_map[c].kw) - 14'(cfg.pad_e);
      xe2  = xe1 + 14'sd1;
      y    = 12'(ye >>> cfg.s_log2);
      xa   = 12'(xe1 >>> cfg.s_log2);
      xb   = 12'(xe2 >>> cfg.s_log2);
      yok  = (ye  >= 0) && ((12'(ye)  & smask) == '0) && (y  < 12'(cfg.hin));
      xok1 = (xe1 >= 0) && ((12'(xe1) & smask) == '0) && (xa < 12'(cfg.win));
      xok2 = (xe2 >= 0) && ((12'(xe2) & smask) == '0) && (xb < 12'(cfg.win));
      m1[c] = col_map[c].valid && yok && xok1;
      m2[c] = comb && col_map[c].valid && yok && xok2;
      ib_raddr[2*c]   = IAW'(cbase[c] + 32'(y) * 32'(cfg.win) + 32'(xa));
      ib_raddr[2*c+1] = IAW'(cbase[c] + 32'(y) * 32'(cfg.win) + 32'(xb));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_valid <= 1'b0;
      for (int c = 0; c < COLS; c++) begin
        m1_q[c] <= 1'b0;
        m2_q[c] <= 1'b0;
      end
    end else begin
      x_valid <= pix_valid;
      for (int c = 0; c < COLS; c++) begin
        m1_q[c] <= pix_valid && m1[c];
        m2_q[c] <= pix_valid && m2[c];
      end
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      x1[c] = m1_q[c] ? signed'(ib_rdata[2*c])   : '0;
      x2[c] = m2_q[c] ? signed'(ib_rdata[2*c+1]) : '0;
    end
  end

  // input combining relies on at most one live tap per pair
  a_one_live_per_pair : assert property (@(posedge clk) disable iff (!rst_n)
    pix_valid && comb |-> !(m1[0] && m2[0]));

endmodule
