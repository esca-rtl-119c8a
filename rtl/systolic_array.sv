// systolic_array: 16x16 weight-stationary array of input-combining PEs.
//
// Rows hold output channels and columns hold rows of the (combined) im2col
// matrix. Weights are preloaded and stay put; activation pairs enter at the
// bottom of each column and move up one row per cycle; partial sums move right
// one column per cycle and leave from the rightmost column, one result per row.
// The input side staggers column c by c cycles and the output side de-skews row
// r by ROWS-1-r cycles, so callers present one pixel's activation vector in one
// cycle and get that pixel's ROWS output-channel sums together, LATENCY cycles
// later, with y_valid.
//
// Interface: w_load/w_row load row w_row's weight pairs (one row per cycle)
// and broadcast the select sequence pat. x_valid/x1/x2 carry one pixel per
// cycle. Latency from x_valid to y_valid is ROWS+COLS-1 cycles; throughput one
// pixel per cycle.
//
// From the paper: the 16x16 size, weight-stationary dataflow, bottom-to-top
// staggered activations, left-to-right partial sums collected at the right
// edge. This design's own choices: row-addressed weight loading and the
// de-skew registers at the output.
//
// rst_n resets the registers asynchronously; it also appears in the
// assertions' disable iff clause, which lint reports as a synchronous use.
module systolic_array
  import esca_pkg::*;
#(
  parameter int unsigned ROWS = ARRAY_DIM,
  parameter int unsigned COLS = ARRAY_DIM,
  parameter int unsigned DW   = DATA_W,
  parameter int unsigned AW   = ACC_W,
  parameter int unsigned PL   = PAT_LEN
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        int4,
  input  logic                        w_load,
  input  logic [$clog2(ROWS)-1:0]     w_row,
  input  logic signed [DW-1:0]        w1 [COLS],
  input  logic signed [DW-1:0]        w2 [COLS],
  input  logic [PL-1:0]               pat,
  input  logic                        x_valid,
  input  logic signed [DW-1:0]        x1 [COLS],
  input  logic signed [DW-1:0]        x2 [COLS],
  output logic                        y_valid,
  output logic signed [AW-1:0]        y [ROWS]
);

  // input skew: column c delayed by c cycles (index 0 is the undelayed input)
  logic                 sk_v  [COLS][COLS];
  logic signed [DW-1:0] sk_x1 [COLS][COLS];
  logic signed [DW-1:0] sk_x2 [COLS][COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_skew
    assign sk_v[c][0]  = x_valid;
    assign sk_x1[c][0] = x1[c];
    assign sk_x2[c][0] = x2[c];
    for (genvar d = 1; d <= c; d++) begin : g_d
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          sk_v[c][d]  <= 1'b0;
          sk_x1[c][d] <= '0;
          sk_x2[c][d] <= '0;
        end else begin
          sk_v[c][d]  <= sk_v[c][d-1];
          sk_x1[c][d] <= sk_x1[c][d-1];
          sk_x2[c][d] <= sk_x2[c][d-1];
        end
      end
    end
    for (genvar d = c + 1; d < COLS; d++) begin : g_unused
      assign sk_v[c][d]  = 1'b0;
      assign sk_x1[c][d] = '0;
      assign sk_x2[c][d] = '0;
    end
  end

  // PE grid: row 0 is the bottom row; xv/x1/x2 [r][c] is the input of PE(r,c)
  logic                 xv  [ROWS+1][COLS];
  logic signed [DW-1:0] xa  [ROWS+1][COLS];
  logic signed [DW-1:0] xb  [ROWS+1][COLS];
  logic signed [AW-1:0] ps  [ROWS][COLS+1];

  for (genvar c = 0; c < COLS; c++) begin : g_bottom
    assign xv[0][c] = sk_v[c][c];
    assign xa[0][c] = sk_x1[c][c];
    assign xb[0][c] = sk_x2[c][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign ps[r][0] = '0;
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe #(.DW(DW), .AW(AW), .PL(PL)) u_pe (
        .clk    (clk),
        .rst_n  (rst_n),
        .int4   (int4),
        .w_load (w_load && (w_row == r[$clog2(ROWS)-1:0])),
        .w1_in  (w1[c]),
        .w2_in  (w2[c]),
        .pat_in (pat),
        .xv_i   (xv[r][c]),
        .x1_i   (xa[r][c]),
        .x2_i   (xb[r][c]),
        .xv_o   (xv[r+1][c]),
        .x1_o   (xa[r+1][c]),
        .x2_o   (xb[r+1][c]),
        .y_i    (ps[r][c]),
        .y_o    (ps[r][c+1])
      );
    end
  end

  // output de-skew: row r is ready r cycles after row 0; delay it ROWS-1-r more
  logic signed [AW-1:0] dk [ROWS][ROWS];
  for (genvar r = 0; r < ROWS; r++) begin : g_deskew
    assign dk[r][0] = ps[r][COLS];
    for (genvar d = 1; d < ROWS - r; d++) begin : g_d
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) dk[r][d] <= '0;
        else        dk[r][d] <= dk[r][d-1];
      end
    end
    for (genvar d = ROWS - r; d < ROWS; d++) begin : g_unused
      if (d > 0) begin : g_z
        assign dk[r][d] = '0;
      end
    end
    assign y[r] = dk[r][ROWS-1-r];
  end

  // the top row's rightmost valid flag marks the de-skewed result vector
  assign y_valid = xv[ROWS][COLS-1];

  // a weight reload must not hit a pass that is still streaming through
  a_no_load_while_streaming : assert property (@(posedge clk) disable iff (!rst_n)
    w_load |-> !x_valid);

endmodule
