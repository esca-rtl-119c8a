// tb_im2col_engine: self-checking test of the activation-side im2col engine.
//
// The test builds the expanded (zero-inserted and padded) input map
// explicitly, as the paper describes it, from random input data that it also
// writes into an input buffer. For three layers (a transposed convolution
// with input combining, the same layer without it, and a strided ordinary
// convolution) it maps every K-chunk of every phase and checks the row
// assigned to each column, then streams all output pixels of the phase and
// checks each column's Xi1/Xi2 against the expanded map (Xi1 at (oh+kh, ow+kw),
// Xi2 at (oh+kh, ow+kw+1) in combined mode, zero elsewhere). In combined mode
// it also checks the property input combining rests on: of every pair, at most
// one position is a real input pixel, and the number of rows is a quarter of
// the dense im2col matrix.
module tb_im2col_engine;
  import esca_pkg::*;

  localparam int unsigned N  = 16;
  localparam int unsigned DEPTH = 4096;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic       map_start, map_first, phase, map_done, map_more;
  col_map_t   col_map [N];
  logic       pix_valid, x_valid;
  logic [11:0] oh, ow;
  logic signed [7:0] x1 [N];
  logic signed [7:0] x2 [N];
  logic [11:0] ib_raddr [2*N];
  logic [7:0]  ib_rdata [2*N];
  logic        we;
  logic [11:0] waddr;
  logic [7:0]  wdata;

  im2col_engine #(.COLS(N), .IBUF_DEPTH(DEPTH)) u_dut (
    .clk, .rst_n, .cfg, .map_start, .map_first, .phase, .map_done, .map_more, .col_map,
    .pix_valid, .oh, .ow, .x_valid, .x1, .x2, .ib_raddr, .ib_rdata);

  sram_buffer #(.DEPTH(DEPTH), .DW(8), .NRD(2*N)) u_buf (
    .clk, .we, .waddr, .wdata, .raddr(ib_raddr), .rdata(ib_rdata));

  int checks = 0, failures = 0;
  int n_rows_total;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input int got, input int exp_v, input string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 8) $display("MISMATCH %s got %0d exp %0d", what, got, exp_v);
    end
  endtask

  // expanded map: value and "real pixel" flag
  int  E   [8][40][40];
  bit  Ereal [8][40][40];

  task automatic run_layer(input int cin, input int hw, input int k, input int s, input int os,
                           input int pe_, input bit comb);
    int he, ho, ostep, nph, lim, row, kh_par;
    int rows_cin [$], rows_kh [$], rows_kw [$];
    cfg = '0;
    cfg.cin = 12'(cin); cfg.cout = 12'd16; cfg.hin = 8'(hw); cfg.win = 8'(hw); cfg.k = 4'(k);
    cfg.s_log2 = (s == 2) ? 2'd1 : 2'd0; cfg.os_log2 = (os == 2) ? 2'd1 : 2'd0;
    cfg.pad_e = 4'(pe_); cfg.combine = comb;
    // fill input buffer and expanded map
    he = hw + 2 * pe_ + (hw - 1) * (s - 1);
    for (int c = 0; c < cin; c++)
      for (int y = 0; y < he; y++)
        for (int x = 0; x < he; x++) begin
          E[c][y][x] = 0;
          Ereal[c][y][x] = 0;
        end
    for (int c = 0; c < cin; c++)
      for (int i = 0; i < hw; i++)
        for (int j = 0; j < hw; j++) begin
          @(negedge clk);
          we = 1'b1; waddr = 12'((c * hw + i) * hw + j); wdata = 8'($urandom);
          E[c][pe_ + i * s][pe_ + j * s] = int'(signed'(wdata));
          Ereal[c][pe_ + i * s][pe_ + j * s] = 1'b1;
        end
    @(negedge clk);
    we = 1'b0;
    ho = (he - k) / os + 1;
    ostep = comb ? 2 : 1;
    nph = comb ? 2 : 1;
    lim = comb ? k / 2 : k;
    for (int ph = 0; ph < nph; ph++) begin
      // rows of this phase in the engine's documented order
      rows_cin.delete(); rows_kh.delete(); rows_kw.delete();
      kh_par = (pe_ + ph) % 2;
      for (int c = 0; c < cin; c++)
        for (int a = 0; a < lim; a++)
          for (int j = 0; j < lim; j++) begin
            rows_cin.push_back(c);
            rows_kh.push_back(comb ? 2 * a + kh_par : a);
            rows_kw.push_back(comb ? 2 * j : j);
          end
      n_rows_total = rows_cin.size();
      expect_eq(n_rows_total, comb ? cin * k * k / 4 : cin * k * k, "rows per phase");
      row = 0;
      for (int chunk = 0; row < n_rows_total; chunk++) begin
        @(negedge clk);
        map_start = 1'b1; map_first = (chunk == 0); phase = ph[0];
        @(negedge clk);
        map_start = 1'b0;
        while (!map_done) @(negedge clk);
        for (int c = 0; c < N; c++) begin
          if (row + c < n_rows_total) begin
            expect_eq(int'(col_map[c].valid), 1, "col valid");
            expect_eq(int'(col_map[c].cin), rows_cin[row + c], "col cin");
            expect_eq(int'(col_map[c].kh), rows_kh[row + c], "col kh");
            expect_eq(int'(col_map[c].kw), rows_kw[row + c], "col kw");
          end else begin
            expect_eq(int'(col_map[c].valid), 0, "col past the last row");
          end
        end
        expect_eq(int'(map_more), int'(row + N < n_rows_total), "map_more");
        // stream every pixel of the phase
        for (int y = ph; y < ho; y += ostep)
          for (int x = 0; x < ho; x++) begin
            pix_valid = 1'b1; oh = 12'(y); ow = 12'(x);
            @(negedge clk);
            pix_valid = 1'b0;
            expect_eq(int'(x_valid), 1, "x_valid");
            for (int c = 0; c < N; c++) begin
              int e1, e2, yy, xx;
              e1 = 0; e2 = 0;
              if (row + c < n_rows_total) begin
                yy = y * os + rows_kh[row + c];
                xx = x * os + rows_kw[row + c];
                e1 = E[rows_cin[row + c]][yy][xx];
                if (comb) begin
                  e2 = E[rows_cin[row + c]][yy][xx + 1];
                  checks++;
                  if (Ereal[rows_cin[row + c]][yy][xx] && Ereal[rows_cin[row + c]][yy][xx + 1])
                    failures++;
                end
              end
              expect_eq(int'(x1[c]), e1, "x1");
              expect_eq(int'(x2[c]), e2, "x2");
            end
          end
        row += N;
      end
    end
  endtask

  initial begin
    cfg = '0; map_start = 0; map_first = 0; phase = 0; pix_valid = 0; oh = '0; ow = '0;
    we = 0; waddr = '0; wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_layer(6, 5, 4, 2, 1, 2, 1'b1);   // transposed conv K4 S2 P1, combined
    run_layer(3, 5, 4, 2, 1, 2, 1'b0);   // same kind of layer, dense
    run_layer(3, 9, 3, 1, 2, 1, 1'b0);   // conv K3 P1 stride 2
    run_layer(4, 4, 4, 2, 1, 1, 1'b1);   // transposed conv K4 S2 P2 (odd pad_e), combined
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
