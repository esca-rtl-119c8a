// tb_weight_im2col: self-checking test of the weight-side im2col engine.
//
// Random weights are written to a weight buffer laid out as
// [cout][cin][kh][kw]. For random layers (combined and dense, with some
// output channels past cout and some columns unmapped) the test drives a
// random column map, starts a preload and checks, for every w_load cycle, the
// row index, both weights of every column against the buffer contents (zero
// for invalid columns, channels past cout and W2 in dense mode), the select
// sequence, and the timing: exactly ROWS loads on consecutive cycles, the
// first visible on the second clock edge after start is sampled (one edge to
// register start, one for the buffer read), with done on the last load.
module tb_weight_im2col;
  import esca_pkg::*;

  localparam int unsigned N = 16;
  localparam int unsigned DEPTH = 8192;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  layer_cfg_t  cfg;
  logic        start, ow0_par;
  logic [7:0]  cog;
  col_map_t    col_map [N];
  logic [12:0] wb_raddr [2*N];
  logic [7:0]  wb_rdata [2*N];
  logic        w_load, done;
  logic [3:0]  w_row;
  logic signed [7:0] w1 [N];
  logic signed [7:0] w2 [N];
  logic [15:0] pat;
  logic        we;
  logic [12:0] waddr;
  logic [7:0]  wdata;
  logic [7:0]  mem [DEPTH];

  weight_im2col #(.ROWS(N), .COLS(N), .WBUF_DEPTH(DEPTH)) u_dut (
    .clk, .rst_n, .cfg, .start, .cog, .ow0_par, .col_map, .wb_raddr, .wb_rdata,
    .w_load, .w_row, .w1, .w2, .pat, .done);

  sram_buffer #(.DEPTH(DEPTH), .DW(8), .NRD(2*N)) u_buf (
    .clk, .we, .waddr, .wdata, .raddr(wb_raddr), .rdata(wb_rdata));

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
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

  initial begin
    int cin, cout, k, loads, t0, comb;
    cfg = '0; start = 0; ow0_par = 0; cog = '0; we = 0; waddr = '0; wdata = '0;
    for (int c = 0; c < N; c++) col_map[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = 13'(a); wdata = 8'($urandom); mem[a] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int it = 0; it < 60; it++) begin
      comb = $urandom_range(0, 1);
      k    = comb ? 4 : 3 + ($urandom_range(0, 1) * 2);
      cin  = $urandom_range(1, 6);
      cout = $urandom_range(1, 40);
      if (cout * cin * k * k > DEPTH - 2) cout = (DEPTH - 2) / (cin * k * k);
      cfg = '0;
      cfg.cin = 12'(cin); cfg.cout = 12'(cout); cfg.k = 4'(k); cfg.hin = 8'd4; cfg.win = 8'd4;
      cfg.s_log2 = comb ? 2'd1 : 2'd0; cfg.combine = comb[0];
      cfg.pad_e = 4'($urandom_range(0, 3));
      cog = 8'($urandom_range(0, (cout - 1) / N + 1));
      ow0_par = 1'($urandom);
      for (int c = 0; c < N; c++) begin
        col_map[c].valid = ($urandom_range(0, 5) != 0);
        col_map[c].cin   = 12'($urandom_range(0, cin - 1));
        col_map[c].kh    = 4'($urandom_range(0, k - 1));
        col_map[c].kw    = comb ? 4'(2 * $urandom_range(0, k / 2 - 1)) : 4'($urandom_range(0, k - 1));
      end
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      loads = 0;
      t0 = 1;
      for (int cyc = 1; cyc <= N + 3; cyc++) begin
        if (w_load) begin
          int co;
          expect_eq(cyc, loads + 2, "load cycle");
          expect_eq(int'(w_row), loads, "w_row");
          co = int'(cog) * N + loads;
          for (int c = 0; c < N; c++) begin
            int a, e1, e2;
            a = co * cin * k * k + int'(col_map[c].cin) * k * k + int'(col_map[c].kh) * k
                + int'(col_map[c].kw);
            e1 = 0; e2 = 0;
            if (col_map[c].valid && co < cout) begin
              e1 = int'(signed'(mem[a]));
              if (comb) e2 = int'(signed'(mem[a + 1]));
            end
            expect_eq(int'(w1[c]), e1, "w1");
            expect_eq(int'(w2[c]), e2, "w2");
          end
          for (int i = 0; i < 16; i++)
            expect_eq(int'(pat[i]), comb ? ((i + int'(cfg.pad_e) + int'(ow0_par)) % 2) : 0, "pattern");
          expect_eq(int'(done), int'(loads == N - 1), "done");
          loads++;
        end else begin
          expect_eq(int'(done), 0, "done without load");
        end
        @(negedge clk);
      end
      expect_eq(loads, N, "loads per preload");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
