// tb_systolic_array: self-checking test of the 16x16 input-combining array.
//
// Loads random weight pairs into all rows (one row per cycle) with the
// alternating select sequence of the stride-2 checkerboard, streams random
// activation pairs one pixel per cycle (with one bubble), and compares every
// output vector with the matrix product worked out here: for pixel n,
// y[r] = sum over c of (sel(n) ? x2*W2 : x1*W1). It checks that results come
// out in input order ROWS+COLS-1 cycles after their pixel entered, and runs a
// second pass in dense mode (select always 0) and one in INT4 mode.
module tb_systolic_array;
  import esca_pkg::*;

  localparam int unsigned N   = 16;
  localparam int unsigned LAT = 2 * N - 1;
  localparam int unsigned NP  = 40;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              int4, w_load, x_valid, y_valid;
  logic [3:0]        w_row;
  logic signed [7:0] w1 [N];
  logic signed [7:0] w2 [N];
  logic signed [7:0] x1 [N];
  logic signed [7:0] x2 [N];
  logic [15:0]       pat;
  logic signed [31:0] y [N];

  systolic_array #(.ROWS(N), .COLS(N)) u_dut (
    .clk, .rst_n, .int4, .w_load, .w_row, .w1, .w2, .pat, .x_valid, .x1, .x2, .y_valid, .y);

  int checks = 0, failures = 0;
  int W1 [N][N], W2 [N][N];
  longint expv [$];
  int     t_in [$];
  int     cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int op(input int v, input bit m4);
    return m4 ? int'(signed'(4'(v))) : v;
  endfunction

  // compare outputs as they appear
  always @(negedge clk) if (rst_n && y_valid) begin
    longint e [N];
    int t0;
    for (int r = 0; r < N; r++) e[r] = expv.pop_front();
    t0 = t_in.pop_front();
    checks++;
    if (cyc - t0 != LAT) begin
      failures++;
      $display("LATENCY %0d, expected %0d", cyc - t0, LAT);
    end
    for (int r = 0; r < N; r++) begin
      checks++;
      if (longint'(y[r]) != e[r]) begin
        failures++;
        if (failures < 5) $display("MISMATCH row %0d got %0d exp %0d", r, y[r], e[r]);
      end
    end
  end

  task automatic run_pass(input logic [15:0] p, input bit m4);
    @(negedge clk);
    int4 = m4;
    pat  = p;
    for (int r = 0; r < N; r++) begin
      w_load = 1'b1;
      w_row  = 4'(r);
      for (int c = 0; c < N; c++) begin
        W1[r][c] = int'($urandom % 256) - 128;
        W2[r][c] = int'($urandom % 256) - 128;
        w1[c] = 8'(W1[r][c]);
        w2[c] = 8'(W2[r][c]);
      end
      @(negedge clk);
    end
    w_load = 1'b0;
    for (int n = 0; n < NP; n++) begin
      longint e [N];
      bit sel;
      if (n == 7) begin
        x_valid = 1'b0;
        @(negedge clk);
      end
      sel = p[n % 16];
      x_valid = 1'b1;
      foreach (x1[c]) begin
        x1[c] = 8'($urandom);
        x2[c] = 8'($urandom);
      end
      for (int r = 0; r < N; r++) begin
        e[r] = 0;
        for (int c = 0; c < N; c++)
          e[r] += sel ? longint'(op(int'(x2[c]), m4) * op(W2[r][c], m4))
                      : longint'(op(int'(x1[c]), m4) * op(W1[r][c], m4));
      end
      for (int r = 0; r < N; r++) expv.push_back(e[r]);
      t_in.push_back(cyc);
      @(negedge clk);
    end
    x_valid = 1'b0;
    repeat (LAT + 4) @(negedge clk);
  endtask

  initial begin
    int4 = 1'b0; w_load = 1'b0; x_valid = 1'b0; w_row = '0; pat = '0;
    foreach (w1[c]) begin w1[c] = '0; w2[c] = '0; x1[c] = '0; x2[c] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_pass(16'hAAAA, 1'b0);   // combined, select 0,1,0,1...
    run_pass(16'h0000, 1'b0);   // dense
    run_pass(16'h5555, 1'b1);   // combined INT4, select 1,0,1,0...
    checks++;
    if (expv.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
