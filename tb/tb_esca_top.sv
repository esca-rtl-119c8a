// tb_esca_top: end-to-end test of the accelerator at its default sizes.
//
// Four layer jobs run through the frame scheduler, with inputs, weights and
// biases generated with $urandom into a behavioural DRAM:
//   J1 decode: transposed conv 8x24x24 -> 20x48x48, K=4 S=2 P=1, input
//      combining, INT8 (two output-channel groups, two pixel blocks per phase)
//   J2 encode: standard conv 4x16x16 -> 16x8x8, K=3 P=1 stride 2, dense
//   J3 decode: J1's layer again with input combining off (the dense baseline)
//   J4 decode: the paper's first decoder layer shape, 2x2 -> 4x4, K=4 S=2 P=1,
//      16 -> 16 channels, INT4 with input combining
// Every output byte is compared with a reference computed here from the
// textbook definitions (transposed convolution by scattering each input pixel
// through the kernel, convolution by direct summation), independent of the
// im2col lowering in the design. It also checks that input combining issues
// exactly a quarter of the dense pixel-cycles (the 75% reduction), that the
// array takes one pixel per cycle, that an encode requested during a decode
// runs before a decode requested at the same time, and that each mechanism
// (combining, dense, INT4, select of the second activation, pixel blocking,
// several channel groups, a partial K-chunk, a decode waiting for the
// accelerator) happened at least once.
module tb_esca_top;
  import esca_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        reg_we;
  logic [7:0]  reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic        frame_sensed, latent_received, enc_done, dec_done;
  logic        mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [7:0]  mem_req_wdata, mem_rsp_rdata;

  esca_top u_dut (
    .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata,
    .frame_sensed, .latent_received, .enc_done, .dec_done,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata
  );

  dram_model #(.AW(20), .LAT(4), .READY_PCT(85)) u_dram (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata)
  );

  int checks = 0;
  int failures = 0;

  typedef struct {
    int cin, cout, hin, win, k, s_log2, os_log2, pad_e, combine, int4, ash, osh;
    int act, wgt, bias, out;
  } lay_t;

  // ---------------- helpers ----------------
  task automatic reg_wr(input int a, input int d);
    @(negedge clk);
    reg_we = 1'b1; reg_addr = 8'(a); reg_wdata = 32'(d);
    @(negedge clk);
    reg_we = 1'b0; reg_addr = 8'd17;
  endtask

  task automatic program_slot(input int s, input lay_t L);
    reg_wr(8*s + 0, (L.cout << 16) | L.cin);
    reg_wr(8*s + 1, (L.win << 8) | L.hin);
    reg_wr(8*s + 2, (L.osh << 24) | (L.ash << 16) | (L.int4 << 13) | (L.combine << 12) |
                    (L.pad_e << 8) | (L.os_log2 << 6) | (L.s_log2 << 4) | L.k);
    reg_wr(8*s + 3, L.act);
    reg_wr(8*s + 4, L.wgt);
    reg_wr(8*s + 5, L.bias);
    reg_wr(8*s + 6, L.out);
  endtask

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % 32'(hi - lo + 1));
  endfunction

  task automatic fill(input lay_t L);
    int vlo, vhi;
    vlo = L.int4 ? -8 : -128;
    vhi = L.int4 ? 7 : 127;
    for (int i = 0; i < L.cin * L.hin * L.win; i++) u_dram.mem[L.act + i] = 8'(rnd(vlo, vhi));
    for (int i = 0; i < L.cout * L.cin * L.k * L.k; i++) u_dram.mem[L.wgt + i] = 8'(rnd(vlo, vhi));
    for (int i = 0; i < L.cout; i++) begin
      int b;
      b = rnd(-3000, 3000);
      for (int j = 0; j < 4; j++) u_dram.mem[L.bias + 4*i + j] = 8'(b >> (8*j));
    end
  endtask

  function automatic int sx(input logic [7:0] v);
    return int'(signed'(v));
  endfunction

  // output edge: W' = W + 2(K-P-1) + (W-1)(S-1), then a K-wide window
  function automatic int odim(input lay_t L, input int n);
    int s, we;
    s  = 1 << L.s_log2;
    we = n + 2 * L.pad_e + (n - 1) * (s - 1);
    return (we - L.k) / (1 << L.os_log2) + 1;
  endfunction

  function automatic int post(input longint acc, input int bias, input lay_t L);
    longint v, r, hi, lo;
    v = acc + longint'(bias);
    if (v < 0) v = v >>> L.ash;
    r = (L.osh > 0) ? (v + (longint'(1) << (L.osh - 1))) >>> L.osh : v;
    hi = L.int4 ? 7 : 127;
    lo = L.int4 ? -8 : -128;
    if (r > hi) r = hi;
    if (r < lo) r = lo;
    return int'(r);
  endfunction

  task automatic check_layer(input lay_t L, input string name);
    int ho, wo, p, s, bad;
    longint acc[];
    ho = odim(L, L.hin);
    wo = odim(L, L.win);
    acc = new[L.cout * ho * wo];
    foreach (acc[i]) acc[i] = 0;
    s = 1 << L.s_log2;
    if (L.s_log2 != 0) begin
      // transposed convolution, padding P = K-1-pad_e, kernel flipped
      p = L.k - 1 - L.pad_e;
      for (int co = 0; co < L.cout; co++)
        for (int ci = 0; ci < L.cin; ci++)
          for (int i = 0; i < L.hin; i++)
            for (int j = 0; j < L.win; j++)
              for (int a = 0; a < L.k; a++)
                for (int b = 0; b < L.k; b++) begin
                  int oy, ox;
                  oy = i * s + a - p;
                  ox = j * s + b - p;
                  if (oy >= 0 && oy < ho && ox >= 0 && ox < wo)
                    acc[(co * ho + oy) * wo + ox] +=
                      longint'(sx(u_dram.mem[L.act + (ci * L.hin + i) * L.win + j])) *
                      longint'(sx(u_dram.mem[L.wgt + ((co * L.cin + ci) * L.k + (L.k-1-a)) * L.k + (L.k-1-b)]));
                end
    end else begin
      // ordinary convolution with zero padding pad_e and stride 2^os_log2
      for (int co = 0; co < L.cout; co++)
        for (int oy = 0; oy < ho; oy++)
          for (int ox = 0; ox < wo; ox++)
            for (int ci = 0; ci < L.cin; ci++)
              for (int a = 0; a < L.k; a++)
                for (int b = 0; b < L.k; b++) begin
                  int iy, ix;
                  iy = (oy << L.os_log2) + a - L.pad_e;
                  ix = (ox << L.os_log2) + b - L.pad_e;
                  if (iy >= 0 && iy < L.hin && ix >= 0 && ix < L.win)
                    acc[(co * ho + oy) * wo + ox] +=
                      longint'(sx(u_dram.mem[L.act + (ci * L.hin + iy) * L.win + ix])) *
                      longint'(sx(u_dram.mem[L.wgt + ((co * L.cin + ci) * L.k + a) * L.k + b]));
                end
    end
    bad = 0;
    for (int co = 0; co < L.cout; co++) begin
      int b;
      b = {u_dram.mem[L.bias + 4*co + 3], u_dram.mem[L.bias + 4*co + 2],
           u_dram.mem[L.bias + 4*co + 1], u_dram.mem[L.bias + 4*co]};
      for (int i = 0; i < ho * wo; i++) begin
        int exp_v, got;
        exp_v = post(acc[co * ho * wo + i], b, L);
        got   = sx(u_dram.mem[L.out + co * ho * wo + i]);
        checks++;
        if (got != exp_v) begin
          failures++;
          bad++;
          if (bad <= 5) $display("MISMATCH %s co=%0d pix=%0d got=%0d exp=%0d", name, co, i, got, exp_v);
        end
      end
    end
    $display("%s: %0dx%0dx%0d output checked, %0d mismatches", name, L.cout, ho, wo, bad);
  endtask

  task automatic expect_true(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- mechanism monitors ----------------
  int n_sel2 = 0, n_blk_split = 0, n_int4_cycles = 0, n_comb_cycles = 0, n_dense_cycles = 0;
  int n_partial_chunk = 0, n_cog2 = 0;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.u_array.g_row[0].g_col[0].u_pe.xv_i && u_dut.u_array.g_row[0].g_col[0].u_pe.sel)
      n_sel2++;
    if (u_dut.u_ctrl.st == u_dut.u_ctrl.S_BLK &&
        (u_dut.u_ctrl.oh0 != 12'(u_dut.u_ctrl.phase) || u_dut.u_ctrl.ow0 != 0))
      n_blk_split++;
    if (u_dut.pix_valid && u_dut.cfg.int4) n_int4_cycles++;
    if (u_dut.pix_valid && u_dut.u_ctrl.comb) n_comb_cycles++;
    if (u_dut.pix_valid && !u_dut.u_ctrl.comb) n_dense_cycles++;
    if (u_dut.u_im2col.map_done && !u_dut.u_im2col.col_map[ARRAY_DIM-1].valid) n_partial_chunk++;
    if (u_dut.pix_valid && u_dut.cog != 0) n_cog2++;
  end

  // stream statistics are sampled at each completion pulse
  int order[$];
  int stream_at_done[$];
  always @(posedge clk) if (rst_n) begin
    if (enc_done) begin order.push_back(0); stream_at_done.push_back(u_dut.u_ctrl.stat_stream); end
    if (dec_done) begin order.push_back(1); stream_at_done.push_back(u_dut.u_ctrl.stat_stream); end
  end

  task automatic pulse(ref logic sig);
    @(negedge clk); sig = 1'b1;
    @(negedge clk); sig = 1'b0;
  endtask

  task automatic wait_done(input int n);
    while (order.size() < n) @(posedge clk);
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("WATCHDOG: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  lay_t L1, L2, L3, L4;
  initial begin
    int exp_comb;
    reg_we = 1'b0; reg_addr = 8'd17; reg_wdata = '0;
    frame_sensed = 1'b0; latent_received = 1'b0;
    L1 = '{cin:8, cout:20, hin:24, win:24, k:4, s_log2:1, os_log2:0, pad_e:2, combine:1,
           int4:0, ash:3, osh:7, act:'h00000, wgt:'h10000, bias:'h20000, out:'h30000};
    L2 = '{cin:4, cout:16, hin:16, win:16, k:3, s_log2:0, os_log2:1, pad_e:1, combine:0,
           int4:0, ash:2, osh:6, act:'h60000, wgt:'h61000, bias:'h62000, out:'h63000};
    L3 = L1;
    L3.combine = 0;
    L3.out = 'h40000;
    L4 = '{cin:16, cout:16, hin:2, win:2, k:4, s_log2:1, os_log2:0, pad_e:2, combine:1,
           int4:1, ash:3, osh:4, act:'h70000, wgt:'h71000, bias:'h72000, out:'h73000};
    fill(L1);
    fill(L2);
    fill(L4);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // register file read-back
    program_slot(1, L1);
    program_slot(0, L2);
    @(negedge clk); reg_addr = 8'd8;
    #1 expect_true(reg_rdata == ((20 << 16) | 8), "register read-back of slot 1 word 0");
    @(negedge clk); reg_addr = 8'd17;

    // J1 decode; during it an encode and a second decode are requested
    pulse(latent_received);
    repeat (200) @(posedge clk);
    pulse(frame_sensed);
    pulse(latent_received);
    wait_done(1);
    program_slot(1, L3);           // J2 (encode) runs while the host sets up J3
    wait_done(3);
    check_layer(L1, "J1 decode, combined INT8");
    check_layer(L2, "J2 encode, dense conv");
    check_layer(L3, "J3 decode, dense baseline");
    expect_true(order[0] == 1 && order[1] == 0 && order[2] == 1,
                "encode requested during a decode runs before the waiting decode");

    // J4: paper's first decoder layer, INT4
    program_slot(1, L4);
    pulse(latent_received);
    wait_done(4);
    check_layer(L4, "J4 decode, combined INT4");

    // one pixel per cycle per K-chunk: J1 has 2 groups x 2 phases x 2 chunks x 1152 px
    exp_comb = 2 * 2 * 2 * (48 * 48 / 2);
    expect_true(stream_at_done[0] == exp_comb, "J1 streams one pixel per cycle per chunk");
    expect_true(stream_at_done[2] == 4 * stream_at_done[0],
                "input combining issues a quarter of the dense pixel-cycles");
    $display("pixel-cycles: combined %0d, dense %0d", stream_at_done[0], stream_at_done[2]);

    // scheduler status and mechanism coverage
    @(negedge clk); reg_addr = 8'd19;
    #1 expect_true(reg_rdata == {16'd3, 16'd1}, "scheduler counted 1 encode and 3 decodes");
    @(negedge clk); reg_addr = 8'd16;
    #1 expect_true(reg_rdata[11:0] != 0, "a decode waited for the busy accelerator");
    expect_true(reg_rdata[19:12] == 0, "no request dropped");
    expect_true(n_sel2 > 0, "PE selected the second activation");
    expect_true(n_blk_split > 0, "a phase was split into pixel blocks");
    expect_true(n_int4_cycles > 0, "INT4 mode ran");
    expect_true(n_comb_cycles > 0, "input-combining mode ran");
    expect_true(n_dense_cycles > 0, "dense mode ran");
    expect_true(n_partial_chunk > 0, "a partial K-chunk ran");
    expect_true(n_cog2 > 0, "a second output-channel group ran");
    $display("mechanisms: sel2=%0d blk_split=%0d int4=%0d comb=%0d dense=%0d partial=%0d cog2=%0d waits=%0d",
             n_sel2, n_blk_split, n_int4_cycles, n_comb_cycles, n_dense_cycles,
             n_partial_chunk, n_cog2, reg_rdata[11:0]);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
