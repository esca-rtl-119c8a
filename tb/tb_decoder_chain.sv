// tb_decoder_chain: a decoder-shaped workload run layer after layer.
//
// Six stride-2 transposed convolutions (K=4, P=1, INT8, LeakyReLU) take a
// 32-channel 2x2 latent feature map up to a 3-channel 128x128 image:
//   32x2x2 -> 32x4x4 -> 32x8x8 -> 32x16x16 -> 16x32x32 -> 16x64x64 -> 3x128x128
// The first layer has the 2x2 -> 4x4 geometry of the published first decoder
// layer; the channel counts and the depth are this test's own choice, sized
// so that every layer fits the on-chip buffers (the last layer's input is
// exactly the 64 KiB input buffer). Each layer is one decode job: the host
// program writes the layer descriptor, signals a received latent code and
// waits for dec_done; each layer reads the previous layer's output in DRAM.
//
// Checks: every output byte of every layer against a scatter-form reference
// computed from the bytes actually in DRAM; the number of pixel-cycles of each
// layer equals ceil(cout/16) * Ho*Wo * ceil(cin*(K/2)^2/16), i.e. one pixel per
// cycle through a quarter of the dense im2col rows; the last layer re-run
// without input combining takes exactly four times the pixel-cycles and gives
// the same bytes. Mechanisms counted (a failure if one never happens): several
// output-channel groups, a group with idle array rows (cout = 3), pixel
// blocking, both select phases in the PEs, and the dense re-run.
module tb_decoder_chain;
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

  dram_model #(.AW(20), .LAT(4), .READY_PCT(90)) u_dram (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata)
  );

  int checks = 0;
  int failures = 0;

  typedef struct {
    int cin, cout, hin, k, pad_e, combine, ash, osh;
    int act, wgt, bias, out;
  } lay_t;

  task automatic expect_true(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic reg_wr(input int a, input int d);
    @(negedge clk);
    reg_we = 1'b1; reg_addr = 8'(a); reg_wdata = 32'(d);
    @(negedge clk);
    reg_we = 1'b0; reg_addr = 8'd17;
  endtask

  task automatic reg_rd(input int a, output int d);
    @(negedge clk);
    reg_addr = 8'(a);
    #1 d = int'(reg_rdata);
  endtask

  // decode slot (1); square maps, stride 2 (s_log2 = 1), INT8
  task automatic program_layer(input lay_t L);
    reg_wr(8, (L.cout << 16) | L.cin);
    reg_wr(9, (L.hin << 8) | L.hin);
    reg_wr(10, (L.osh << 24) | (L.ash << 16) | (L.combine << 12) | (L.pad_e << 8) |
               (1 << 4) | L.k);
    reg_wr(11, L.act);
    reg_wr(12, L.wgt);
    reg_wr(13, L.bias);
    reg_wr(14, L.out);
  endtask

  function automatic int sx(input logic [7:0] v);
    return int'(signed'(v));
  endfunction

  function automatic int post(input longint acc, input int bias, input lay_t L);
    longint v, r;
    v = acc + longint'(bias);
    if (v < 0) v = v >>> L.ash;
    r = (v + (longint'(1) << (L.osh - 1))) >>> L.osh;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  // transposed convolution by scattering every input pixel through the
  // kernel (stored flipped, in equivalent-convolution orientation)
  task automatic check_layer(input lay_t L, input int out_addr, input string name);
    int ho, p, bad, sat;
    longint acc[];
    ho = 2 * L.hin;
    p  = L.k - 1 - L.pad_e;
    acc = new[L.cout * ho * ho];
    foreach (acc[i]) acc[i] = 0;
    for (int co = 0; co < L.cout; co++)
      for (int ci = 0; ci < L.cin; ci++)
        for (int i = 0; i < L.hin; i++)
          for (int j = 0; j < L.hin; j++) begin
            longint x;
            x = longint'(sx(u_dram.mem[L.act + (ci * L.hin + i) * L.hin + j]));
            if (x != 0)
              for (int a = 0; a < L.k; a++)
                for (int b = 0; b < L.k; b++) begin
                  int oy, ox;
                  oy = 2 * i + a - p;
                  ox = 2 * j + b - p;
                  if (oy >= 0 && oy < ho && ox >= 0 && ox < ho)
                    acc[(co * ho + oy) * ho + ox] += x *
                      longint'(sx(u_dram.mem[L.wgt + ((co * L.cin + ci) * L.k + (L.k-1-a)) * L.k + (L.k-1-b)]));
                end
          end
    bad = 0;
    sat = 0;
    for (int co = 0; co < L.cout; co++) begin
      int b;
      b = {u_dram.mem[L.bias + 4*co + 3], u_dram.mem[L.bias + 4*co + 2],
           u_dram.mem[L.bias + 4*co + 1], u_dram.mem[L.bias + 4*co]};
      for (int i = 0; i < ho * ho; i++) begin
        int exp_v, got;
        exp_v = post(acc[co * ho * ho + i], b, L);
        got   = sx(u_dram.mem[out_addr + co * ho * ho + i]);
        if (exp_v == 127 || exp_v == -128) sat++;
        checks++;
        if (got != exp_v) begin
          failures++;
          bad++;
          if (bad <= 5) $display("MISMATCH %s co=%0d pix=%0d got=%0d exp=%0d", name, co, i, got, exp_v);
        end
      end
    end
    $display("%s: %0dx%0dx%0d checked, %0d mismatches, %0d saturated", name, L.cout, ho, ho, bad, sat);
  endtask

  // mechanism monitors
  int n_sel0 = 0, n_sel1 = 0, n_blk = 0, n_cog2 = 0, n_idle_rows = 0;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.u_array.g_row[0].g_col[0].u_pe.xv_i) begin
      if (u_dut.u_array.g_row[0].g_col[0].u_pe.sel) n_sel1++;
      else                                          n_sel0++;
    end
    if (u_dut.u_ctrl.st == u_dut.u_ctrl.S_BLK &&
        (u_dut.u_ctrl.oh0 != 12'(u_dut.u_ctrl.phase) || u_dut.u_ctrl.ow0 != 0))
      n_blk++;
    if (u_dut.pix_valid && u_dut.cog != 0) n_cog2++;
    if (u_dut.pix_valid && u_dut.cfg.cout < 12'd16) n_idle_rows++;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("WATCHDOG: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NL = 6;
  lay_t L [NL];
  int cin_t  [NL] = '{32, 32, 32, 32, 16, 16};
  int cout_t [NL] = '{32, 32, 32, 16, 16, 3};

  initial begin
    int addr, comb_out, stream, busy, exp_stream, total_busy, total_stream, dense_stream, out_dense;
    reg_we = 1'b0; reg_addr = 8'd17; reg_wdata = '0;
    frame_sensed = 1'b0; latent_received = 1'b0;
    // memory map: input of layer 0, then for each layer weights, biases, output
    addr = 'h1000;
    for (int l = 0; l < NL; l++) begin
      L[l].cin = cin_t[l]; L[l].cout = cout_t[l]; L[l].hin = 2 << l; L[l].k = 4;
      L[l].pad_e = 2; L[l].combine = 1; L[l].ash = 3; L[l].osh = 6;
      L[l].act = (l == 0) ? 'h0 : L[l-1].out;
      L[l].wgt = addr;  addr += L[l].cout * L[l].cin * 16;
      L[l].bias = addr; addr += 4 * L[l].cout;
      L[l].out = addr;  addr += L[l].cout * 4 * L[l].hin * L[l].hin;
      for (int i = 0; i < L[l].cout * L[l].cin * 16; i++)
        u_dram.mem[L[l].wgt + i] = 8'(int'($urandom % 31) - 15);
      for (int i = 0; i < L[l].cout; i++) begin
        int b;
        b = int'($urandom % 2001) - 1000;
        for (int j = 0; j < 4; j++) u_dram.mem[L[l].bias + 4*i + j] = 8'(b >> (8*j));
      end
    end
    for (int i = 0; i < 32 * 4; i++) u_dram.mem[i] = 8'($urandom);
    out_dense = addr;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    total_busy = 0;
    total_stream = 0;
    for (int l = 0; l < NL; l++) begin
      program_layer(L[l]);
      @(negedge clk); latent_received = 1'b1;
      @(negedge clk); latent_received = 1'b0;
      @(posedge dec_done);
      reg_rd(17, stream);
      reg_rd(18, busy);
      check_layer(L[l], L[l].out, $sformatf("layer %0d", l + 1));
      exp_stream = ((L[l].cout + 15) / 16) * (4 * L[l].hin * L[l].hin) * ((L[l].cin * 4 + 15) / 16);
      expect_true(stream == exp_stream, $sformatf("layer %0d pixel-cycles", l + 1));
      $display("layer %0d: %0d pixel-cycles (expected %0d), %0d busy cycles", l + 1, stream,
               exp_stream, busy);
      total_busy += busy;
      total_stream += stream;
    end
    $display("decoder chain: %0d pixel-cycles, %0d busy cycles in all", total_stream, total_busy);

    // the last layer again without input combining: four times the work
    comb_out = L[NL-1].out;
    L[NL-1].combine = 0;
    L[NL-1].out = out_dense;
    program_layer(L[NL-1]);
    @(negedge clk); latent_received = 1'b1;
    @(negedge clk); latent_received = 1'b0;
    @(posedge dec_done);
    reg_rd(17, dense_stream);
    expect_true(dense_stream == 4 * stream, "dense re-run takes four times the pixel-cycles");
    for (int i = 0; i < 3 * 128 * 128; i++) begin
      checks++;
      if (u_dram.mem[out_dense + i] != u_dram.mem[comb_out + i]) failures++;
    end
    check_layer(L[NL-1], out_dense, "layer 6 dense");
    $display("last layer: combined %0d, dense %0d pixel-cycles", stream, dense_stream);

    expect_true(n_sel0 > 0 && n_sel1 > 0, "both select phases used");
    expect_true(n_blk > 0, "pixel blocking happened");
    expect_true(n_cog2 > 0, "a second output-channel group ran");
    expect_true(n_idle_rows > 0, "a layer with idle array rows ran");
    $display("mechanisms: sel0=%0d sel1=%0d blocks=%0d cog2=%0d idle_rows=%0d",
             n_sel0, n_sel1, n_blk, n_cog2, n_idle_rows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
