// tb_sfu: self-checking test of the special function unit.
//
// Writes a random 32-bit bias per channel through the byte-wide bias port,
// then feeds random accumulator vectors for several channel groups and
// settings (LeakyReLU slope shift, output shift, INT8/INT4) and compares each
// lane with bias add, LeakyReLU, round-half-up shift and saturation worked out
// here. Output follows input by one cycle.
module tb_sfu;
  import esca_pkg::*;

  localparam int unsigned L = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  layer_cfg_t        cfg;
  logic              bias_we, in_valid, out_valid;
  logic [9:0]        bias_waddr;
  logic [7:0]        bias_wdata, cog;
  logic signed [31:0] in_acc [L];
  logic signed [7:0]  out_q [L];

  sfu #(.LANES(L)) u_dut (.clk, .rst_n, .cfg, .bias_we, .bias_waddr, .bias_wdata,
                          .in_valid, .cog, .in_acc, .out_valid, .out_q);

  int checks = 0, failures = 0;
  int bias [MAX_COUT];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int post(input longint acc, input int b, input int ash, input int osh, input bit m4);
    longint v, r;
    v = acc + b;
    if (v < 0) v = v >>> ash;
    r = osh > 0 ? (v + (longint'(1) << (osh - 1))) >>> osh : v;
    if (m4) begin
      if (r > 7) r = 7;
      if (r < -8) r = -8;
    end else begin
      if (r > 127) r = 127;
      if (r < -128) r = -128;
    end
    return int'(r);
  endfunction

  initial begin
    cfg = '0; bias_we = 0; bias_waddr = '0; bias_wdata = '0; in_valid = 0; cog = '0;
    foreach (in_acc[i]) in_acc[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < MAX_COUT; i++) begin
      bias[i] = int'($urandom % 20001) - 10000;
      for (int j = 0; j < 4; j++) begin
        @(negedge clk);
        bias_we = 1'b1; bias_waddr = 10'(4 * i + j); bias_wdata = 8'(bias[i] >> (8 * j));
      end
    end
    @(negedge clk);
    bias_we = 1'b0;
    for (int t = 0; t < 300; t++) begin
      int e [L];
      cfg.alpha_shift = 4'($urandom % 5);
      cfg.out_shift   = 5'($urandom % 10);
      cfg.int4        = ($urandom % 3) == 0;
      cog             = 8'($urandom % (MAX_COUT / L));
      in_valid        = 1'b1;
      foreach (in_acc[l]) begin
        in_acc[l] = 32'($urandom % 60001) - 30000;
        e[l] = post(longint'(in_acc[l]), bias[int'(cog) * L + l], cfg.alpha_shift, cfg.out_shift, cfg.int4);
      end
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid) failures++;
      foreach (out_q[l]) begin
        checks++;
        if (int'(out_q[l]) != e[l]) begin
          failures++;
          if (failures < 5) $display("MISMATCH lane %0d got %0d exp %0d", l, out_q[l], e[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
