// sfu: special function unit applied to accumulated results on their way out.
//
// For each of the LANES output channels of a drained accumulator entry it
//   1. adds the channel's 32-bit bias (the smoothing factors are already
//      folded into weights and biases offline, so no scaling happens here),
//   2. applies LeakyReLU, sigma(x) = max(alpha*x, x), with alpha = 2^-alpha_shift
//      (an arithmetic right shift of negative values),
//   3. requantises: rounds, shifts right by out_shift and saturates to signed
//      8 bits, or to signed 4 bits in INT4 mode.
// The bias table is written byte by byte (little endian) by the DMA.
//
// Timing: one entry per cycle; out_valid/out_q follow in_valid by one cycle.
//
// The paper names the unit and shows the bias add and activation after the
// accumulation (LeakyReLU with a positive scale commuting with smoothing);
// the power-of-two slope, the rounding shift and saturation are this design's
// own choices.
module sfu
  import esca_pkg::*;
#(
  parameter int unsigned LANES = ARRAY_DIM,
  parameter int unsigned AW    = ACC_W,
  parameter int unsigned DW    = DATA_W,
  parameter int unsigned NB    = MAX_COUT,
  localparam int unsigned BAW  = $clog2(NB * 4)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  layer_cfg_t          cfg,
  input  logic                 bias_we,
  input  logic [BAW-1:0]       bias_waddr,
  input  logic [7:0]           bias_wdata,
  input  logic                 in_valid,
  input  logic [7:0]           cog,
  input  logic signed [AW-1:0] in_acc [LANES],
  output logic                 out_valid,
  output logic signed [DW-1:0] out_q [LANES]
);

  logic [7:0] bias_mem [NB][4];

  always_ff @(posedge clk) begin
    if (bias_we) bias_mem[bias_waddr[BAW-1:2]][bias_waddr[1:0]] <= bias_wdata;
  end

  function automatic logic signed [DW-1:0] post(logic signed [AW-1:0] acc,
                                                 logic signed [AW-1:0] b,
                                                 layer_cfg_t c);
    logic signed [AW:0] v, r;
    logic signed [AW:0] hi, lo;
    v = (AW+1)'(acc) + (AW+1)'(b);
    if (v < 0) v = v >>> c.alpha_shift;
    if (c.out_shift != 0) r = (v + ((AW+1)'(1) <<< (c.out_shift - 5'd1))) >>> c.out_shift;
    else                  r = v;
    hi = c.int4 ? (AW+1)'(7)  : (AW+1)'(127);
    lo = c.int4 ? -(AW+1)'(8) : -(AW+1)'(128);
    if (r > hi) r = hi;
    if (r < lo) r = lo;
    return DW'(r);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) out_q[l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) begin
          logic [$clog2(NB)-1:0] idx;
          logic signed [AW-1:0]  b;
          idx = $clog2(NB)'(32'(cog) * LANES + l);
          b   = {bias_mem[idx][3], bias_mem[idx][2], bias_mem[idx][1], bias_mem[idx][0]};
          out_q[l] <= post(in_acc[l], b, cfg);
        end
      end
    end
  end

endmodule
