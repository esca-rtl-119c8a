// pe: input-combining processing element of the systolic array.
//
// The PE holds two preloaded weights (W1, W2) and receives two activations per
// cycle (Xi1, Xi2) from the PE below. After input combining, one of the two is
// structurally zero, so a pair of multiplexers picks the non-zero activation
// and its matching weight and the PE does a single multiply-accumulate:
// Yo <= Yi + w*x. The select bit comes from a stored bit sequence (pat) that
// advances by one position for every valid activation; for the stride-2
// checkerboard it alternates 1,0,1,0. The activations and their valid flag are
// forwarded unchanged to the PE above (Xo1, Xo2) one cycle later.
//
// Interface and timing: w_load (one cycle) loads W1, W2 and the select
// sequence and rewinds it. Every output is registered, so a PE adds one cycle of
// delay both upward and to the right. In INT4 mode both operands are taken as
// the signed low nibble. Cycles without a valid activation pass Yi through.
//
// From the paper: the two weights, the two activation inputs and outputs, the
// two multiplexers, the single MAC and the select-bit column. This design's own
// choices: the select sequence is a rotating PAT_LEN-bit register, the psum
// width is ACC_W, and the INT4 operand handling.
module pe
  import esca_pkg::*;
#(
  parameter int unsigned DW  = DATA_W,
  parameter int unsigned AW  = ACC_W,
  parameter int unsigned PL  = PAT_LEN
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 int4,
  // weight preload
  input  logic                 w_load,
  input  logic signed [DW-1:0] w1_in,
  input  logic signed [DW-1:0] w2_in,
  input  logic [PL-1:0]        pat_in,
  // activations from below, to above
  input  logic                 xv_i,
  input  logic signed [DW-1:0] x1_i,
  input  logic signed [DW-1:0] x2_i,
  output logic                 xv_o,
  output logic signed [DW-1:0] x1_o,
  output logic signed [DW-1:0] x2_o,
  // partial sums from the left, to the right
  input  logic signed [AW-1:0] y_i,
  output logic signed [AW-1:0] y_o
);

  logic signed [DW-1:0] w1_q, w2_q;
  logic [PL-1:0]        pat_q;

  logic                 sel;
  logic signed [DW-1:0] x_sel, w_sel, x_op, w_op;
  logic signed [AW-1:0] prod;

  always_comb begin
    sel   = pat_q[0];
    x_sel = sel ? x2_i : x1_i;
    w_sel = sel ? w2_q : w1_q;
    x_op  = int4 ? DW'(signed'(x_sel[3:0])) : x_sel;
    w_op  = int4 ? DW'(signed'(w_sel[3:0])) : w_sel;
    prod  = AW'(x_op) * AW'(w_op);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w1_q  <= '0;
      w2_q  <= '0;
      pat_q <= '0;
      xv_o  <= 1'b0;
      x1_o  <= '0;
      x2_o  <= '0;
      y_o   <= '0;
    end else begin
      xv_o <= xv_i;
      x1_o <= x1_i;
      x2_o <= x2_i;
      if (w_load) begin
        w1_q  <= w1_in;
        w2_q  <= w2_in;
        pat_q <= pat_in;
      end else if (xv_i) begin
        pat_q <= {pat_q[0], pat_q[PL-1:1]};
      end
      y_o <= xv_i ? y_i + prod : y_i;
    end
  end

endmodule
