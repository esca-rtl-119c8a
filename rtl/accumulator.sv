// accumulator: per-pixel accumulation of the systolic array's output vectors.
//
// Each valid result vector from the array (one 32-bit sum per array row, i.e.
// per output channel of the current group) is added into the entry of its
// pixel. Pixels of a pass arrive in order, so the entry index is a counter that
// pass_start rewinds. On the first K-chunk of a block (first = 1 at
// pass_start) the entry is overwritten instead of added to, so no separate
// clearing pass is needed. The drain port reads one entry per cycle for the
// special function unit.
//
// Timing: read-modify-write in two stages: read at the cycle in_valid is high,
// write one cycle later. Successive inputs go to successive entries, so the
// pipeline needs no forwarding. rd_data follows rd_addr by one cycle.
//
// The paper names the accumulator after the array; its depth, its word width
// and the overwrite-on-first-chunk scheme are this design's own choices.
//
// rst_n resets the registers asynchronously; it also appears in the
// assertions' disable iff clause, which lint reports as a synchronous use.
module accumulator
  import esca_pkg::*;
#(
  parameter int unsigned LANES = ARRAY_DIM,
  parameter int unsigned AW    = ACC_W,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned IW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 pass_start,
  input  logic                 first,
  input  logic                 in_valid,
  input  logic signed [AW-1:0] in_data [LANES],
  input  logic [IW-1:0]        rd_addr,
  output logic signed [AW-1:0] rd_data [LANES],
  output logic [IW:0]          count
);

  logic signed [AW-1:0] mem [DEPTH][LANES];

  logic                 first_q;
  logic [IW:0]          wptr;
  logic                 s1_v;
  logic [IW-1:0]        s1_addr;
  logic signed [AW-1:0] s1_data [LANES];
  logic signed [AW-1:0] s1_old  [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_q <= 1'b1;
      wptr    <= '0;
      s1_v    <= 1'b0;
      s1_addr <= '0;
    end else begin
      if (pass_start) begin
        first_q <= first;
        wptr    <= '0;
      end else if (in_valid) begin
        wptr <= wptr + 1'b1;
      end
      s1_v    <= in_valid;
      s1_addr <= wptr[IW-1:0];
    end
  end

  always_ff @(posedge clk) begin
    s1_data <= in_data;
    s1_old  <= mem[wptr[IW-1:0]];
    rd_data <= mem[rd_addr];
    if (s1_v) begin
      for (int l = 0; l < LANES; l++)
        mem[s1_addr][l] <= first_q ? s1_data[l] : s1_old[l] + s1_data[l];
    end
  end

  assign count = wptr;

  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> wptr < (IW+1)'(DEPTH));

endmodule
