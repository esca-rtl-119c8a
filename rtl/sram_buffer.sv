// sram_buffer: byte-wide on-chip buffer with one write port and NRD read ports.
//
// Used twice in the accelerator: as the input buffer, which holds the input
// activation map of the current layer, and as the weight buffer, which holds its
// weights. The DMA fills it through the write port; the activation-side or
// weight-side im2col engine reads NRD bytes per cycle, two for each of the
// 16 array columns.
//
// Timing: reads are synchronous, data appears the cycle after the address. A
// read of the address being written in the same cycle returns the old byte.
//
// The paper names both buffers; their size, width and port count are this
// design's own choices (a real chip would bank the array to give the same read
// bandwidth). The memory is not reset: the DMA writes every byte before it is
// read.
module sram_buffer #(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned DW    = 8,
  parameter int unsigned NRD   = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr [NRD],
  output logic [DW-1:0] rdata [NRD]
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar i = 0; i < NRD; i++) begin : g_rd
    always_ff @(posedge clk) rdata[i] <= mem[raddr[i]];
  end

endmodule
