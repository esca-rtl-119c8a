// dram_model: behavioural model of the off-chip DRAM, for simulation only.
//
// A byte-addressed memory of 2^AW bytes behind the accelerator's DRAM port.
// It accepts a request in a cycle with probability READY_PCT percent, performs
// writes at once and returns read data in order exactly LAT cycles after the
// request was accepted. Testbenches fill and inspect mem[] directly.
module dram_model #(
  parameter int unsigned AW        = 20,
  parameter int unsigned LAT       = 4,
  parameter int unsigned READY_PCT = 80
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  logic [31:0] req_addr,
  input  logic [7:0]  req_wdata,
  output logic        rsp_valid,
  output logic [7:0]  rsp_rdata
);

  logic [7:0] mem [2**AW];
  logic       pv [LAT];
  logic [7:0] pd [LAT];

  always_ff @(posedge clk) begin
    if (!rst_n) req_ready <= 1'b0;
    else        req_ready <= ($urandom % 100) < READY_PCT;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        pv[i] <= 1'b0;
        pd[i] <= '0;
      end
    end else begin
      pv[0] <= req_valid && req_ready && !req_we;
      pd[0] <= mem[req_addr[AW-1:0]];
      for (int i = 1; i < LAT; i++) begin
        pv[i] <= pv[i-1];
        pd[i] <= pd[i-1];
      end
      if (req_valid && req_ready && req_we) mem[req_addr[AW-1:0]] <= req_wdata;
    end
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp_rdata = pd[LAT-1];

endmodule
