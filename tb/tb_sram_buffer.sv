// tb_sram_buffer: self-checking test of the multi-read-port byte buffer.
//
// Writes random bytes to random addresses while keeping a reference copy,
// then reads random addresses on all ports at once and checks that each port
// returns the byte written there exactly one cycle after its address. It also
// checks that a read of the address being written returns the old byte.
module tb_sram_buffer;

  localparam int unsigned DEPTH = 1024;
  localparam int unsigned NRD   = 32;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       we;
  logic [9:0] waddr;
  logic [7:0] wdata;
  logic [9:0] raddr [NRD];
  logic [7:0] rdata [NRD];

  sram_buffer #(.DEPTH(DEPTH), .DW(8), .NRD(NRD)) u_dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  int checks = 0, failures = 0;
  logic [7:0] ref_mem [DEPTH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0; waddr = '0; wdata = '0;
    foreach (raddr[i]) raddr[i] = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = 10'(a); wdata = 8'($urandom); ref_mem[a] = wdata;
    end
    for (int t = 0; t < 400; t++) begin
      logic [7:0] exp_v [NRD];
      @(negedge clk);
      we    = ($urandom % 2) == 1;
      waddr = 10'($urandom);
      wdata = 8'($urandom);
      foreach (raddr[i]) begin
        raddr[i] = (i == 0) ? waddr : 10'($urandom);
        exp_v[i] = ref_mem[raddr[i]];
      end
      if (we) ref_mem[waddr] = wdata;
      @(negedge clk);
      we = 1'b0;
      foreach (rdata[i]) begin
        checks++;
        if (rdata[i] !== exp_v[i]) begin
          failures++;
          if (failures < 5) $display("MISMATCH port %0d addr %0d got %0h exp %0h", i, raddr[i], rdata[i], exp_v[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
