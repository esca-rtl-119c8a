// tb_dma: self-checking test of the DMA against the behavioural DRAM.
//
// Issues read transfers of random length and source to each destination
// (input buffer, weight buffer, bias table) and checks that every DRAM byte
// arrives, in order, at consecutive on-chip addresses with the right write
// enable, and that cmd_done pulses once per transfer. Then streams result
// bytes through the write channel to random addresses and checks DRAM.
// The DRAM accepts requests at random and answers after 4 cycles.
module tb_dma;
  import esca_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cmd_valid, cmd_ready, cmd_done, wr_valid, wr_ready;
  dma_dst_e    cmd_dst;
  logic [31:0] cmd_src, cmd_len, wr_addr;
  logic [7:0]  wr_data;
  logic        ibuf_we, wbuf_we, bias_we;
  logic [15:0] buf_waddr;
  logic [7:0]  buf_wdata;
  logic        mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [7:0]  mem_req_wdata, mem_rsp_rdata;

  dma #(.BUF_AW(16)) u_dut (.*);

  dram_model #(.AW(16), .LAT(4), .READY_PCT(70)) u_dram (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  int checks = 0, failures = 0;
  int nexp = 0, nwr = 0, ndone = 0;
  dma_dst_e cur_dst;
  int cur_src;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watch the on-chip write port
  always @(posedge clk) if (rst_n) begin
    if (ibuf_we || wbuf_we || bias_we) begin
      checks++;
      if (buf_waddr != 16'(nwr) || buf_wdata != u_dram.mem[16'(cur_src + nwr)] ||
          ibuf_we != (cur_dst == DMA_TO_IBUF) || wbuf_we != (cur_dst == DMA_TO_WBUF) ||
          bias_we != (cur_dst == DMA_TO_BIAS)) begin
        failures++;
        if (failures < 5) $display("MISMATCH write %0d addr %0d data %0h", nwr, buf_waddr, buf_wdata);
      end
      nwr++;
    end
    if (cmd_done) ndone++;
  end

  initial begin
    cmd_valid = 0; cmd_dst = DMA_TO_IBUF; cmd_src = '0; cmd_len = '0;
    wr_valid = 0; wr_addr = '0; wr_data = '0;
    for (int i = 0; i < 65536; i++) u_dram.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 12; t++) begin
      int len;
      len = 1 + int'($urandom % 300);
      @(negedge clk);
      cur_dst = dma_dst_e'(t % 3);
      cur_src = int'($urandom % 60000);
      nwr = 0;
      cmd_valid = 1'b1; cmd_dst = cur_dst; cmd_src = 32'(cur_src); cmd_len = 32'(len);
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      #1 cmd_valid = 1'b0;
      while (ndone <= t) @(negedge clk);
      checks++;
      if (nwr != len) begin
        failures++;
        $display("transfer %0d: %0d of %0d bytes", t, nwr, len);
      end
    end
    // write channel
    for (int t = 0; t < 200; t++) begin
      logic [31:0] a;
      logic [7:0]  d;
      a = 32'($urandom % 65536);
      d = 8'($urandom);
      @(negedge clk);
      wr_valid = 1'b1; wr_addr = a; wr_data = d;
      @(posedge clk);
      while (!wr_ready) @(posedge clk);
      #1 wr_valid = 1'b0;
      @(negedge clk);
      checks++;
      if (u_dram.mem[a[15:0]] != d) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
