// tb_reg_file: self-checking test of the register file.
//
// Writes random values to every descriptor word of both slots, checks the
// read-back of each word (fields outside the map read as zero), checks that
// the decoded layer_cfg_t fields hold the written bits, and checks that the
// status words read back their inputs and that unmapped words read zero.
module tb_reg_file;
  import esca_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        reg_we;
  logic [7:0]  reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic [31:0] status [4];
  layer_cfg_t  cfg [2];

  reg_file #(.NSTAT(4)) u_dut (.clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .status, .cfg);

  int checks = 0, failures = 0;
  localparam logic [31:0] MASK [7] = '{32'h0FFF_0FFF, 32'h0000_FFFF, 32'h1F0F_3FFF,
                                       32'hFFFF_FFFF, 32'hFFFF_FFFF, 32'hFFFF_FFFF, 32'hFFFF_FFFF};

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp_v, input string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("MISMATCH %s got %h exp %h", what, got, exp_v);
    end
  endtask

  initial begin
    logic [31:0] v [2][7];
    reg_we = 0; reg_addr = '0; reg_wdata = '0;
    foreach (status[i]) status[i] = 32'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 20; rep++) begin
      for (int s = 0; s < 2; s++)
        for (int w = 0; w < 7; w++) begin
          @(negedge clk);
          v[s][w] = $urandom;
          reg_we = 1'b1; reg_addr = 8'(8 * s + w); reg_wdata = v[s][w];
        end
      @(negedge clk);
      reg_we = 1'b0;
      for (int s = 0; s < 2; s++)
        for (int w = 0; w < 7; w++) begin
          reg_addr = 8'(8 * s + w);
          #1 expect_eq(reg_rdata, v[s][w] & MASK[w], "read-back");
        end
      for (int s = 0; s < 2; s++) begin
        expect_eq(32'(cfg[s].cin), 32'(v[s][0][11:0]), "cin");
        expect_eq(32'(cfg[s].cout), 32'(v[s][0][27:16]), "cout");
        expect_eq(32'(cfg[s].win), 32'(v[s][1][15:8]), "win");
        expect_eq(32'(cfg[s].k), 32'(v[s][2][3:0]), "k");
        expect_eq(32'(cfg[s].pad_e), 32'(v[s][2][11:8]), "pad_e");
        expect_eq(32'(cfg[s].combine), 32'(v[s][2][12]), "combine");
        expect_eq(32'(cfg[s].out_shift), 32'(v[s][2][28:24]), "out_shift");
        expect_eq(cfg[s].out_addr, v[s][6], "out_addr");
      end
      for (int i = 0; i < 4; i++) begin
        reg_addr = 8'(16 + i);
        #1 expect_eq(reg_rdata, status[i], "status");
      end
      reg_addr = 8'd7;
      #1 expect_eq(reg_rdata, 32'd0, "unmapped word");
      reg_addr = 8'd40;
      #1 expect_eq(reg_rdata, 32'd0, "unmapped word");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
