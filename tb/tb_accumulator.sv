// tb_accumulator: self-checking test of the per-pixel accumulator.
//
// Runs blocks of several passes; each pass streams a random number of result
// vectors with random gaps. The first pass of a block overwrites, later passes
// add. The drained entries are compared with sums kept here, and the entry
// counter is checked after each pass.
module tb_accumulator;

  localparam int unsigned L = 16;
  localparam int unsigned D = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               pass_start, first, in_valid;
  logic signed [31:0] in_data [L];
  logic [5:0]         rd_addr;
  logic signed [31:0] rd_data [L];
  logic [6:0]         count;

  accumulator #(.LANES(L), .AW(32), .DEPTH(D)) u_dut (
    .clk, .rst_n, .pass_start, .first, .in_valid, .in_data, .rd_addr, .rd_data, .count);

  int checks = 0, failures = 0;
  longint sums [D][L];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    {pass_start, first, in_valid, rd_addr} = '0;
    foreach (in_data[i]) in_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int blk = 0; blk < 6; blk++) begin
      n = 1 + int'($urandom % D);
      for (int pass = 0; pass < 4; pass++) begin
        @(negedge clk);
        pass_start = 1'b1; first = (pass == 0);
        @(negedge clk);
        pass_start = 1'b0;
        for (int p = 0; p < n; p++) begin
          while (($urandom % 3) == 0) begin
            in_valid = 1'b0;
            @(negedge clk);
          end
          in_valid = 1'b1;
          foreach (in_data[l]) begin
            in_data[l] = 32'($urandom % 200001) - 100000;
            sums[p][l] = (pass == 0 ? 0 : sums[p][l]) + longint'(in_data[l]);
          end
          @(negedge clk);
        end
        in_valid = 1'b0;
        repeat (3) @(negedge clk);
        checks++;
        if (count != 7'(n)) failures++;
      end
      for (int p = 0; p < n; p++) begin
        rd_addr = 6'(p);
        @(negedge clk);
        foreach (rd_data[l]) begin
          checks++;
          if (longint'(rd_data[l]) != sums[p][l]) begin
            failures++;
            if (failures < 5) $display("MISMATCH entry %0d lane %0d got %0d exp %0d", p, l, rd_data[l], sums[p][l]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
