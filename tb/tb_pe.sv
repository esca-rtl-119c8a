// tb_pe: self-checking test of the input-combining PE.
//
// Loads random weight pairs and select sequences, drives random activation
// pairs with random valid gaps in INT8 and INT4 mode, and compares Yo with
// Yi + w*x computed here with the select bit tracked independently (one
// position per valid activation, rewound at each load). Also checks that the
// activations and valid flag are forwarded upward after one cycle.
module tb_pe;
  import esca_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              int4, w_load, xv_i, xv_o;
  logic signed [7:0] w1_in, w2_in, x1_i, x2_i, x1_o, x2_o;
  logic [15:0]       pat_in;
  logic signed [31:0] y_i, y_o;

  pe u_dut (.clk, .rst_n, .int4, .w_load, .w1_in, .w2_in, .pat_in, .xv_i, .x1_i, .x2_i,
            .xv_o, .x1_o, .x2_o, .y_i, .y_o);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int s4(input logic [7:0] v);
    return int'(signed'(v[3:0]));
  endfunction

  initial begin
    int w1, w2, pos, exp_y, xa, xb, wa, wb;
    logic [15:0] pat;
    bit valid, m4;
    {int4, w_load, xv_i, w1_in, w2_in, x1_i, x2_i, pat_in, y_i} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int load = 0; load < 40; load++) begin
      @(negedge clk);
      m4     = load[0];
      int4   = m4;
      w_load = 1'b1;
      w1_in  = 8'($urandom);
      w2_in  = 8'($urandom);
      pat_in = 16'($urandom);
      xv_i   = 1'b0;
      pat = pat_in; w1 = int'(w1_in); w2 = int'(w2_in); pos = 0;
      @(negedge clk);
      w_load = 1'b0;
      for (int n = 0; n < 50; n++) begin
        valid = ($urandom % 4) != 0;
        xv_i = valid;
        x1_i = 8'($urandom);
        x2_i = 8'($urandom);
        y_i  = 32'($urandom % 100000) - 50000;
        xa = m4 ? s4(x1_i) : int'(x1_i);
        xb = m4 ? s4(x2_i) : int'(x2_i);
        wa = m4 ? s4(8'(w1)) : w1;
        wb = m4 ? s4(8'(w2)) : w2;
        if (valid) begin
          exp_y = int'(y_i) + (pat[pos % 16] ? xb * wb : xa * wa);
          pos++;
        end else begin
          exp_y = int'(y_i);
        end
        @(negedge clk);
        checks++;
        if (y_o != 32'(exp_y) || xv_o != valid) begin
          failures++;
          if (failures < 5) $display("MISMATCH y_o=%0d exp=%0d", y_o, exp_y);
        end
        checks++;
        if (x1_o != x1_i || x2_o != x2_i) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
