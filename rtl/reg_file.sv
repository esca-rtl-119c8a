// reg_file: host-visible configuration and status registers.
//
// Holds one layer descriptor (layer_cfg_t) for each of the two job slots, the
// encoder slot (JOB_ENCODE) and the decoder slot (JOB_DECODE), and presents
// NSTAT read-only status words. The host writes a slot's descriptor before the
// job that uses it is started; the controller reads the selected slot.
//
// Word map (32-bit words, reg_addr is a word address):
//   slot s base = 8*s
//     +0  [11:0] cin, [27:16] cout
//     +1  [7:0] hin, [15:8] win
//     +2  [3:0] k, [5:4] s_log2, [7:6] os_log2, [11:8] pad_e, [12] combine,
//         [13] int4, [19:16] alpha_shift, [28:24] out_shift
//     +3  act_addr   +4 wgt_addr   +5 bias_addr   +6 out_addr
//   16 + i  status word i (read only)
// Writes take effect at the clock edge; reads are combinational. Unmapped
// words read as zero. Everything resets to zero.
//
// The paper names a register file that configures the array; the word map is
// this design's own.
module reg_file
  import esca_pkg::*;
#(
  parameter int unsigned NSTAT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_we,
  input  logic [7:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  input  logic [31:0] status [NSTAT],
  output layer_cfg_t  cfg [2]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg[0] <= '0;
      cfg[1] <= '0;
    end else if (reg_we && reg_addr < 8'd16) begin
      automatic logic s = reg_addr[3];
      case (reg_addr[2:0])
        3'd0: begin
          cfg[s].cin  <= reg_wdata[11:0];
          cfg[s].cout <= reg_wdata[27:16];
        end
        3'd1: begin
          cfg[s].hin <= reg_wdata[7:0];
          cfg[s].win <= reg_wdata[15:8];
        end
        3'd2: begin
          cfg[s].k           <= reg_wdata[3:0];
          cfg[s].s_log2      <= reg_wdata[5:4];
          cfg[s].os_log2     <= reg_wdata[7:6];
          cfg[s].pad_e       <= reg_wdata[11:8];
          cfg[s].combine     <= reg_wdata[12];
          cfg[s].int4        <= reg_wdata[13];
          cfg[s].alpha_shift <= reg_wdata[19:16];
          cfg[s].out_shift   <= reg_wdata[28:24];
        end
        3'd3: cfg[s].act_addr  <= reg_wdata;
        3'd4: cfg[s].wgt_addr  <= reg_wdata;
        3'd5: cfg[s].bias_addr <= reg_wdata;
        3'd6: cfg[s].out_addr  <= reg_wdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    reg_rdata = '0;
    if (reg_addr < 8'd16) begin
      automatic layer_cfg_t c = cfg[reg_addr[3]];
      case (reg_addr[2:0])
        3'd0: reg_rdata = {4'd0, c.cout, 4'd0, c.cin};
        3'd1: reg_rdata = {16'd0, c.win, c.hin};
        3'd2: reg_rdata = {3'd0, c.out_shift, 4'd0, c.alpha_shift, 2'd0, c.int4, c.combine,
                           c.pad_e, c.os_log2, c.s_log2, c.k};
        3'd3: reg_rdata = c.act_addr;
        3'd4: reg_rdata = c.wgt_addr;
        3'd5: reg_rdata = c.bias_addr;
        3'd6: reg_rdata = c.out_addr;
        default: reg_rdata = '0;
      endcase
    end else if (reg_addr < 8'(16 + NSTAT)) begin
      reg_rdata = status[($clog2(NSTAT))'(reg_addr - 8'd16)];
    end
  end

endmodule
