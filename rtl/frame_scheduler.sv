// frame_scheduler: issues encode and decode jobs to the shared accelerator.
//
// In the overlapped Codec Avatar pipeline the headset's own encoder and the
// remote user's decoder share one accelerator while the network carries
// latent codes. Two rules hold: a decode may start only after the accelerator
// has finished the encode it is running (one engine), and only once the remote
// latent code for it has arrived. The scheduler counts sensed frames waiting
// for encoding (frame_sensed) and received latent codes waiting for decoding
// (latent_received). Whenever the accelerator is idle it starts an encode if
// one is waiting, otherwise a decode if one is waiting. enc_done tells the
// transmitter that a latent code is ready; dec_done tells the renderer that a
// decoded avatar frame is ready.
//
// Timing: job_start is a one-cycle pulse with job_type, given at the earliest
// one cycle after the accelerator reports job_done. Pending counts saturate at
// 2^CW-1; a request arriving at saturation is dropped and counted in dropped.
// dec_waits counts cycles in which a decode was pending but had to wait for a
// running job.
//
// From the paper: the two scheduling rules. This design's own choices: encode
// before decode when both wait, the counters and their widths.
//
// rst_n resets the registers asynchronously; it also appears in the
// assertions' disable iff clause, which lint reports as a synchronous use.
module frame_scheduler
  import esca_pkg::*;
#(
  parameter int unsigned CW = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        frame_sensed,
  input  logic        latent_received,
  output logic        job_start,
  output job_e        job_type,
  input  logic        job_done,
  output logic        busy,
  output logic        enc_done,
  output logic        dec_done,
  output logic [CW-1:0] enc_pending,
  output logic [CW-1:0] dec_pending,
  output logic [15:0] enc_count,
  output logic [15:0] dec_count,
  output logic [15:0] dec_waits,
  output logic [7:0]  dropped
);

  job_e running;
  logic take_enc, take_dec;
  logic [CW-1:0] full;
  assign full = '1;

  always_comb begin
    take_enc = !busy && enc_pending != 0;
    take_dec = !busy && enc_pending == 0 && dec_pending != 0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      running     <= JOB_ENCODE;
      job_start   <= 1'b0;
      job_type    <= JOB_ENCODE;
      enc_done    <= 1'b0;
      dec_done    <= 1'b0;
      enc_pending <= '0;
      dec_pending <= '0;
      enc_count   <= '0;
      dec_count   <= '0;
      dec_waits   <= '0;
      dropped     <= '0;
    end else begin
      job_start <= 1'b0;
      enc_done  <= 1'b0;
      dec_done  <= 1'b0;

      enc_pending <= enc_pending + CW'(frame_sensed && enc_pending != full) - CW'(take_enc);
      dec_pending <= dec_pending + CW'(latent_received && dec_pending != full) - CW'(take_dec);
      dropped <= dropped + 8'(frame_sensed && enc_pending == full)
                         + 8'(latent_received && dec_pending == full);

      if (take_enc || take_dec) begin
        busy      <= 1'b1;
        running   <= take_enc ? JOB_ENCODE : JOB_DECODE;
        job_start <= 1'b1;
        job_type  <= take_enc ? JOB_ENCODE : JOB_DECODE;
      end else if (busy && job_done) begin
        busy <= 1'b0;
        if (running == JOB_ENCODE) begin
          enc_done  <= 1'b1;
          enc_count <= enc_count + 1'b1;
        end else begin
          dec_done  <= 1'b1;
          dec_count <= dec_count + 1'b1;
        end
      end

      if (dec_pending != 0 && busy) dec_waits <= dec_waits + 1'b1;
    end
  end

  // rule 1: never two jobs at once; rule 2: decode needs a received latent code
  a_done_when_busy : assert property (@(posedge clk) disable iff (!rst_n) job_done |-> busy);
  a_dec_has_latent : assert property (@(posedge clk) disable iff (!rst_n)
    take_dec |-> dec_pending != 0);

endmodule
