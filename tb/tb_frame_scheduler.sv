// tb_frame_scheduler: self-checking test of the encode/decode job scheduler.
//
// A model accelerator here takes a random number of cycles per job. Camera
// frames and remote latent codes arrive at random times. The test checks the
// pipeline's rules: never two jobs at once; a decode starts only when a latent
// code is waiting; when both are waiting the encode goes first; every request
// is served (counts of enc_done/dec_done equal the requests) and none is
// dropped; and job_start follows job_done by at most two cycles when work is
// waiting. It also checks that decodes had to wait at some point.
//
// A second phase replays the paper's pipeline at a scale of 100 cycles per
// millisecond: a frame is sensed every 10 ms, encoding takes 3.05 ms,
// decoding 3.13 ms, and the remote latent code arrives 9.05 ms after its
// frame (1 ms sensing, encoding, 5 ms transmission). It checks that decoded
// frames then leave exactly every 1000 cycles (10 ms, i.e. 100 frames/s), that
// each decode ends within its own 3.13 ms plus one encode of waiting after its
// latent code arrived, and that nothing piles up.
module tb_frame_scheduler;
  import esca_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic frame_sensed, latent_received, job_start, job_done, busy, enc_done, dec_done;
  job_e job_type;
  logic [3:0]  enc_pending, dec_pending;
  logic [15:0] enc_count, dec_count, dec_waits;
  logic [7:0]  dropped;

  frame_scheduler #(.CW(4)) u_dut (.*);

  int checks = 0, failures = 0;
  int n_enc_req = 0, n_dec_req = 0, n_enc_done = 0, n_dec_done = 0;
  int m_enc = 0, m_dec = 0;       // requests waiting, as modelled here
  int running = 0, remain = 0, idle_wait = 0;
  bit paper_timing = 0;           // phase 2: fixed job times from the paper
  int last_dec = -1, dec_gaps = 0, t_latent = 0;
  int cyc = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 8) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  // model accelerator and rule checks
  always @(posedge clk) if (rst_n) begin
    job_done <= 1'b0;
    if (job_start) begin
      expect_true(running == 0, "one job at a time");
      if (job_type == JOB_DECODE) begin
        expect_true(m_dec > 0, "decode only after a latent code arrived");
        expect_true(m_enc == 0, "encode has priority");
        m_dec--;
      end else begin
        expect_true(m_enc > 0, "encode only after a frame was sensed");
        m_enc--;
      end
      running = 1;
      if (paper_timing) remain = (job_type == JOB_DECODE) ? 313 : 305;
      else              remain = 5 + int'($urandom % 40);
    end else if (running != 0) begin
      remain--;
      if (remain == 0) begin
        job_done <= 1'b1;
        running = 0;
        idle_wait = 0;
      end
    end else if (m_enc + m_dec > 0 && !job_done) begin
      idle_wait++;
      expect_true(idle_wait <= 3, "a waiting job starts promptly");
    end
    if (frame_sensed)    m_enc++;
    if (latent_received) m_dec++;
    if (enc_done) n_enc_done++;
    if (dec_done) n_dec_done++;
    cyc++;
    if (paper_timing && latent_received) t_latent = cyc;
    if (paper_timing && dec_done) begin
      expect_true(cyc - t_latent <= 305 + 313 + 3, "decode latency after its latent code");
      if (last_dec >= 0) begin
        expect_true(cyc - last_dec == 1000, "one decoded frame every 10 ms (100 FPS)");
        dec_gaps++;
      end
      last_dec = cyc;
    end
  end

  initial begin
    frame_sensed = 0; latent_received = 0; job_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      frame_sensed    = ($urandom % 60) == 0 && m_enc < 6;
      latent_received = ($urandom % 60) == 0 && m_dec < 6;
      n_enc_req += int'(frame_sensed);
      n_dec_req += int'(latent_received);
    end
    frame_sensed = 0; latent_received = 0;
    repeat (600) @(negedge clk);
    expect_true(n_enc_done == n_enc_req, "every encode served");
    expect_true(n_dec_done == n_dec_req, "every decode served");
    expect_true(int'(enc_count) == n_enc_req && int'(dec_count) == n_dec_req, "job counters");
    expect_true(dropped == 0, "nothing dropped");
    expect_true(dec_waits != 0, "decodes waited for the accelerator");
    // phase 2: the paper's 100 FPS schedule, 1 ms = 100 cycles
    paper_timing = 1;
    for (int t = 0; t < 20 * 1000; t++) begin
      @(negedge clk);
      frame_sensed    = (t % 1000) == 0;
      latent_received = (t % 1000) == 905 % 1000 && t >= 905;
      n_enc_req += int'(frame_sensed);
      n_dec_req += int'(latent_received);
      if (t % 1000 == 999) expect_true(enc_pending <= 1 && dec_pending <= 1, "no backlog");
    end
    frame_sensed = 0; latent_received = 0;
    repeat (1200) @(negedge clk);
    expect_true(dec_gaps >= 18, "steady 100 FPS stream observed");
    expect_true(n_enc_done == n_enc_req && n_dec_done == n_dec_req, "every request of the schedule served");
    $display("requests: %0d encode, %0d decode; decode wait cycles %0d", n_enc_req, n_dec_req, dec_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
