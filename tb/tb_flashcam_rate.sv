// tb_flashcam_rate: the full-size camera readout (147 boards, 1764 pixels,
// 32 us ring buffers) under the event rates of the camera specification:
// a burst of 40 external triggers at 50 kHz (one every 5000 samples) followed
// by 40 at a sustained 30 kHz (one every 8333 samples), each asking for a
// 128-sample (512 ns) trace from 16 us in the past, while self triggers from
// light pulses every 25000 samples (10 kHz) are interleaved. Dead-time free means no
// trigger may be dropped or expire: every board must send a record for every
// trigger, and every word of every record is checked against the samples.
module tb_flashcam_rate;
  import flashcam_pkg::*;
  localparam int BOARDS = N_BOARDS, CH = CH_PER_BOARD, DEPTH = RING_DEPTH;
  localparam int AW = $clog2(DEPTH), MAXT = 600000, WIN = 128;

  logic clk = 0, rst_n = 0;
  logic [CH-1:0][SAMPLE_W-1:0] samples [BOARDS];
  ts_t ts_now;
  logic [SAMPLE_W-1:0] pedestal = 200, pix_thr = 100;
  logic [AW-1:0] pretrig = 4, win_len = WIN;
  logic trig_enable = 1;
  trig_alg_e trig_alg = ALG_MULT;
  logic [MULT_W-1:0] maj_thr = 50;
  logic [SUM_W-1:0] sum_thr = 60000;
  logic [15:0] holdoff = 20;
  logic ext_valid = 0;
  ts_t ext_ts = '0;
  logic trig_valid;
  trig_msg_t trig;
  logic [BOARDS-1:0] m_valid, m_ready = '1, m_last;
  logic [WORD_W-1:0] m_data [BOARDS];
  logic [31:0] n_self, n_ext, ext_lost;
  logic [31:0] n_events [BOARDS], n_dropped [BOARDS], n_expired [BOARDS], n_lost [BOARDS], n_wait [BOARDS];
  int checks = 0, failures = 0;

  flashcam_top dut (.*);
  always #2 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  localparam int PULSE_T = 400;
  function automatic logic [SAMPLE_W-1:0] gen(int t, int b, int c);
    return SAMPLE_W'(200 + (t * 13 + b * 5 + c * 7) % 16 +
                     ((t % 25000 >= PULSE_T && t % 25000 < PULSE_T + 2 && (b + c) % 4 == 0) ? 900 : 0));
  endfunction
  always_comb
    for (int b = 0; b < BOARDS; b++)
      for (int c = 0; c < CH; c++) samples[b][c] = gen(int'(ts_now), b, c);

  ts_t trig_ts [int];
  int ntrig = 0, self_cyc = 0, cyc = 0, last_cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (rst_n && trig_valid) begin
    trig_ts[int'(trig.evt)] = trig.ts;
    ntrig++;
    if (trig.src == SRC_SELF) self_cyc = cyc;
  end

  int pos [BOARDS], rec_evt [BOARDS], records [BOARDS], bad_words = 0;
  ts_t rec_ts [BOARDS];
  initial for (int b = 0; b < BOARDS; b++) begin pos[b] = 0; records[b] = 0; end
  always @(posedge clk) if (rst_n) for (int b = 0; b < BOARDS; b++)
    if (m_valid[b] && m_ready[b]) begin
      automatic int p = pos[b];
      if (p == 0) check(m_data[b][15:2] == HDR_MARK[15:2], "record marker");
      else if (p == 1) rec_evt[b] = int'(m_data[b]);
      else if (p == 2) rec_ts[b][15:0] = m_data[b];
      else if (p == 3) rec_ts[b][31:16] = m_data[b];
      else if (p == 4) begin
        rec_ts[b][47:32] = m_data[b];
        check(trig_ts.exists(rec_evt[b]) && trig_ts[rec_evt[b]] == rec_ts[b], "record time stamp");
      end else begin
        automatic int k = p - HDR_WORDS;
        automatic int t = int'(rec_ts[b]) - int'(pretrig) + k % WIN;
        checks++;
        if (m_data[b] != WORD_W'(gen(t, b, k / WIN)) || m_last[b] != (k == CH * WIN - 1)) begin
          failures++; bad_words++;
          if (bad_words < 5) $display("FAIL board %0d word %0d t %0d: %h vs %h", b, k, t, m_data[b], gen(t, b, k / WIN));
        end
      end
      pos[b]++;
      if (m_last[b]) begin pos[b] = 0; records[b]++; last_cyc = cyc; end
    end

  initial begin
    int n_burst = 40, n_sust = 40;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (ts_now < 6000) @(negedge clk);
    for (int i = 0; i < n_burst + n_sust; i++) begin
      ext_valid = 1; ext_ts = ts_now - 4000;
      @(negedge clk);
      ext_valid = 0;
      repeat ((i < n_burst) ? 4999 : 8332) @(negedge clk);
    end
    repeat (4000) @(negedge clk);
    $display("triggers %0d (self %0d, external %0d, lost %0d)", ntrig, n_self, n_ext, ext_lost);
    check(n_ext == 32'(n_burst + n_sust) && ext_lost == 0, "external triggers");
    check(n_self > 15, "self triggers");
    for (int b = 0; b < BOARDS; b++)
      check(records[b] == ntrig && int'(n_events[b]) == ntrig && n_dropped[b] == 0 &&
            n_expired[b] == 0 && n_lost[b] == 0 && pos[b] == 0,
            $sformatf("board %0d: %0d records of %0d", b, records[b], ntrig));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAXT) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
