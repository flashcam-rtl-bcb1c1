// tb_fadc_board: self-checking test of one FADC board at the default sizes
// (12 channels, 8000-sample ring buffer, 16-entry trigger queue).
// The testbench keeps a copy of every sample it drives. It checks the
// trigger primitive of every cycle against a reference, and parses every event
// record on the output stream: header (marker, source, event number, time
// stamp) and each channel's trace, compared with the stored samples of the
// trigger's window. Cases: one event with its latency measured, an event whose
// window reaches past the current time, a trigger older than 32 us (expired),
// and a burst of 20 back-to-back triggers, more than the queue holds (the
// excess is dropped and counted), read under random back-pressure.
module tb_fadc_board;
  import flashcam_pkg::*;
  localparam int CH = CH_PER_BOARD, DEPTH = RING_DEPTH, AW = $clog2(DEPTH);
  localparam int MAXT = 40000;

  logic clk = 0, rst_n = 0;
  logic [CH-1:0][SAMPLE_W-1:0] samples;
  ts_t ts;
  logic [SAMPLE_W-1:0] pedestal = 200, pix_thr = 100;
  logic [AW-1:0] pretrig = 3, win_len = 8;
  trig_prim_t prim;
  logic trig_valid = 0;
  trig_msg_t trig;
  logic m_valid, m_ready = 1, m_last;
  logic [WORD_W-1:0] m_data;
  logic [31:0] n_events, n_dropped, n_expired, n_lost, n_wait;
  int checks = 0, failures = 0;

  fadc_board dut (.*);
  always #2 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // ---- sample source: pedestal, a little ripple, and pulses ----
  logic [CH-1:0][SAMPLE_W-1:0] hist [MAXT];
  bit pulse [MAXT];
  function automatic logic [CH-1:0][SAMPLE_W-1:0] gen(int t);
    logic [CH-1:0][SAMPLE_W-1:0] v;
    for (int c = 0; c < CH; c++)
      v[c] = SAMPLE_W'(200 + (t * 13 + c * 7) % 16 + (pulse[t] && (c % 3 != 0) ? 600 + 50 * c : 0));
    return v;
  endfunction

  // ts counts samples; samples for time ts are presented during that cycle
  always @(posedge clk) begin
    if (!rst_n) ts <= '0;
    else        ts <= ts + 1;
  end
  always_comb samples = gen(int'(ts));
  always @(posedge clk) hist[int'(ts)] <= samples;

  // ---- primitive reference, two cycles behind ----
  always @(negedge clk) if (rst_n && ts >= 3) begin
    automatic int n = 0, s = 0;
    automatic int t = int'(ts) - 2;
    automatic logic [CH-1:0][SAMPLE_W-1:0] v = gen(t);
    for (int c = 0; c < CH; c++) begin
      automatic int a = int'(v[c]) - int'(pedestal);
      if (a < 0) a = 0;
      s += a;
      if (a > int'(pix_thr)) n++;
    end
    checks++;
    if (prim.ts != ts_t'(t) || prim.nhits != NHIT_W'(n) || prim.sum != SUM_W'(s)) begin
      failures++;
      if (failures < 10) $display("FAIL prim at %0d: %p exp nhits %0d sum %0d", t, prim, n, s);
    end
  end

  // ---- record parser ----
  ts_t trig_ts [int];
  int  pos = 0, rec_evt = 0, next_evt = 0, records = 0, last_word_cyc = 0, cyc = 0;
  ts_t rec_ts;
  int  rec_src;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && m_valid && m_ready) begin
      automatic int L = int'(win_len);
      if (pos == 0) begin
        check(m_data[15:2] == HDR_MARK[15:2], "record marker");
        rec_src = int'(m_data[1:0]);
      end else if (pos == 1) begin
        rec_evt = int'(m_data);
        check(rec_evt == next_evt, $sformatf("event %0d, expected %0d", rec_evt, next_evt));
        next_evt = rec_evt + 1;
      end else if (pos == 2) rec_ts[15:0] = m_data;
      else if (pos == 3) rec_ts[31:16] = m_data;
      else if (pos == 4) begin
        rec_ts[47:32] = m_data;
        check(trig_ts.exists(rec_evt) && trig_ts[rec_evt] == rec_ts, "record time stamp");
      end else begin
        automatic int k = pos - HDR_WORDS;
        automatic int c = k / L, t = int'(rec_ts) - int'(pretrig) + k % L;
        check(m_data == WORD_W'(hist[t][c]), $sformatf("sample ch %0d t %0d: %h vs %h", c, t, m_data, hist[t][c]));
        check(m_last == (k == CH * L - 1), "m_last");
      end
      pos++;
      if (m_last) begin pos = 0; records++; last_word_cyc = cyc; end
    end
  end

  int evt = 0;
  task automatic send_trig(ts_t t, trig_src_e src);
    trig_valid = 1; trig = '{evt: EVT_W'(evt), src: src, ts: t};
    trig_ts[evt] = t;
    evt++;
    @(negedge clk);
    trig_valid = 0;
  endtask

  initial begin
    int c0, r0;
    for (int t = 0; t < MAXT; t++) pulse[t] = (t % 997 == 500) || (t % 997 == 501);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (600) @(negedge clk);
    // one event around the pulse at t = 500; latency of a full record
    c0 = cyc; r0 = records;
    send_trig(500, SRC_SELF);
    while (records == r0 && cyc < c0 + 1000) @(negedge clk);
    check(last_word_cyc - c0 == 1 + 3 + HDR_WORDS + CH * 8,
          $sformatf("record took %0d cycles", last_word_cyc - c0));
    // window ending after the current time
    r0 = records;
    win_len = 40; pretrig = 2;
    send_trig(ts, SRC_EXT);
    repeat (2000) @(negedge clk);
    check(records == r0 + 1 && n_wait > 0, "window in the future");
    // run past one full buffer, then a trigger older than 32 us
    repeat (8500) @(negedge clk);
    send_trig(ts - DEPTH - 10, SRC_EXT);
    evt--;                                  // the dropped event number is reused
    repeat (50) @(negedge clk);
    check(n_expired == 1, "expired trigger");
    // burst: 20 triggers in 20 cycles, random back-pressure
    win_len = 8; pretrig = 3;
    for (int i = 0; i < 20; i++) send_trig(ts - 100 - 3 * i, (i % 2) ? SRC_EXT : SRC_SELF);
    for (int i = 0; i < 6000; i++) begin m_ready = ($urandom % 3) != 0; @(negedge clk); end
    m_ready = 1;
    repeat (300) @(negedge clk);
    check(n_dropped > 0, "no trigger dropped in the burst");
    check(n_events == 22 - n_dropped && records == int'(n_events),
          $sformatf("events %0d records %0d dropped %0d", n_events, records, n_dropped));
    check(n_lost == 0, "samples lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAXT - 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
