// tb_flashcam_top: end-to-end test of the camera readout at reduced size
// (4 boards of 12 channels, 1024-sample ring buffers, 4-entry trigger queues).
// The testbench plays the FADCs (pedestal, ripple and scheduled light pulses),
// an array trigger source and the Ethernet side of every board, and checks
// every event record of every board against the samples it drove.
// Each mechanism of the design is made to happen and counted; one that never
// happens counts as a failure:
//   multiplicity self trigger, board-sum self trigger (algorithm switch),
//   holdoff suppressing a retrigger, delayed external trigger, external
//   trigger held behind a self trigger, external trigger lost, readout
//   waiting for a window to complete, trigger expired (older than the ring
//   buffer), trigger dropped on a full queue, stream back-pressure, samples
//   overwritten during a long stall.
module tb_flashcam_top;
  import flashcam_pkg::*;
  localparam int BOARDS = 4, CH = CH_PER_BOARD, DEPTH = 1024, QDEPTH = 4;
  localparam int AW = $clog2(DEPTH), MAXT = 20000;

  logic clk = 0, rst_n = 0;
  logic [CH-1:0][SAMPLE_W-1:0] samples [BOARDS];
  ts_t ts_now;
  logic [SAMPLE_W-1:0] pedestal = 200, pix_thr = 100;
  logic [AW-1:0] pretrig = 4, win_len = 16;
  logic trig_enable = 1;
  trig_alg_e trig_alg = ALG_MULT;
  logic [MULT_W-1:0] maj_thr = 10;
  logic [SUM_W-1:0] sum_thr = 5000;
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

  flashcam_top #(.BOARDS(BOARDS), .CH(CH), .DEPTH(DEPTH), .QDEPTH(QDEPTH)) dut (.*);
  always #2 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  // ---- FADC model: pulse[t] is a mask of boards lit at sample time t ----
  logic [BOARDS-1:0] pulse [MAXT];
  function automatic logic [SAMPLE_W-1:0] gen(int t, int b, int c);
    return SAMPLE_W'(200 + (t * 13 + b * 5 + c * 7) % 16 + ((pulse[t][b] && c % 2 == 0) ? 700 + 30 * c : 0));
  endfunction
  always_comb
    for (int b = 0; b < BOARDS; b++)
      for (int c = 0; c < CH; c++) samples[b][c] = gen(int'(ts_now), b, c);

  // ---- triggers as broadcast ----
  ts_t trig_ts [int];
  int  cnt_self = 0, cnt_ext = 0, cnt_held = 0, last_self_cyc = -10, cyc = 0, ntrig = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (rst_n && trig_valid) begin
    trig_ts[int'(trig.evt)] = trig.ts;
    ntrig++;
    if (trig.src == SRC_SELF) begin cnt_self++; last_self_cyc = cyc; end
    else begin
      cnt_ext++;
      if (last_self_cyc == cyc - 1) cnt_held++;
    end
  end

  // ---- per-board record parser ----
  int pos [BOARDS], rec_evt [BOARDS], last_evt [BOARDS], records [BOARDS], lost_seen [BOARDS];
  ts_t rec_ts [BOARDS];
  int stall_cycles = 0;
  initial for (int b = 0; b < BOARDS; b++) begin
    pos[b] = 0; last_evt[b] = -1; records[b] = 0; lost_seen[b] = 0;
  end
  always @(posedge clk) if (rst_n) for (int b = 0; b < BOARDS; b++) begin
    if (m_valid[b] && !m_ready[b]) stall_cycles++;
    if (m_valid[b] && m_ready[b]) begin
      automatic int L = int'(win_len);
      automatic int p = pos[b];
      if (p == 0) check(m_data[b][15:2] == HDR_MARK[15:2], "record marker");
      else if (p == 1) begin
        rec_evt[b] = int'(m_data[b]);
        check(rec_evt[b] > last_evt[b], $sformatf("board %0d event order %0d after %0d", b, rec_evt[b], last_evt[b]));
        last_evt[b] = rec_evt[b];
      end
      else if (p == 2) rec_ts[b][15:0] = m_data[b];
      else if (p == 3) rec_ts[b][31:16] = m_data[b];
      else if (p == 4) begin
        rec_ts[b][47:32] = m_data[b];
        check(trig_ts.exists(rec_evt[b]) && trig_ts[rec_evt[b]] == rec_ts[b], "record time stamp");
      end else begin
        automatic int k = p - HDR_WORDS;
        automatic int c = k / L;
        automatic int t = int'(rec_ts[b]) - int'(pretrig) + k % L;
        if (m_data[b] == LOST_SAMPLE) lost_seen[b]++;
        else check(m_data[b] == WORD_W'(gen(t, b, c)),
                   $sformatf("board %0d ch %0d t %0d: %h vs %h", b, c, t, m_data[b], gen(t, b, c)));
        check(m_last[b] == (k == CH * L - 1), "m_last");
      end
      pos[b]++;
      if (m_last[b]) begin pos[b] = 0; records[b]++; end
    end
  end

  task automatic ext_at(ts_t t);
    ext_valid = 1; ext_ts = t;
    @(negedge clk);
    ext_valid = 0;
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  initial begin
    int s0;
    for (int t = 0; t < MAXT; t++) pulse[t] = '0;
    // multiplicity trigger: all boards, 3 samples long (holdoff leaves one trigger)
    for (int t = 300; t < 303; t++) pulse[t] = '1;
    // board-sum trigger: one board only, too few pixels for multiplicity 10
    for (int t = 2000; t < 2002; t++) pulse[t] = 4'b0100;
    // 3-sample pulse with holdoff 0: three self triggers in a row
    for (int t = 3000; t < 3003; t++) pulse[t] = '1;

    repeat (3) @(negedge clk);
    rst_n = 1;
    idle(1200);
    check(cnt_self == 1, $sformatf("multiplicity: %0d self triggers", cnt_self));
    // delayed external trigger 500 samples into the past
    ext_at(ts_now - 500);
    idle(600);
    // board-sum mode
    trig_alg = ALG_SUM;
    s0 = cnt_self;
    idle(900);
    check(cnt_self == s0 + 1, "board-sum trigger");
    trig_alg = ALG_MULT;
    // external triggers arriving while self triggers fire
    holdoff = 0;
    while (ts_now < 3001) @(negedge clk);
    for (int i = 0; i < 8; i++) ext_at(ts_now - 300 - i);
    idle(1500);
    // expired: older than the ring buffer
    ext_at(ts_now - DEPTH - 5);
    idle(100);
    // burst of external triggers into queues of 4, with board 1 stalled
    m_ready[1] = 0;
    for (int i = 0; i < 8; i++) ext_at(ts_now - 200 + i);
    idle(1500);
    m_ready[1] = 1;
    for (int i = 0; i < 3000; i++) begin m_ready = BOARDS'($urandom); @(negedge clk); end
    m_ready = '1;
    idle(2000);

    for (int b = 0; b < BOARDS; b++) begin
      check(records[b] == int'(n_events[b]), $sformatf("board %0d: %0d records, %0d events", b, records[b], n_events[b]));
      check(int'(n_events[b] + n_dropped[b] + n_expired[b]) == ntrig,
            $sformatf("board %0d: triggers %0d, events+dropped+expired %0d", b, ntrig, n_events[b] + n_dropped[b] + n_expired[b]));
      check(int'(n_lost[b]) == lost_seen[b], "lost sample count");
      check(pos[b] == 0, "record unfinished");
    end
    check(int'(n_self) == cnt_self && int'(n_ext) == cnt_ext, "trigger counters");
    // every mechanism happened at least once
    begin
      int tot_drop = 0, tot_exp = 0, tot_lost = 0, tot_wait = 0;
      for (int b = 0; b < BOARDS; b++) begin
        tot_drop += n_dropped[b]; tot_exp += n_expired[b]; tot_lost += n_lost[b]; tot_wait += n_wait[b];
      end
      $display("self %0d ext %0d held %0d ext_lost %0d waits %0d expired %0d dropped %0d stalls %0d lost %0d",
               cnt_self, cnt_ext, cnt_held, ext_lost, tot_wait, tot_exp, tot_drop, stall_cycles, tot_lost);
      check(cnt_self >= 5, "self triggers");
      check(cnt_ext > 0, "external triggers");
      check(cnt_held > 0, "external trigger held behind a self trigger");
      check(ext_lost > 0, "external trigger lost");
      check(tot_wait > 0, "window wait");
      check(tot_exp > 0, "expired trigger");
      check(tot_drop > 0, "trigger dropped on full queue");
      check(stall_cycles > 0, "back-pressure");
      check(tot_lost > 0, "overwritten samples");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAXT - 10) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
