// tb_readout_controller: self-checking test of readout_controller with 3
// channels and a 256-sample ring buffer (reduced so that expiry is quick).
// The ring buffer and the trigger queue are modelled here: the model ring
// buffer returns sample value f(T, ch) for sample time T, so every sample word
// of a record can be checked against the time it should come from.
// Cases: a trigger before time zero minus pretrigger (expired), a plain event
// with the cycle count of a record checked, a window reaching into the future
// (the controller must wait), a trigger too old for the buffer (expired), a
// burst of queued triggers read under random back-pressure, and a long stall
// during which samples are overwritten (sent as LOST_SAMPLE and counted).
module tb_readout_controller;
  import flashcam_pkg::*;
  localparam int CH = 3, DEPTH = 256, AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  ts_t ts_in;
  logic [AW-1:0] pretrig, win_len;
  logic q_empty, q_pop;
  trig_msg_t q_dout;
  logic rd_en;
  logic [AW-1:0] rd_age;
  logic [CH-1:0][SAMPLE_W-1:0] rd_data;
  logic m_valid, m_ready, m_last;
  logic [WORD_W-1:0] m_data;
  logic [31:0] n_events, n_expired, n_lost, n_wait;
  int checks = 0, failures = 0;

  readout_controller #(.CH(CH), .DEPTH(DEPTH)) dut (.*);
  always #2 clk = ~clk;

  function automatic logic [SAMPLE_W-1:0] f(ts_t t, int ch);
    return SAMPLE_W'(t * 37 + ts_t'(ch * 1000));
  endfunction

  // time stamp being written now, and the model ring buffer
  always @(posedge clk) begin
    if (!rst_n) ts_in <= '0;
    else        ts_in <= ts_in + 1;
    if (rd_en)
      for (int c = 0; c < CH; c++) rd_data[c] <= f(ts_in - 1 - ts_t'(rd_age), c);
  end

  // trigger queue model
  trig_msg_t q[$];
  assign q_empty = (q.size() == 0);
  assign q_dout  = q_empty ? '0 : q[0];
  always @(posedge clk) if (q_pop && q.size() > 0) void'(q.pop_front());

  // expected stream
  typedef struct packed { logic [WORD_W-1:0] d; logic last; logic lossy; } w_t;
  w_t expw[$];
  int nwords = 0, nlost_seen = 0, last_cyc = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && m_valid && m_ready) begin
      w_t e;
      checks++;
      if (expw.size() == 0) begin
        failures++; $display("FAIL unexpected word %h", m_data);
      end else begin
        e = expw.pop_front();
        if (e.lossy && m_data == LOST_SAMPLE && !m_last == !e.last) nlost_seen++;
        else if (m_data !== e.d || m_last !== e.last) begin
          failures++;
          if (failures < 8) $display("FAIL word %0d: got %h/%b exp %h/%b", nwords, m_data, m_last, e.d, e.last);
        end
      end
      nwords++;
      if (m_last) last_cyc = cyc;
    end
  end

  int evt = 0;
  task automatic trigger(ts_t ts, bit expect_out, bit lossy = 0);
    trig_msg_t m;
    ts_t t0;
    m.evt = EVT_W'(evt); m.src = (evt % 2) ? SRC_EXT : SRC_SELF; m.ts = ts;
    evt++;
    q.push_back(m);
    if (!expect_out) return;
    t0 = ts - ts_t'(pretrig);
    expw.push_back('{HDR_MARK | WORD_W'(m.src), 1'b0, 1'b0});
    expw.push_back('{WORD_W'(m.evt), 1'b0, 1'b0});
    expw.push_back('{ts[15:0], 1'b0, 1'b0});
    expw.push_back('{ts[31:16], 1'b0, 1'b0});
    expw.push_back('{ts[47:32], 1'b0, 1'b0});
    for (int c = 0; c < CH; c++)
      for (int t = 0; t < int'(win_len); t++)
        expw.push_back('{WORD_W'(f(t0 + ts_t'(t), c)), (c == CH-1 && t == int'(win_len)-1), lossy});
  endtask

  task automatic wait_idle();
    int guard = 0;
    while ((expw.size() > 0 || q.size() > 0) && guard < 3000) begin @(negedge clk); guard++; end
    repeat (3) @(negedge clk);
  endtask

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int c0;
    m_ready = 1; pretrig = 4; win_len = 6;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // window would start before time zero
    @(negedge clk); trigger(2, 0);
    wait_idle();
    check(n_expired == 1, "early trigger not expired");
    repeat (300) @(negedge clk);
    // plain event; cycle count
    c0 = cyc;
    trigger(ts_in - 20, 1);
    wait_idle();
    check(last_cyc - c0 == 3 + HDR_WORDS + CH * 6, $sformatf("record took %0d cycles", last_cyc - c0));
    check(n_events == 1, "event count");
    // window reaching into the future: wait
    pretrig = 2; win_len = 10;
    trigger(ts_in, 1);
    wait_idle();
    check(n_wait > 0, "no wait for an incomplete window");
    // too old
    trigger(ts_in - 300, 0);
    wait_idle();
    check(n_expired == 2, "old trigger not expired");
    // boundary: first sample exactly DEPTH-1 old is taken, DEPTH old is not
    pretrig = 0; win_len = 4;
    trigger(ts_in - (DEPTH - 1), 1, 1);
    wait_idle();
    check(n_events == 3 && n_expired == 2, "trigger at the buffer edge");
    trigger(ts_in - DEPTH, 0);
    wait_idle();
    check(n_events == 3 && n_expired == 3, "trigger just beyond the buffer edge");
    // burst under random back-pressure
    pretrig = 3; win_len = 5;
    for (int i = 0; i < 4; i++) trigger(ts_in - ts_t'(8 + i), 1);
    for (int i = 0; i < 400; i++) begin m_ready = ($urandom % 4) != 0; @(negedge clk); end
    m_ready = 1;
    wait_idle();
    check(n_events == 7, $sformatf("burst: %0d events", n_events));
    // long stall mid-record: samples get overwritten
    pretrig = 0; win_len = 20;
    trigger(ts_in - 30, 1, 1);
    repeat (12) @(negedge clk);
    m_ready = 0;
    repeat (300) @(negedge clk);
    m_ready = 1;
    wait_idle();
    check(nlost_seen > 4 && n_lost == 32'(nlost_seen), $sformatf("lost %0d seen %0d", n_lost, nlost_seen));
    check(expw.size() == 0 && n_events == 8, "not all words sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
