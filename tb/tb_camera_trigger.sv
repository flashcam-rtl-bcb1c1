// tb_camera_trigger: self-checking test of camera_trigger with the full
// camera's 147 boards.
// Directed cases, each compared with an expected list of trigger messages
// (source, time stamp, event number, and the cycle they appear in):
// multiplicity trigger at and just below threshold, holdoff, board-sum
// trigger at and just below threshold, algorithm switch, external trigger
// alone, external trigger colliding with self triggers (held one cycle, and
// lost when a second one arrives while one is held), and enable low.
// Latency checked: self trigger two cycles after its primitive, external
// trigger one cycle after ext_valid.
module tb_camera_trigger;
  import flashcam_pkg::*;
  localparam int BOARDS = N_BOARDS;

  logic clk = 0, rst_n = 0;
  trig_prim_t prim [BOARDS];
  logic enable;
  trig_alg_e alg;
  logic [MULT_W-1:0] maj_thr;
  logic [SUM_W-1:0] sum_thr;
  logic [15:0] holdoff;
  logic ext_valid;
  ts_t ext_ts;
  logic trig_valid;
  trig_msg_t trig;
  logic [31:0] n_self, n_ext, ext_lost;
  int checks = 0, failures = 0;

  camera_trigger dut (.*);
  always #2 clk = ~clk;

  int pc = 0;                       // posedges since reset release
  always @(posedge clk) if (rst_n) pc++;

  typedef struct packed { int cyc; trig_src_e src; ts_t ts; int evt; } ev_t;
  ev_t got[$], exp_q[$];
  always @(negedge clk) if (rst_n && trig_valid)
    got.push_back('{pc, trig.src, trig.ts, int'(trig.evt)});

  int evt = 0;
  task automatic expect_trig(int cyc, trig_src_e src, ts_t ts);
    exp_q.push_back('{cyc, src, ts, evt});
    evt++;
  endtask

  // set primitives for the next cycle: total hits spread over boards, one board's sum
  task automatic set_prims(int hits, int sum_board, int sum_val);
    for (int b = 0; b < BOARDS; b++) begin
      prim[b].nhits = '0;
      prim[b].sum   = '0;
      prim[b].ts    = ts_t'(1000 + pc);
    end
    for (int h = 0; h < hits; h++) prim[(h * 7) % BOARDS].nhits++;
    if (sum_board >= 0) prim[sum_board].sum = SUM_W'(sum_val);
  endtask

  task automatic step(int hits = 0, int sum_board = -1, int sum_val = 0, bit ext = 0, int ets = 0);
    set_prims(hits, sum_board, sum_val);
    ext_valid = ext;
    ext_ts    = ts_t'(ets);
    @(negedge clk);
  endtask

  initial begin
    int c;
    enable = 1; alg = ALG_MULT; maj_thr = 20; sum_thr = 3000; holdoff = 0;
    ext_valid = 0; ext_ts = '0;
    for (int b = 0; b < BOARDS; b++) prim[b] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    step(); step();
    // A: multiplicity at threshold, then just below
    c = pc; step(20); expect_trig(c + 2, SRC_SELF, ts_t'(1000 + c));
    repeat (4) step();
    step(19);
    repeat (4) step();
    // B: holdoff 5 with the condition true for 10 cycles
    holdoff = 5;
    c = pc;
    for (int i = 0; i < 10; i++) step(300);
    expect_trig(c + 2, SRC_SELF, ts_t'(1000 + c));
    expect_trig(c + 8, SRC_SELF, ts_t'(1000 + c + 6));
    repeat (8) step();
    holdoff = 0;
    // C: board-sum algorithm
    alg = ALG_SUM;
    c = pc; step(0, 100, 3000); expect_trig(c + 2, SRC_SELF, ts_t'(1000 + c));
    repeat (4) step();
    step(0, 17, 2999);
    step(1764);                       // multiplicity does not count in this mode
    repeat (4) step();
    alg = ALG_MULT;
    // D: external trigger alone
    c = pc; step(0, -1, 0, 1, 12345); expect_trig(c + 1, SRC_EXT, 48'd12345);
    repeat (4) step();
    // E: external trigger colliding with a self trigger
    c = pc;
    step(25);                                         // self fires at c+2
    step(0, -1, 0, 1, 777);                            // ext sampled with the self trigger
    step(0, -1, 0, 1, 778);                            // next ext while the first is held
    expect_trig(c + 2, SRC_SELF, ts_t'(1000 + c));
    expect_trig(c + 3, SRC_EXT, 48'd777);
    expect_trig(c + 4, SRC_EXT, 48'd778);
    repeat (4) step();
    // E': two self triggers in a row, two external triggers with them: one lost
    c = pc;
    step(25);
    step(25, -1, 0, 1, 900);                           // pends behind the first self trigger
    step(0, -1, 0, 1, 901);                            // arrives with the second: lost
    expect_trig(c + 2, SRC_SELF, ts_t'(1000 + c));
    expect_trig(c + 3, SRC_SELF, ts_t'(1000 + c + 1));
    expect_trig(c + 4, SRC_EXT, 48'd900);
    repeat (5) step();
    // F: disabled
    enable = 0;
    step(500); step(500);
    repeat (4) step();
    enable = 1;
    step(); step();

    checks++;
    if (got.size() != exp_q.size()) begin
      failures++;
      $display("FAIL: %0d triggers, expected %0d", got.size(), exp_q.size());
    end
    for (int i = 0; i < exp_q.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != exp_q[i]) begin
        failures++;
        $display("FAIL trigger %0d: got %p exp %p", i, got[i], exp_q[i]);
      end
    end
    checks++;
    if (n_self != 7 || n_ext != 4 || ext_lost != 1) begin
      failures++;
      $display("FAIL counters self=%0d ext=%0d lost=%0d", n_self, n_ext, ext_lost);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
