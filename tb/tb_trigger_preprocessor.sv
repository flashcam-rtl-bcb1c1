// tb_trigger_preprocessor: self-checking test of trigger_preprocessor.
// Drives random samples (some near pedestal, some far above) and random
// pedestal/threshold settings and compares every primitive with a reference
// computed in the testbench from the samples two cycles earlier.
module tb_trigger_preprocessor;
  import flashcam_pkg::*;
  localparam int CH = CH_PER_BOARD;
  logic clk = 0, rst_n = 0;
  logic [CH-1:0][SAMPLE_W-1:0] samples;
  ts_t ts;
  logic [SAMPLE_W-1:0] pedestal, pix_thr;
  trig_prim_t prim;
  int checks = 0, failures = 0;

  trigger_preprocessor dut (.*);
  always #2 clk = ~clk;

  function automatic trig_prim_t ref_prim(logic [CH-1:0][SAMPLE_W-1:0] s, ts_t t,
                                          int ped, int thr);
    trig_prim_t p;
    int sum = 0, n = 0, amp;
    for (int c = 0; c < CH; c++) begin
      amp = int'(s[c]) - ped;
      if (amp < 0) amp = 0;
      sum += amp;
      if (amp > thr) n++;
    end
    p.nhits = NHIT_W'(n);
    p.sum   = (sum > 65535) ? 16'hFFFF : SUM_W'(sum);
    p.ts    = t;
    return p;
  endfunction

  trig_prim_t expq[$];
  initial begin
    trig_prim_t e;
    samples = '0; ts = '0; pedestal = 12'd200; pix_thr = 12'd50;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      if (i % 500 == 0) begin
        pedestal = SAMPLE_W'($urandom % 400);
        pix_thr  = SAMPLE_W'($urandom % 300);
      end
      for (int c = 0; c < CH; c++)
        case ($urandom % 4)
          0: samples[c] = SAMPLE_W'($urandom);                    // anything
          1: samples[c] = 12'hFFF;                                // saturated
          default: samples[c] = SAMPLE_W'(pedestal + ($urandom % 120) - 60);
        endcase
      ts = ts_t'(i) + 48'h1_0000_0000;
      expq.push_back(ref_prim(samples, ts, pedestal, pix_thr));
      @(negedge clk);
      if (expq.size() == 2) begin
        e = expq.pop_front();
        checks++;
        if (prim !== e) begin
          failures++;
          if (failures < 5) $display("FAIL %0d: got %p exp %p", i, prim, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
