// tb_ring_buffer: self-checking test of ring_buffer at its default size
// (12 channels, 8000 samples = 32 us at 250 MS/s).
// Writes a new pseudo-random sample of every channel each cycle and keeps its
// own copy of everything written. After more than two full turns of the buffer
// it reads random ages, including 0 and DEPTH-1, and compares the word that
// appears one cycle later with the copy written rd_age+1 cycles earlier.
module tb_ring_buffer;
  import flashcam_pkg::*;
  localparam int CH = CH_PER_BOARD, DEPTH = RING_DEPTH, AW = $clog2(DEPTH);
  localparam int NWRITE = 2 * DEPTH + 500;

  logic clk = 0, rst_n = 0;
  logic [CH-1:0][SAMPLE_W-1:0] wr_samples, rd_data;
  logic rd_en = 0;
  logic [AW-1:0] rd_age = '0;
  int checks = 0, failures = 0;

  ring_buffer dut (.*);

  always #2 clk = ~clk;

  logic [CH-1:0][SAMPLE_W-1:0] hist [NWRITE + 4];
  int nwr = 0;   // words written so far
  always @(posedge clk) if (rst_n) begin
    hist[nwr] = wr_samples;
    nwr++;
  end

  function automatic logic [CH-1:0][SAMPLE_W-1:0] rnd();
    logic [CH-1:0][SAMPLE_W-1:0] v;
    for (int c = 0; c < CH; c++) v[c] = SAMPLE_W'($urandom);
    return v;
  endfunction

  initial begin
    int a, idx;
    wr_samples = rnd();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill more than two turns, plus interleaved reads
    while (nwr < NWRITE) begin
      @(negedge clk);
      wr_samples = rnd();
      if (nwr > DEPTH + 10 && ($urandom % 4 == 0)) begin
        case ($urandom % 4)
          0: a = 0;
          1: a = DEPTH - 1;
          default: a = $urandom % DEPTH;
        endcase
        rd_en = 1; rd_age = AW'(a);
        idx = nwr - 1 - a;          // word the read addresses at the next edge
        @(negedge clk);
        rd_en = 0;
        wr_samples = rnd();
        checks++;
        if (rd_data !== hist[idx]) begin
          failures++;
          if (failures < 5) $display("FAIL age %0d: got %h exp %h", a, rd_data, hist[idx]);
        end
      end
    end
    // read data holds while rd_en is low
    @(negedge clk);
    rd_en = 1; rd_age = 5; idx = nwr - 6;
    @(negedge clk); rd_en = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (rd_data !== hist[idx]) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NWRITE * 3) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
