// trigger_preprocessor: per-board trigger primitives from the digitised samples.
//
// The camera trigger is formed from the digitised signals themselves; each
// FADC board's FPGA condenses its channels every sample period into one
// trigger primitive for the camera trigger. This design uses the simplest
// primitive that serves both trigger algorithms of camera_trigger:
//   stage 1: per channel, amplitude = sample - pedestal, clipped at zero, and
//            a discriminator bit, amplitude > pix_thr;
//   stage 2: nhits = number of set discriminator bits,
//            sum   = sum of the amplitudes, saturating at 2^SUM_W-1.
// The primitive carries the time stamp of the samples it was made from, so
// its two-cycle latency does not shift the event time.
// That the trigger is derived on the board from the samples follows the
// camera description; the pedestal subtraction, the discriminator and the sum
// are this design's own choice, since the published algorithms are not given.
module trigger_preprocessor
  import flashcam_pkg::*;
#(
  parameter int CH = CH_PER_BOARD
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [CH-1:0][SAMPLE_W-1:0] samples,
  input  ts_t                         ts,
  input  logic [SAMPLE_W-1:0]         pedestal,
  input  logic [SAMPLE_W-1:0]         pix_thr,
  output trig_prim_t                  prim
);

  logic [CH-1:0][SAMPLE_W-1:0] amp;
  logic [CH-1:0]               hit;
  ts_t                         ts_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      amp  <= '0;
      hit  <= '0;
      ts_q <= '0;
    end else begin
      for (int c = 0; c < CH; c++) begin
        amp[c] <= (samples[c] > pedestal) ? samples[c] - pedestal : '0;
        hit[c] <= (samples[c] > pedestal) && (samples[c] - pedestal > pix_thr);
      end
      ts_q <= ts;
    end
  end

  logic [NHIT_W-1:0] nhits;
  logic [SUM_W-1:0]  sum;
  always_comb begin
    logic [SUM_W+$clog2(CH+1)-1:0] acc;
    nhits = '0;
    acc   = '0;
    for (int c = 0; c < CH; c++) begin
      nhits = nhits + NHIT_W'(hit[c]);
      acc   = acc + $bits(acc)'(amp[c]);
    end
    sum = (acc > $bits(acc)'({SUM_W{1'b1}})) ? {SUM_W{1'b1}} : SUM_W'(acc);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)
      prim <= '0;
    else begin
      prim.nhits <= nhits;
      prim.sum   <= sum;
      prim.ts    <= ts_q;
    end
  end

endmodule
