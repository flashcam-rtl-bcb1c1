// flashcam_top: the digital readout and trigger of a FlashCam camera.
//
// BOARDS FADC boards of CH channels each (147 x 12 = 1764 pixels by default)
// run from one 250 MHz sample clock. A camera-wide sample counter gives every
// sample its time stamp. Each board stores its samples in a 32 us ring buffer
// and sends a trigger primitive to the camera trigger every cycle; the camera
// trigger's messages (self triggers, and delayed external array triggers that
// enter at ext_valid/ext_ts) go to all boards, and every board sends its part
// of each event as a record on its own stream (m_valid[b] ... m_last[b]).
// Those streams are where the Ethernet MACs and the off-the-shelf network to
// the camera server would connect; they are not part of this logic, and
// neither are the FADC converters, whose samples enter at `samples`.
// The configuration inputs are shared by all boards. ts_now is the time stamp
// being written in the current cycle; an external trigger may refer to any
// earlier time that is still in the ring buffers.
// The partition follows the camera's block diagram; the channel count per
// board and the single clock domain are this design's own choices.
module flashcam_top
  import flashcam_pkg::*;
#(
  parameter int BOARDS = N_BOARDS,
  parameter int CH     = CH_PER_BOARD,
  parameter int DEPTH  = RING_DEPTH,
  parameter int QDEPTH = 16,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [CH-1:0][SAMPLE_W-1:0] samples [BOARDS],
  output ts_t                         ts_now,
  // configuration
  input  logic [SAMPLE_W-1:0]         pedestal,
  input  logic [SAMPLE_W-1:0]         pix_thr,
  input  logic [AW-1:0]               pretrig,
  input  logic [AW-1:0]               win_len,
  input  logic                        trig_enable,
  input  trig_alg_e                   trig_alg,
  input  logic [MULT_W-1:0]           maj_thr,
  input  logic [SUM_W-1:0]            sum_thr,
  input  logic [15:0]                 holdoff,
  // external (array) trigger
  input  logic                        ext_valid,
  input  ts_t                         ext_ts,
  // trigger messages as broadcast to the boards
  output logic                        trig_valid,
  output trig_msg_t                   trig,
  // event record streams, one per board
  output logic [BOARDS-1:0]           m_valid,
  input  logic [BOARDS-1:0]           m_ready,
  output logic [WORD_W-1:0]           m_data [BOARDS],
  output logic [BOARDS-1:0]           m_last,
  // statistics
  output logic [31:0]                 n_self,
  output logic [31:0]                 n_ext,
  output logic [31:0]                 ext_lost,
  output logic [31:0]                 n_events  [BOARDS],
  output logic [31:0]                 n_dropped [BOARDS],
  output logic [31:0]                 n_expired [BOARDS],
  output logic [31:0]                 n_lost    [BOARDS],
  output logic [31:0]                 n_wait    [BOARDS]
);

  trig_prim_t prim [BOARDS];

  always_ff @(posedge clk) begin
    if (!rst_n) ts_now <= '0;
    else        ts_now <= ts_now + TS_W'(1);
  end

  for (genvar b = 0; b < BOARDS; b++) begin : g_board
    fadc_board #(.CH(CH), .DEPTH(DEPTH), .QDEPTH(QDEPTH)) u_board (
      .clk, .rst_n, .samples(samples[b]), .ts(ts_now),
      .pedestal, .pix_thr, .pretrig, .win_len,
      .prim(prim[b]), .trig_valid, .trig,
      .m_valid(m_valid[b]), .m_ready(m_ready[b]), .m_data(m_data[b]), .m_last(m_last[b]),
      .n_events(n_events[b]), .n_dropped(n_dropped[b]), .n_expired(n_expired[b]),
      .n_lost(n_lost[b]), .n_wait(n_wait[b]));
  end

  camera_trigger #(.BOARDS(BOARDS)) u_trig (
    .clk, .rst_n, .prim, .enable(trig_enable), .alg(trig_alg),
    .maj_thr, .sum_thr, .holdoff, .ext_valid, .ext_ts,
    .trig_valid, .trig, .n_self, .n_ext, .ext_lost);

endmodule
