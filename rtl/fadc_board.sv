// fadc_board: the FPGA logic of one FADC board.
//
// The board digitises CH pixels continuously (12 bit, 250 MS/s; the converter
// itself is outside this logic, its samples arrive on `samples` once per
// cycle together with the camera-wide sample time ts). Inside:
//   ring_buffer          keeps the last DEPTH samples of every channel;
//   trigger_preprocessor sends a trigger primitive to the camera trigger every
//                        cycle (two cycles of latency, time-stamped);
//   sync_fifo            queues the camera trigger's messages (QDEPTH entries);
//                        a message arriving while it is full is dropped and
//                        counted in n_dropped;
//   readout_controller   turns each queued trigger into an event record on
//                        the m_* stream, which would feed the board's
//                        Ethernet MAC.
// This split into ring buffer, trigger preprocessor and Ethernet readout on
// one FPGA per FADC board follows the camera's block diagram; the queue and
// its drop rule are this design's own.
module fadc_board
  import flashcam_pkg::*;
#(
  parameter int CH     = CH_PER_BOARD,
  parameter int DEPTH  = RING_DEPTH,
  parameter int QDEPTH = 16,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [CH-1:0][SAMPLE_W-1:0] samples,
  input  ts_t                         ts,
  // configuration
  input  logic [SAMPLE_W-1:0]         pedestal,
  input  logic [SAMPLE_W-1:0]         pix_thr,
  input  logic [AW-1:0]               pretrig,
  input  logic [AW-1:0]               win_len,
  // camera trigger link
  output trig_prim_t                  prim,
  input  logic                        trig_valid,
  input  trig_msg_t                   trig,
  // event record stream
  output logic                        m_valid,
  input  logic                        m_ready,
  output logic [WORD_W-1:0]           m_data,
  output logic                        m_last,
  // statistics
  output logic [31:0]                 n_events,
  output logic [31:0]                 n_dropped,
  output logic [31:0]                 n_expired,
  output logic [31:0]                 n_lost,
  output logic [31:0]                 n_wait
);

  logic [CH-1:0][SAMPLE_W-1:0] rd_data;
  logic                        rd_en;
  logic [AW-1:0]               rd_age;
  logic                        q_empty, q_full, q_pop;
  trig_msg_t                   q_dout;

  ring_buffer #(.CH(CH), .SW(SAMPLE_W), .DEPTH(DEPTH)) u_ring (
    .clk, .rst_n, .wr_samples(samples), .rd_en, .rd_age, .rd_data);

  trigger_preprocessor #(.CH(CH)) u_pre (
    .clk, .rst_n, .samples, .ts, .pedestal, .pix_thr, .prim);

  sync_fifo #(.W($bits(trig_msg_t)), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n, .push(trig_valid), .din(trig), .pop(q_pop), .dout(q_dout),
    .full(q_full), .empty(q_empty), .count());

  readout_controller #(.CH(CH), .DEPTH(DEPTH)) u_ro (
    .clk, .rst_n, .ts_in(ts), .pretrig, .win_len,
    .q_empty, .q_dout, .q_pop, .rd_en, .rd_age, .rd_data,
    .m_valid, .m_ready, .m_data, .m_last,
    .n_events, .n_expired, .n_lost, .n_wait);

  always_ff @(posedge clk) begin
    if (!rst_n)
      n_dropped <= '0;
    else if (trig_valid && q_full)
      n_dropped <= n_dropped + 32'd1;
  end

endmodule
