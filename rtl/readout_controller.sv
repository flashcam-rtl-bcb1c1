// readout_controller: reads triggered events out of the ring buffer.
//
// It takes trigger messages from the board's trigger queue (show-ahead: q_dout
// is valid while q_empty is low, q_pop removes it) and, for each, sends the
// trace window of every channel as one event record on a 16-bit valid/ready
// stream towards the board's Ethernet interface. The window is win_len samples
// starting pretrig samples before the trigger's time stamp, so a trigger with
// an old time stamp, such as a delayed external trigger, reads samples from
// the past as long as they are still in the 32 us ring buffer.
//
// Per trigger:
//   IDLE  take the queue head; window start t0 = trigger time - pretrig.
//   CHECK wait until the last sample of the window has been written (the
//         window may reach past the trigger time); if the first sample is
//         already overwritten (age > DEPTH-1) or t0 would lie before time
//         zero, drop the trigger and count it in n_expired.
//   HDR   send HDR_WORDS header words: HDR_MARK | source, event number,
//         time stamp bits 15:0, 31:16, 47:32 (the time stamp is the trigger's,
//         not t0).
//   DATA  for channel 0..CH-1, for sample t0..t0+win_len-1: read the ring
//         buffer and offer the sample, zero-extended to 16 bits, in the next
//         cycle. The next read is issued in the cycle the offered word is
//         taken, so the ring buffer's output register holds the word while the
//         stream is held off, and a word leaves every cycle while m_ready is
//         high. A sample that has been overwritten before its read (only
//         possible when the stream is held off for long or the window is very
//         long) is sent as LOST_SAMPLE and counted in n_lost. m_last marks the
//         last sample word.
// With m_ready held high a record takes 3 + HDR_WORDS + CH*win_len cycles
// from the cycle the trigger is at the queue head (when its window is
// complete) to the cycle its last word is taken, and the next trigger is
// taken up one cycle later. The ring buffer keeps being written throughout, so there is no
// dead time while triggers keep fitting in the queue.
// Reading traces of triggered events from the ring buffer and sending them to
// the camera server over Ethernet follows the camera description; the record
// format, the two-cycle-per-sample pace and the expiry rule are this design's
// own choices.
module readout_controller
  import flashcam_pkg::*;
#(
  parameter int CH    = CH_PER_BOARD,
  parameter int DEPTH = RING_DEPTH,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  ts_t                         ts_in,     // time stamp being written to the ring buffer now
  input  logic [AW-1:0]               pretrig,
  input  logic [AW-1:0]               win_len,   // 0 is treated as 1
  // trigger queue
  input  logic                        q_empty,
  input  trig_msg_t                   q_dout,
  output logic                        q_pop,
  // ring buffer read port
  output logic                        rd_en,
  output logic [AW-1:0]               rd_age,
  input  logic [CH-1:0][SAMPLE_W-1:0] rd_data,
  // event record stream
  output logic                        m_valid,
  input  logic                        m_ready,
  output logic [WORD_W-1:0]           m_data,
  output logic                        m_last,
  // statistics
  output logic [31:0]                 n_events,
  output logic [31:0]                 n_expired,
  output logic [31:0]                 n_lost,
  output logic [31:0]                 n_wait
);

  typedef enum logic [1:0] {S_IDLE, S_CHECK, S_HDR, S_DATA} state_e;
  localparam int CHW = (CH > 1) ? $clog2(CH) : 1;

  state_e          state;
  trig_msg_t       cur;
  ts_t             t0;
  logic            under;
  logic [AW-1:0]   len;
  logic [2:0]      hidx;
  // read side: next sample to fetch
  logic [AW-1:0]   rt;
  logic [CHW-1:0]  rch;
  logic            all_issued;
  // output side: the sample word on offer
  logic            out_valid, out_ok, out_last;
  logic [CHW-1:0]  out_ch;

  ts_t  newest;                 // time stamp of the newest sample in the ring buffer
  ts_t  age_t0, age_rd, t_end;
  assign newest = ts_in - TS_W'(1);
  assign t_end  = t0 + TS_W'(len) - TS_W'(1);
  assign age_t0 = newest - t0;
  assign age_rd = newest - (t0 + TS_W'(rt));

  wire window_pending = !under && (t_end > newest);
  wire window_expired = under || (age_t0 > TS_W'(DEPTH - 1));
  wire rd_ok          = (age_rd <= TS_W'(DEPTH - 1));
  wire last_read      = (rch == CHW'(CH - 1)) && (rt == len - AW'(1));
  // fetch the next sample when the word on offer leaves in this cycle (or none is on offer)
  wire issue          = (state == S_DATA) && !all_issued && (!out_valid || m_ready);

  assign q_pop  = (state == S_CHECK) && !window_pending;
  assign rd_en  = issue && rd_ok;
  assign rd_age = age_rd[AW-1:0];

  always_comb begin
    m_valid = 1'b0;
    m_data  = '0;
    m_last  = 1'b0;
    if (state == S_HDR) begin
      m_valid = 1'b1;
      case (hidx)
        3'd0:    m_data = HDR_MARK | WORD_W'(cur.src);
        3'd1:    m_data = WORD_W'(cur.evt);
        3'd2:    m_data = cur.ts[15:0];
        3'd3:    m_data = cur.ts[31:16];
        default: m_data = cur.ts[47:32];
      endcase
    end else if (out_valid) begin
      m_valid = 1'b1;
      m_data  = out_ok ? WORD_W'(rd_data[out_ch]) : LOST_SAMPLE;
      m_last  = out_last;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cur        <= '0;
      t0         <= '0;
      under      <= 1'b0;
      len        <= AW'(1);
      hidx       <= '0;
      rt         <= '0;
      rch        <= '0;
      all_issued <= 1'b0;
      out_valid  <= 1'b0;
      out_ok     <= 1'b0;
      out_last   <= 1'b0;
      out_ch     <= '0;
      n_events   <= '0;
      n_expired  <= '0;
      n_lost     <= '0;
      n_wait     <= '0;
    end else begin
      case (state)
        S_IDLE: if (!q_empty) begin
          cur   <= q_dout;
          t0    <= q_dout.ts - TS_W'(pretrig);
          under <= q_dout.ts < TS_W'(pretrig);
          len   <= (win_len == '0) ? AW'(1) : win_len;
          state <= S_CHECK;
        end
        S_CHECK: begin
          if (window_pending)
            n_wait <= n_wait + 32'd1;
          else if (window_expired) begin
            n_expired <= n_expired + 32'd1;
            state     <= S_IDLE;
          end else begin
            hidx  <= '0;
            state <= S_HDR;
          end
        end
        S_HDR: if (m_ready) begin
          if (hidx == 3'(HDR_WORDS - 1)) begin
            rt         <= '0;
            rch        <= '0;
            all_issued <= 1'b0;
            state      <= S_DATA;
          end else
            hidx <= hidx + 3'd1;
        end
        S_DATA: begin
          if (issue) begin
            out_valid <= 1'b1;
            out_ok    <= rd_ok;
            out_last  <= last_read;
            out_ch    <= rch;
            if (!rd_ok) n_lost <= n_lost + 32'd1;
            if (last_read)
              all_issued <= 1'b1;
            else if (rt == len - AW'(1)) begin
              rt  <= '0;
              rch <= rch + CHW'(1);
            end else
              rt <= rt + AW'(1);
          end else if (out_valid && m_ready) begin
            out_valid <= 1'b0;
            if (out_last) begin
              n_events <= n_events + 32'd1;
              state    <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Stream rule: a word offered and not taken stays unchanged.
  a_stream_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_data) && $stable(m_last));

endmodule
