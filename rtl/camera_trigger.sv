// camera_trigger: forms the camera trigger and broadcasts trigger messages.
//
// Every sample period it receives one trigger primitive from each of the
// BOARDS FADC boards (all for the same sample time) and decides, with the
// algorithm chosen at run time by alg:
//   ALG_MULT: the camera's total count of pixels above threshold >= maj_thr;
//   ALG_SUM:  the amplitude sum of at least one board >= sum_thr.
// A self trigger is issued when the condition holds, enable is set and no
// holdoff is running; it then starts a holdoff of `holdoff` cycles so one
// light pulse spanning several samples gives one trigger.
// A delayed external (array) trigger arrives as ext_valid with ext_ts, the
// sample time it refers to; since the boards keep 32 us of samples, such an
// event can be read out even though the camera itself did not trigger. If it
// arrives in the same cycle as a self trigger it is held one cycle; a further
// external trigger arriving while one is held is counted in ext_lost.
// Every issued trigger is numbered and sent to all boards as trig (one-cycle
// trig_valid pulse). Latency: trig for a primitive appears two cycles after it.
// The existence of a configurable camera trigger and of the delayed external
// trigger follow the camera description; the two algorithms, the holdoff and
// the merge rule are this design's own.
module camera_trigger
  import flashcam_pkg::*;
#(
  parameter int BOARDS = N_BOARDS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  trig_prim_t        prim [BOARDS],
  input  logic              enable,
  input  trig_alg_e         alg,
  input  logic [MULT_W-1:0] maj_thr,
  input  logic [SUM_W-1:0]  sum_thr,
  input  logic [15:0]       holdoff,
  input  logic              ext_valid,
  input  ts_t               ext_ts,
  output logic              trig_valid,
  output trig_msg_t         trig,
  output logic [31:0]       n_self,
  output logic [31:0]       n_ext,
  output logic [31:0]       ext_lost
);

  localparam int TOT_W = NHIT_W + $clog2(BOARDS + 1);

  // Stage 1: combine the boards.
  logic [MULT_W-1:0] mult_q;
  logic              sum_hit_q;
  ts_t               ts_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mult_q    <= '0;
      sum_hit_q <= 1'b0;
      ts_q      <= '0;
    end else begin
      logic [TOT_W-1:0] tot;
      logic             any;
      tot = '0;
      any = 1'b0;
      for (int b = 0; b < BOARDS; b++) begin
        tot = tot + TOT_W'(prim[b].nhits);
        any = any | (prim[b].sum >= sum_thr);
      end
      mult_q    <= (tot > TOT_W'({MULT_W{1'b1}})) ? {MULT_W{1'b1}} : MULT_W'(tot);
      sum_hit_q <= any;
      ts_q      <= prim[0].ts;
    end
  end

  // Stage 2: decide, apply holdoff, merge external triggers.
  logic        cond;
  logic        fire_self;
  logic [15:0] hold_cnt;
  logic        ext_pend;
  ts_t         ext_pend_ts;
  logic [EVT_W-1:0] evt_no;

  assign cond      = (alg == ALG_MULT) ? (mult_q >= maj_thr) : sum_hit_q;
  assign fire_self = enable && cond && (hold_cnt == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hold_cnt    <= '0;
      ext_pend    <= 1'b0;
      ext_pend_ts <= '0;
      evt_no      <= '0;
      trig_valid  <= 1'b0;
      trig        <= '0;
      n_self      <= '0;
      n_ext       <= '0;
      ext_lost    <= '0;
    end else begin
      trig_valid <= 1'b0;
      if (fire_self)
        hold_cnt <= holdoff;
      else if (hold_cnt != '0)
        hold_cnt <= hold_cnt - 16'd1;

      if (fire_self) begin
        trig_valid <= 1'b1;
        trig       <= '{evt: evt_no, src: SRC_SELF, ts: ts_q};
        evt_no     <= evt_no + EVT_W'(1);
        n_self     <= n_self + 32'd1;
        if (ext_valid) begin
          if (ext_pend)
            ext_lost <= ext_lost + 32'd1;
          else begin
            ext_pend    <= 1'b1;
            ext_pend_ts <= ext_ts;
          end
        end
      end else if (ext_pend) begin
        trig_valid  <= 1'b1;
        trig        <= '{evt: evt_no, src: SRC_EXT, ts: ext_pend_ts};
        evt_no      <= evt_no + EVT_W'(1);
        n_ext       <= n_ext + 32'd1;
        ext_pend    <= ext_valid;
        ext_pend_ts <= ext_ts;
      end else if (ext_valid) begin
        trig_valid <= 1'b1;
        trig       <= '{evt: evt_no, src: SRC_EXT, ts: ext_ts};
        evt_no     <= evt_no + EVT_W'(1);
        n_ext      <= n_ext + 32'd1;
      end
    end
  end

endmodule
