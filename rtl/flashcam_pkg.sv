// flashcam_pkg: constants and types shared by the FlashCam camera readout logic.
//
// The readout digitises every pixel continuously with a 12-bit converter at
// 250 MS/s and keeps the last 32 us of samples (8000 samples) in a ring buffer
// on each FADC board; these three numbers follow the camera's published
// specification. Everything in this design runs in one 250 MHz clock domain,
// so one clock cycle is one sample period (4 ns) and the camera-wide sample
// counter (ts_t) is the time stamp of every sample, trigger and event record.
// The widths of time stamps, event numbers and sums, the channel count of a
// board, and the trigger message layout are this design's own choices.
package flashcam_pkg;

  localparam int SAMPLE_W         = 12;    // FADC resolution, bits
  localparam int SAMPLE_RATE_MSPS = 250;   // FADC sampling rate
  localparam int RING_US          = 32;    // dead-time free ring buffer length
  localparam int RING_DEPTH       = RING_US * SAMPLE_RATE_MSPS;  // 8000 samples
  localparam int CH_PER_BOARD     = 12;    // channels read by one FADC board
  localparam int CAMERA_PIXELS    = 1764;  // pixels of an MST camera
  localparam int N_BOARDS         = CAMERA_PIXELS / CH_PER_BOARD;  // 147

  localparam int TS_W    = 48;  // sample counter: ~13 days at 250 MHz before wrap
  localparam int EVT_W   = 16;  // event number carried in each record
  localparam int SUM_W   = 16;  // saturating board sum of a trigger primitive
  localparam int NHIT_W  = 8;   // channels above threshold on one board
  localparam int MULT_W  = 12;  // channels above threshold in the camera
  localparam int WORD_W  = 16;  // width of the event record stream

  typedef logic [SAMPLE_W-1:0] sample_t;
  typedef logic [TS_W-1:0]     ts_t;

  // Where a trigger came from.
  typedef enum logic [1:0] {
    SRC_SELF = 2'd1,   // camera trigger derived from the camera's own samples
    SRC_EXT  = 2'd2    // delayed external (array) trigger
  } trig_src_e;

  // Camera trigger algorithm, chosen at run time.
  typedef enum logic {
    ALG_MULT = 1'b0,   // trigger on the number of pixels above threshold
    ALG_SUM  = 1'b1    // trigger on the summed amplitude of any one board
  } trig_alg_e;

  // What each board's trigger preprocessor sends to the camera trigger
  // every sample period.
  typedef struct packed {
    logic [NHIT_W-1:0] nhits;  // channels whose pedestal-subtracted sample exceeds the threshold
    logic [SUM_W-1:0]  sum;    // sum of the pedestal-subtracted samples, clipped at zero, saturating
    ts_t               ts;     // sample time these values belong to
  } trig_prim_t;

  // What the camera trigger broadcasts to every board.
  typedef struct packed {
    logic [EVT_W-1:0] evt;     // event number
    trig_src_e        src;
    ts_t              ts;      // sample time of the event
  } trig_msg_t;

  // First word of an event record: marker in bits 15:2, source in bits 1:0.
  localparam logic [WORD_W-1:0] HDR_MARK = 16'hFCA0;
  localparam int HDR_WORDS = 5;   // marker, event number, 3 time stamp words
  // Sample word sent for a sample that was overwritten before it was read.
  localparam logic [WORD_W-1:0] LOST_SAMPLE = 16'hFFFF;

endpackage
