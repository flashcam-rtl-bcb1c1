// ring_buffer: the dead-time free sample memory of one FADC board.
//
// Every clock cycle (one 250 MS/s sample period) the current sample of all CH
// channels is written as one memory word at the write address, which then
// advances and wraps after DEPTH words. With the default DEPTH of 8000 the
// memory always holds the last 32 us of every channel, as the camera
// specification requires. Writing never stops: readout uses a second,
// independent port, so reading events causes no dead time.
//
// The read port is addressed by age: rd_age = 0 is the word written in the
// previous cycle, rd_age = DEPTH-1 the oldest word still held (the one being
// overwritten in this cycle; the read returns its old contents). rd_data is
// registered: it shows the word one cycle after rd_en and holds it until the
// next rd_en. The length and rate follow the specification; the one-word-per-
// time-slice organisation and the age addressing are this design's own.
module ring_buffer
  import flashcam_pkg::*;
#(
  parameter int CH    = CH_PER_BOARD,
  parameter int SW    = SAMPLE_W,
  parameter int DEPTH = RING_DEPTH,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [CH-1:0][SW-1:0] wr_samples,
  input  logic                  rd_en,
  input  logic [AW-1:0]         rd_age,
  output logic [CH-1:0][SW-1:0] rd_data
);

  logic [CH*SW-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_addr;
  logic [AW-1:0]    rd_addr;

  // rd_addr = (wr_addr - 1 - rd_age) mod DEPTH
  always_comb begin
    logic [AW:0] back;
    back = {1'b0, rd_age} + (AW+1)'(1);
    if (back > {1'b0, wr_addr})
      rd_addr = AW'({1'b0, wr_addr} + (AW+1)'(DEPTH) - back);
    else
      rd_addr = AW'({1'b0, wr_addr} - back);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)
      wr_addr <= '0;
    else if (wr_addr == AW'(DEPTH - 1))
      wr_addr <= '0;
    else
      wr_addr <= wr_addr + AW'(1);
  end

  always_ff @(posedge clk) begin
    mem[wr_addr] <= wr_samples;
    if (rd_en)
      rd_data <= mem[rd_addr];
  end

  // A read must stay inside the buffer.
  a_age_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> 32'(rd_age) < DEPTH);

endmodule
