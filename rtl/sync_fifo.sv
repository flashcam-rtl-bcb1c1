// sync_fifo: single-clock first-in first-out queue with show-ahead output.
//
// Used as each board's trigger queue: triggers that arrive while an earlier
// event is still being read out wait here, which is what lets the readout take
// bursts of closely spaced triggers without dead time. dout shows the oldest
// entry whenever empty is low; pop removes it. A push while full is ignored
// (the caller counts it), a pop while empty is ignored. push and pop in the
// same cycle are allowed. The depth is this design's own choice.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         full,
  output logic         empty,
  output logic [AW:0]  count
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk)
    if (do_push) mem[wp] <= din;

  assign dout  = mem[rp];
  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);

endmodule
