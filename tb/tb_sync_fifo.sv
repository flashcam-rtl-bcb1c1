// tb_sync_fifo: self-checking test of sync_fifo against a queue model.
// Random pushes and pops, with phases that fill it completely and drain it,
// check dout, full, empty and count every cycle, and that pushes into a full
// queue are ignored.
module tb_sync_fifo;
  localparam int W = 20, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  logic [W-1:0] din = '0, dout;
  logic full, empty;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #2 clk = ~clk;

  task automatic check();
    checks++;
    if (count != $bits(count)'(model.size()) || empty != (model.size() == 0) ||
        full != (model.size() == DEPTH) || (model.size() > 0 && dout !== model[0])) begin
      failures++;
      if (failures < 5) $display("FAIL size=%0d count=%0d full=%b empty=%b", model.size(), count, full, empty);
    end
  endtask

  initial begin
    int pp, qp;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      // phases: mostly push, mostly pop, random
      case ((i / 200) % 3)
        0: begin pp = 80; qp = 20; end
        1: begin pp = 20; qp = 80; end
        default: begin pp = 50; qp = 50; end
      endcase
      push = ($urandom % 100) < pp;
      pop  = ($urandom % 100) < qp;
      din  = W'($urandom);
      check();
      @(posedge clk);
      begin
        automatic int n0 = model.size();
        if (pop && n0 > 0) void'(model.pop_front());
        if (push && n0 < DEPTH) model.push_back(din);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
