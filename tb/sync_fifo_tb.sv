// sync_fifo_tb: random push/pop traffic against a queue reference model. Checks the head word
// at every pop, the empty/full flags and the occupancy count. Pushes are issued only when the FIFO is not
// full (a push on a full FIFO is a protocol error caught by the module's assertion).
// One FIFO per channel is the paper's; first-word fall-through behaviour is this design's own.
module sync_fifo_tb;
  localparam int unsigned W = 8, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, empty, full;
  logic [W-1:0] wdata, rdata;
  logic [$clog2(D+1)-1:0] count;
  int unsigned checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    push = 0; pop = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == D), "full flag");
      check(count == model.size(), "count");
      if (model.size() > 0) check(rdata == model[0], "head word");
      push  = $urandom_range(1) && !full;
      pop   = $urandom_range(1);
      wdata = W'($urandom);
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model update on the same edge as the DUT
  always @(posedge clk) if (rst_n) begin
    logic [W-1:0] d;
    bit p, q;
    d = wdata; p = push && model.size() < D; q = pop && model.size() > 0;
    if (q) void'(model.pop_front());
    if (p) model.push_back(d);
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
