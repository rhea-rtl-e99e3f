// ar_arbiter_tb: four sources raise read requests at random times and hold them until
// accepted, while the AR FIFO randomly reports full. Checks every cycle: at most one ready,
// only to a valid source; a push exactly when some source is valid and the FIFO has room;
// the pushed source index and request match the accepted source; round-robin fairness: a
// waiting source is served before any other source is served twice (at most N-1 other
// grants while it waits).
// The round-robin policy checked here is the paper's; the fairness bound and traffic pattern
// are this testbench's own.
module ar_arbiter_tb;
  import rhea_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] ar_valid, ar_ready;
  ar_chan_t     ar [N];
  logic         fifo_full, push;
  logic [1:0]   push_src;
  ar_chan_t     push_ar;
  logic [N-1:0] acc;
  int unsigned  checks = 0, failures = 0, waited [N], pushes = 0;

  ar_arbiter #(.N_CORES(N)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    ar_valid = '0; fifo_full = 0; acc = '0;
    for (int i = 0; i < N; i++) begin ar[i] = '0; waited[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      ar_valid = ar_valid & ~acc;
      fifo_full = ($urandom_range(3) == 0);
      for (int i = 0; i < N; i++)
        if (!ar_valid[i] && $urandom_range(2) != 0) begin
          ar_valid[i] = 1;
          ar[i] = '{addr: laddr_t'($urandom), op: ar_op_e'($urandom_range(1))};
          waited[i] = 0;
        end
      #1;
      check($countones(ar_ready) <= 1, "more than one ready");
      check((ar_ready & ~ar_valid) == '0, "ready to an idle source");
      check(push == (ar_valid != '0 && !fifo_full), "push condition");
      if (push) begin
        pushes++;
        check(ar_ready[push_src], "pushed source is the accepted one");
        check(push_ar == ar[push_src], "pushed request");
        for (int i = 0; i < N; i++)
          if (ar_valid[i] && i != int'(push_src)) begin
            waited[i]++;
            check(waited[i] < N, "round-robin fairness");
          end
      end
      acc = ar_ready;
      @(posedge clk);
    end
    check(pushes > 1000, "enough traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
