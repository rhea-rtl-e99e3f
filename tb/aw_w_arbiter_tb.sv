// aw_w_arbiter_tb: four sources each issue evictions (AW only) and write-backs (AW then 16 W
// beats, stalled at random), while the FIFOs randomly report full. Every W beat carries its
// source, line number and beat index. Checks: at most one AW accepted per cycle and only
// from a valid source; the pushed AW equals the accepted one; the W FIFO receives exactly
// the beats of the write-backs in AW order, never interleaved; no AW is accepted while a
// write-back's beats are still being moved.
// The round-robin AW+W arbiter is the paper's; burst locking, which this test checks, is
// this design's own choice.
module aw_w_arbiter_tb;
  import rhea_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] aw_valid, aw_ready, w_valid, w_ready;
  aw_chan_t     aw [N];
  data_chan_t   w [N];
  logic         aw_fifo_full, aw_push, w_fifo_full, w_push;
  logic [1:0]   aw_push_src;
  aw_chan_t     aw_push_data;
  data_chan_t   w_push_data;
  int unsigned  checks = 0, failures = 0, n_wb = 0, n_ev = 0;
  int unsigned  st [N], beat [N], seq [N];
  logic [N-1:0] aw_acc, w_acc;
  word_t        exp_w [$];

  aw_w_arbiter #(.N_CORES(N)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic word_t tag_word(int s, int q, int b);
    return word_t'((s << 24) | (q << 8) | b);
  endfunction

  initial begin
    aw_valid = '0; w_valid = '0; aw_fifo_full = 0; w_fifo_full = 0; aw_acc = '0; w_acc = '0;
    for (int i = 0; i < N; i++) begin st[i] = 0; beat[i] = 0; seq[i] = 0; aw[i] = '0; w[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (aw_acc[i]) begin
          aw_valid[i] = 0;
          st[i] = (aw[i].op == AW_WRITEBACK) ? 2 : 0;
          beat[i] = 0;
        end
        if (w_acc[i]) begin
          beat[i]++;
          if (beat[i] == BEATS) begin st[i] = 0; seq[i]++; end
        end
        if (st[i] == 0 && $urandom_range(3) == 0) begin
          st[i] = 1;
          aw_valid[i] = 1;
          aw[i] = '{addr: laddr_t'($urandom), op: aw_op_e'($urandom_range(1))};
        end
        w_valid[i] = (st[i] == 2) && ($urandom_range(3) != 0);
        w[i] = '{data: tag_word(i, seq[i], beat[i]), last: (beat[i] == BEATS - 1)};
      end
      aw_fifo_full = ($urandom_range(4) == 0);
      w_fifo_full  = ($urandom_range(4) == 0);
      #1;
      check($countones(aw_ready) <= 1, "one AW ready at most");
      check((aw_ready & ~aw_valid) == '0, "AW ready to idle source");
      check($countones(w_ready) <= 1, "one W ready at most");
      if (aw_push) begin
        check(aw_ready[aw_push_src] && aw_push_data == aw[aw_push_src], "pushed AW");
        check(!dut.in_w, "AW accepted during a W burst");
        if (aw_push_data.op == AW_WRITEBACK) begin
          n_wb++;
          for (int b = 0; b < BEATS; b++) exp_w.push_back(tag_word(aw_push_src, seq[aw_push_src], b));
        end else n_ev++;
      end
      if (w_push) begin
        check(exp_w.size() > 0 && w_push_data.data == exp_w[0], "W beat order");
        if (exp_w.size() > 0) void'(exp_w.pop_front());
      end
      aw_acc = aw_ready & aw_valid;
      w_acc  = w_ready & w_valid;
      @(posedge clk);
    end
    check(n_wb > 50 && n_ev > 50, "enough write-backs and evictions");
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
