// cr_cd_arbiter_tb: four snooped caches each answer with a CR alone or with a CR announcing
// data followed by 16 CD beats (stalled at random), while the FIFOs randomly report full.
// Every CD beat carries its source, line number and beat index. Checks: at most one CR
// accepted per cycle and only from a valid source; the pushed CR equals the accepted one;
// the CD FIFO receives exactly the lines announced, in CR order, never interleaved; no CR is
// accepted while a CD line is still being moved.
// The round-robin CR+CD arbiter is the paper's; burst locking, which this test checks, is
// this design's own choice.
module cr_cd_arbiter_tb;
  import rhea_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] cr_valid, cr_ready, cd_valid, cd_ready;
  cr_chan_t     cr [N];
  data_chan_t   cd [N];
  logic         cr_fifo_full, cr_push, cd_fifo_full, cd_push;
  logic [1:0]   cr_push_src;
  cr_chan_t     cr_push_data;
  data_chan_t   cd_push_data;
  int unsigned  checks = 0, failures = 0, n_wb = 0, n_ev = 0;
  int unsigned  st [N], beat [N], seq [N];
  logic [N-1:0] cr_acc, cd_acc;
  word_t        exp_cd [$];

  cr_cd_arbiter #(.N_CORES(N)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic word_t tag_word(int s, int q, int b);
    return word_t'((s << 24) | (q << 8) | b);
  endfunction

  initial begin
    cr_valid = '0; cd_valid = '0; cr_fifo_full = 0; cd_fifo_full = 0; cr_acc = '0; cd_acc = '0;
    for (int i = 0; i < N; i++) begin st[i] = 0; beat[i] = 0; seq[i] = 0; cr[i] = '0; cd[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (cr_acc[i]) begin
          cr_valid[i] = 0;
          st[i] = cr[i].data_transfer ? 2 : 0;
          beat[i] = 0;
        end
        if (cd_acc[i]) begin
          beat[i]++;
          if (beat[i] == BEATS) begin st[i] = 0; seq[i]++; end
        end
        if (st[i] == 0 && $urandom_range(3) == 0) begin
          st[i] = 1;
          cr_valid[i] = 1;
          cr[i] = '{data_transfer: 1'($urandom_range(1)), was_present: 1'b1};
        end
        cd_valid[i] = (st[i] == 2) && ($urandom_range(3) != 0);
        cd[i] = '{data: tag_word(i, seq[i], beat[i]), last: (beat[i] == BEATS - 1)};
      end
      cr_fifo_full = ($urandom_range(4) == 0);
      cd_fifo_full  = ($urandom_range(4) == 0);
      #1;
      check($countones(cr_ready) <= 1, "one CR ready at most");
      check((cr_ready & ~cr_valid) == '0, "CR ready to idle source");
      check($countones(cd_ready) <= 1, "one CD ready at most");
      if (cr_push) begin
        check(cr_ready[cr_push_src] && cr_push_data == cr[cr_push_src], "pushed CR");
        check(!dut.in_cd, "CR accepted during a CD burst");
        if (cr_push_data.data_transfer) begin
          n_wb++;
          for (int b = 0; b < BEATS; b++) exp_cd.push_back(tag_word(cr_push_src, seq[cr_push_src], b));
        end else n_ev++;
      end
      if (cd_push) begin
        check(exp_cd.size() > 0 && cd_push_data.data == exp_cd[0], "CD beat order");
        if (exp_cd.size() > 0) void'(exp_cd.pop_front());
      end
      cr_acc = cr_ready & cr_valid;
      cd_acc  = cd_ready & cd_valid;
      @(posedge clk);
    end
    check(n_wb > 50 && n_ev > 50, "enough answers with and without data");
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
