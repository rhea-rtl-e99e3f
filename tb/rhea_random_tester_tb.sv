// rhea_random_tester_tb: end-to-end random coherence test of the whole memory subsystem at its
// default size (16 cores, 8 kB 4-way L1 caches), in the style of gem5's Ruby random tester.
//
// A pool of checks is spread over lines that fall into two cache sets, so that lines are
// shared, migrate between caches and are evicted. Each check owns one 32-bit word and goes
// through five actions, one at a time and each issued from a randomly chosen core: four
// single-byte stores of consecutive values to its four bytes, then a load of the word that
// must return exactly those four values. Cores work on different checks concurrently, so
// the bytes of one check, and the words of one line, are written by different caches.
// Every core keeps at most one request outstanding (cpu_req held until cpu_ack).
// The test also counts how often each protocol mechanism happened and fails if one never
// did: load/store hits, misses, S->M upgrades, dirty write-backs, clean evictions, snoops
// with and without data, line-lock waits between the two interconnect FSMs.
// The paper validates its RTL with a port of gem5's Ruby random tester; this is an
// independent test in that style, whose sizes and action mix are this design's own.
module rhea_random_tester_tb;
  import rhea_pkg::*;

  localparam int unsigned N          = 16;
  localparam int unsigned NUM_LINES  = 24;
  localparam int unsigned NUM_CHECKS = 48;
  localparam int unsigned ACTIONS    = 6000;
  localparam int unsigned WATCHDOG   = 2000000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]      cpu_req, cpu_we, cpu_ack, cpu_busy;
  logic [ADDR_W-1:0] cpu_addr  [N];
  word_t             cpu_wdata [N];
  logic [STRB_W-1:0] cpu_be    [N];
  word_t             cpu_rdata [N];
  int unsigned        mem_nr = 0, mem_nw = 0;

  rhea_mem_subsys dut (
    .clk, .rst_n, .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_be, .cpu_ack, .cpu_rdata,
    .cpu_busy
  );

  // word traffic seen at the main memory
  always @(posedge clk) if (rst_n && dut.mem_valid && dut.mem_ready) begin
    if (dut.mem_we) mem_nw++;
    else            mem_nr++;
  end

  int unsigned checks = 0, failures = 0;

  // ------------------------------------------------------------------ the checks
  logic [ADDR_W-1:0] chk_addr  [NUM_CHECKS];
  logic [7:0]        chk_val   [NUM_CHECKS];
  int unsigned       chk_phase [NUM_CHECKS];   // 0..3 store byte, 4 load
  logic              chk_busy  [NUM_CHECKS];
  int unsigned       core_chk  [N];
  int unsigned       issued = 0, completed = 0, reads_checked = 0;

  function automatic logic [ADDR_W-1:0] check_address(int unsigned c);
    int unsigned line, set, tag, word;
    line = c % NUM_LINES;
    word = (c / NUM_LINES) * 5 % BEATS;       // checks of one line use different words
    set  = 3 + 8 * (line % 2);                // two sets: 3 and 11
    tag  = 1 + line / 2;
    return ADDR_W'((tag * 32 + set) * LINE_BYTES + word * 4);
  endfunction

  // ------------------------------------------------------------------ mechanism counters
  logic [N-1:0] ev_lhit, ev_shit, ev_miss, ev_upg, ev_evict;
  for (genvar g = 0; g < N; g++) begin : g_ev
    assign ev_lhit[g]  = dut.g_core[g].u_l1_ctrl.cpu_load_hit;
    assign ev_shit[g]  = dut.g_core[g].u_l1_ctrl.cpu_store_hit;
    assign ev_miss[g]  = dut.g_core[g].u_l1_ctrl.cpu_miss;
    assign ev_upg[g]   = dut.g_core[g].u_l1_ctrl.cpu_miss && dut.g_core[g].u_l1_ctrl.hit;
    assign ev_evict[g] = dut.bus_req[g].aw_valid && dut.bus_rsp[g].aw_ready
                         && dut.bus_req[g].aw.op == AW_EVICT;
  end
  int unsigned n_lhit = 0, n_shit = 0, n_miss = 0, n_upg = 0, n_evict = 0, n_lock = 0;
  int unsigned n_inval = 0;
  always @(posedge clk) if (rst_n) begin
    n_lhit  <= n_lhit  + $countones(ev_lhit);
    n_shit  <= n_shit  + $countones(ev_shit);
    n_miss  <= n_miss  + $countones(ev_miss);
    n_upg   <= n_upg   + $countones(ev_upg);
    n_evict <= n_evict + $countones(ev_evict);
    if ((dut.u_ic.u_ar_fsm.state == 0 && !dut.u_ic.u_ar_fsm.ar_empty
         && dut.u_ic.u_ar_fsm.dir_gnt && dut.u_ic.u_ar_fsm.conflict) ||
        (dut.u_ic.u_aw_w_fsm.state == 0 && !dut.u_ic.u_aw_w_fsm.aw_empty
         && dut.u_ic.u_aw_w_fsm.dir_gnt && dut.u_ic.u_aw_w_fsm.conflict))
      n_lock <= n_lock + 1;
    if (dut.u_ic.u_ar_fsm.ac_valid != '0 && dut.u_ic.u_ar_fsm.ac.snoop == SNP_MAKE_INVALID
        && (dut.u_ic.u_ar_fsm.ac_valid & dut.u_ic.u_ar_fsm.ac_ready) != '0)
      n_inval <= n_inval + 1;
  end

  task automatic expect_seen(string what, int unsigned n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism never exercised: %s", what);
    end else $display("  %-28s %0d", what, n);
  endtask

  // ------------------------------------------------------------------ core drivers
  initial begin
    for (int c = 0; c < NUM_CHECKS; c++) begin
      chk_addr[c]  = check_address(c);
      chk_val[c]   = 8'($urandom);
      chk_phase[c] = 0;
      chk_busy[c]  = 1'b0;
    end
    cpu_req = '0;
    cpu_we  = '0;
    for (int i = 0; i < N; i++) begin
      cpu_addr[i] = '0; cpu_wdata[i] = '0; cpu_be[i] = '0; core_chk[i] = 0;
    end
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    while (completed < ACTIONS) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (cpu_req[i] && cpu_ack[i]) begin
          int unsigned c;
          c = core_chk[i];
          cpu_req[i] = 1'b0;
          completed++;
          if (chk_phase[c] == 4) begin
            word_t exp;
            exp = {chk_val[c] + 8'd3, chk_val[c] + 8'd2, chk_val[c] + 8'd1, chk_val[c]};
            checks++;
            reads_checked++;
            if (cpu_rdata[i] !== exp) begin
              failures++;
              if (failures < 10)
                $display("FAIL: core %0d check %0d addr %h read %h expected %h",
                         i, c, chk_addr[c], cpu_rdata[i], exp);
            end
            chk_val[c]   = chk_val[c] + 8'd4 + 8'($urandom_range(7));
            chk_phase[c] = 0;
          end else begin
            chk_phase[c]++;
          end
          chk_busy[c] = 1'b0;
        end else if (!cpu_req[i] && !cpu_busy[i] && issued < ACTIONS && $urandom_range(3) != 0) begin
          int unsigned c;
          c = $urandom_range(NUM_CHECKS - 1);
          if (!chk_busy[c]) begin
            chk_busy[c] = 1'b1;
            core_chk[i] = c;
            issued++;
            cpu_req[i]  = 1'b1;
            cpu_addr[i] = chk_addr[c];
            if (chk_phase[c] < 4) begin
              cpu_we[i]    = 1'b1;
              cpu_be[i]    = STRB_W'(1) << chk_phase[c];
              cpu_wdata[i] = {4{chk_val[c] + 8'(chk_phase[c])}};
            end else begin
              cpu_we[i]    = 1'b0;
              cpu_be[i]    = '0;
              cpu_wdata[i] = '0;
            end
          end
        end
      end
    end
    $display("random tester: %0d actions, %0d loads checked, %0d memory reads, %0d memory writes",
             completed, reads_checked, mem_nr, mem_nw);
    expect_seen("load hits", n_lhit);
    expect_seen("store hits", n_shit);
    expect_seen("misses", n_miss);
    expect_seen("S->M upgrades", n_upg);
    expect_seen("dirty write-backs", dut.u_ic.u_aw_w_fsm.n_writebacks);
    expect_seen("clean evictions", n_evict);
    expect_seen("snoops answered", dut.u_ic.u_ar_fsm.n_snoops);
    expect_seen("snoops with dirty data", dut.u_ic.u_ar_fsm.n_data_fwd);
    expect_seen("invalidation snoops", n_inval);
    expect_seen("memory line reads", dut.u_ic.u_ar_fsm.n_mem_reads);
    expect_seen("line-lock waits", n_lock);
    $display("  %-28s %0d", "stale write-backs dropped", dut.u_ic.u_aw_w_fsm.n_stale);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired after %0d actions", completed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
