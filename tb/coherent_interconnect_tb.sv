// coherent_interconnect_tb: the interconnect with four bus-level cache models and the main
// memory model. Each cache model keeps its own MSI state and data per line, issues read-clean,
// read-unique, write-back and evict requests on command, and answers every snoop from its
// state (CR, then CD data when it holds the line in M, then M->S or ->I).
// A directed sequence walks one line through every directory transition: read-unique from
// memory, read-clean with the dirty owner snooped (data forwarded and written to memory),
// read-unique invalidating two sharers, an S->M upgrade, a write-back, a memory read, a clean
// eviction, a write-back made stale by a read-unique that took the line first, and finally
// all four caches reading different lines at once, a write-back racing a read-clean of the
// same line, and a read-unique that must still find the reader as a sharer.
// Checks: every R line equals the last value written to that line; the snoops each cache
// receives and their kinds; memory contents after forwarded read-cleans and write-backs; the
// interconnect's event counters (snoop answers, forwarded lines, memory reads, write-backs,
// stale write-backs).
// The interconnect's block structure is the paper's; the protocol details checked here
// (snoop choice, write-through on read-clean, stale write-backs) are this design's own.
module coherent_interconnect_tb;
  import rhea_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cache_req_t bus_req [N];
  cache_rsp_t bus_rsp [N];
  logic mem_valid, mem_ready, mem_we, mem_rvalid;
  logic [WORD_AW-1:0] mem_addr;
  word_t mem_wdata, mem_rdata;
  logic [31:0] n_writebacks, n_stale_writebacks, n_snoops, n_data_fwd, n_mem_reads;
  int unsigned mm_reads, mm_writes;

  coherent_interconnect #(.N_CORES(N)) dut (.*);
  main_memory_model #(.LATENCY(3), .READY_PCT(75)) u_mem (
    .clk, .rst_n, .mem_valid, .mem_ready, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid,
    .mem_rdata, .n_reads(mm_reads), .n_writes(mm_writes));

  int unsigned checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic line_t pat(int v);
    line_t l;
    for (int b = 0; b < BEATS; b++) l[b*DATA_W +: DATA_W] = {8'hA5, 8'(v), 16'(b * 7 + v)};
    return l;
  endfunction

  // ---------------- cache models ----------------
  typedef enum int {OP_NONE, OP_RC, OP_RU, OP_WB, OP_EV} op_e;
  msi_e  c_state [N][laddr_t];
  line_t c_data  [N][laddr_t];
  line_t golden  [laddr_t];
  op_e    op      [N];
  laddr_t op_addr [N];
  int     op_ph   [N];
  int     op_beat [N];
  line_t  op_line [N];
  // snoop side
  int     sn_ph   [N];
  int     sn_beat [N];
  laddr_t sn_addr [N];
  line_t  sn_line [N];
  int     n_ac    [N];
  snp_e   last_kind [N];
  logic [N-1:0] hs_aw, hs_w, hs_ar, hs_b, hs_r, hs_ac, hs_cr, hs_cd;
  ac_chan_t s_ac [N];
  data_chan_t s_r [N];

  always @(posedge clk) for (int i = 0; i < N; i++) begin
    hs_aw[i] <= bus_req[i].aw_valid && bus_rsp[i].aw_ready;
    hs_w[i]  <= bus_req[i].w_valid  && bus_rsp[i].w_ready;
    hs_ar[i] <= bus_req[i].ar_valid && bus_rsp[i].ar_ready;
    hs_b[i]  <= bus_req[i].b_ready  && bus_rsp[i].b_valid;
    hs_r[i]  <= bus_req[i].r_ready  && bus_rsp[i].r_valid;
    hs_ac[i] <= bus_req[i].ac_ready && bus_rsp[i].ac_valid;
    hs_cr[i] <= bus_req[i].cr_valid && bus_rsp[i].cr_ready;
    hs_cd[i] <= bus_req[i].cd_valid && bus_rsp[i].cd_ready;
    s_ac[i]  <= bus_rsp[i].ac;
    s_r[i]   <= bus_rsp[i].r;
  end

  function automatic msi_e st(int i, laddr_t a);
    return c_state[i].exists(a) ? c_state[i][a] : ST_I;
  endfunction

  always @(negedge clk) if (rst_n) for (int i = 0; i < N; i++) begin
    // ---- request side ----
    case (op[i])
      OP_RC, OP_RU: begin
        if (op_ph[i] == 0 && hs_ar[i]) begin op_ph[i] = 1; op_beat[i] = 0; end
        if (op_ph[i] == 1 && hs_r[i]) begin
          op_line[i][op_beat[i]*DATA_W +: DATA_W] = s_r[i].data;
          check(s_r[i].last == (op_beat[i] == BEATS - 1), "R last flag");
          op_beat[i]++;
          if (op_beat[i] == BEATS) begin
            check(op_line[i] == golden[op_addr[i]], $sformatf("cache %0d reads the latest value", i));
            if (op[i] == OP_RC) begin
              c_state[i][op_addr[i]] = ST_S; c_data[i][op_addr[i]] = op_line[i];
            end else begin      // the store that caused the read-unique
              c_state[i][op_addr[i]] = ST_M;
              c_data[i][op_addr[i]]  = op_line[i] ^ pat(i + 1);
              golden[op_addr[i]]     = c_data[i][op_addr[i]];
            end
            op[i] = OP_NONE;
          end
        end
        bus_req[i].ar_valid = (op[i] != OP_NONE) && op_ph[i] == 0;
        bus_req[i].ar = '{addr: op_addr[i], op: (op[i] == OP_RU) ? AR_READ_UNIQUE : AR_READ_CLEAN};
        bus_req[i].r_ready = (op[i] != OP_NONE) && op_ph[i] == 1 && $urandom_range(3) != 0;
      end
      OP_WB, OP_EV: begin
        if (op_ph[i] == 0 && hs_aw[i]) begin
          op_ph[i] = (op[i] == OP_WB) ? 1 : 2; op_beat[i] = 0;
        end else if (op_ph[i] == 1 && hs_w[i]) begin
          op_beat[i]++;
          if (op_beat[i] == BEATS) op_ph[i] = 2;
        end else if (op_ph[i] == 2 && hs_b[i]) begin
          c_state[i].delete(op_addr[i]);
          op[i] = OP_NONE;
        end
        bus_req[i].aw_valid = (op[i] != OP_NONE) && op_ph[i] == 0;
        bus_req[i].aw = '{addr: op_addr[i], op: (op[i] == OP_WB) ? AW_WRITEBACK : AW_EVICT};
        bus_req[i].w_valid = (op[i] != OP_NONE) && op_ph[i] == 1;
        bus_req[i].w = '{data: op_line[i][(op_beat[i] % BEATS)*DATA_W +: DATA_W],
                         last: (op_beat[i] == BEATS - 1)};
        bus_req[i].b_ready = (op[i] != OP_NONE) && op_ph[i] == 2 && $urandom_range(1) != 0;
      end
      default: begin
        bus_req[i].ar_valid = 0; bus_req[i].aw_valid = 0; bus_req[i].w_valid = 0;
        bus_req[i].r_ready = 0; bus_req[i].b_ready = 0;
      end
    endcase
    if (op[i] == OP_NONE) begin
      bus_req[i].ar_valid = 0; bus_req[i].aw_valid = 0; bus_req[i].w_valid = 0;
      bus_req[i].r_ready = 0; bus_req[i].b_ready = 0;
    end
    // ---- snoop side: 0 idle, 1 CR, 2 CD beats ----
    if (sn_ph[i] == 0 && hs_ac[i]) begin
      msi_e s;
      n_ac[i]++; last_kind[i] = s_ac[i].snoop;
      sn_addr[i] = s_ac[i].addr;
      s = st(i, sn_addr[i]);
      sn_line[i] = c_data[i].exists(sn_addr[i]) ? c_data[i][sn_addr[i]] : '0;
      bus_req[i].cr = '{data_transfer: (s == ST_M), was_present: (s != ST_I)};
      if (s != ST_I)
        c_state[i][sn_addr[i]] = (s_ac[i].snoop == SNP_READ_SHARED) ? ST_S : ST_I;
      sn_ph[i] = 1; sn_beat[i] = 0;
    end else if (sn_ph[i] == 1 && hs_cr[i]) begin
      sn_ph[i] = bus_req[i].cr.data_transfer ? 2 : 0;
    end else if (sn_ph[i] == 2 && hs_cd[i]) begin
      sn_beat[i]++;
      if (sn_beat[i] == BEATS) sn_ph[i] = 0;
    end
    bus_req[i].ac_ready = sn_ph[i] == 0 && $urandom_range(2) != 0;
    bus_req[i].cr_valid = sn_ph[i] == 1;
    bus_req[i].cd_valid = sn_ph[i] == 2;
    bus_req[i].cd = '{data: sn_line[i][(sn_beat[i] % BEATS)*DATA_W +: DATA_W],
                      last: (sn_beat[i] == BEATS - 1)};
  end

  task automatic start(int i, op_e o, laddr_t a);
    @(negedge clk); #1;
    op_addr[i] = a; op_ph[i] = 0; op_beat[i] = 0;
    if (o == OP_WB) op_line[i] = c_data[i][a];
    op[i] = o;
  endtask
  task automatic finish(int i);
    int t = 0;
    while (op[i] != OP_NONE && t < 5000) begin @(negedge clk); t++; end
    check(op[i] == OP_NONE, $sformatf("cache %0d request completes", i));
    while (sn_ph[0] != 0 || sn_ph[1] != 0 || sn_ph[2] != 0 || sn_ph[3] != 0) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask
  task automatic run(int i, op_e o, laddr_t a);
    start(i, o, a);
    finish(i);
  endtask

  function automatic bit mem_holds(laddr_t a, line_t l);
    for (int b = 0; b < BEATS; b++) begin
      logic [WORD_AW-1:0] w = {a, BEAT_W'(b)};
      if (!u_mem.store.exists(w) || u_mem.store[w] != l[b*DATA_W +: DATA_W]) return 0;
    end
    return 1;
  endfunction
  task automatic preload(laddr_t a, line_t l);
    for (int b = 0; b < BEATS; b++) u_mem.store[{a, BEAT_W'(b)}] = l[b*DATA_W +: DATA_W];
    golden[a] = l;
  endtask

  function automatic bit ac_counts(int c0, int c1, int c2, int c3);
    return n_ac[0] == c0 && n_ac[1] == c1 && n_ac[2] == c2 && n_ac[3] == c3;
  endfunction

  localparam laddr_t A = 24'h000123, B = 24'h000456;
  initial begin
    for (int i = 0; i < N; i++) begin
      bus_req[i] = '0; op[i] = OP_NONE; op_ph[i] = 0; op_beat[i] = 0; op_addr[i] = '0;
      op_line[i] = '0; sn_ph[i] = 0; sn_beat[i] = 0; sn_addr[i] = '0; sn_line[i] = '0;
      n_ac[i] = 0; last_kind[i] = SNP_READ_SHARED;
      s_ac[i] = '0; s_r[i] = '0;
    end
    {hs_aw, hs_w, hs_ar, hs_b, hs_r, hs_ac, hs_cr, hs_cd} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    preload(A, pat(100));
    preload(B, pat(200));
    for (int k = 0; k < 4; k++) preload(laddr_t'(24'h1000 + k * 32), pat(50 + k));

    // 1. read-unique of an uncached line: no snoop, memory read
    run(0, OP_RU, A);
    check(ac_counts(0, 0, 0, 0) && n_mem_reads == 1 && n_snoops == 0, "1: RU from memory");
    // 2. read-clean with c0 owning it: READ_SHARED to c0, data forwarded and written back
    run(1, OP_RC, A);
    check(ac_counts(1, 0, 0, 0) && last_kind[0] == SNP_READ_SHARED, "2: owner snooped READ_SHARED");
    check(n_data_fwd == 1 && n_mem_reads == 1 && mem_holds(A, golden[A]), "2: forwarded and written to memory");
    check(st(0, A) == ST_S && st(1, A) == ST_S, "2: both sharers");
    // 3. read-unique by c2: MAKE_INVALID to c0 and c1, data from memory
    run(2, OP_RU, A);
    check(ac_counts(2, 1, 0, 0) && last_kind[0] == SNP_MAKE_INVALID && last_kind[1] == SNP_MAKE_INVALID,
          "3: both sharers invalidated");
    check(n_mem_reads == 2 && st(0, A) == ST_I && st(1, A) == ST_I, "3: RU served from memory");
    // 4. read-clean by c3: c2 downgraded
    run(3, OP_RC, A);
    check(ac_counts(2, 1, 1, 0) && last_kind[2] == SNP_READ_SHARED && st(2, A) == ST_S, "4: c2 M->S");
    // 5. upgrade by c3 (S->M): only c2 invalidated
    run(3, OP_RU, A);
    check(ac_counts(2, 1, 2, 0) && last_kind[2] == SNP_MAKE_INVALID && st(2, A) == ST_I, "5: upgrade invalidates c2 only");
    // 6. write-back by c3
    run(3, OP_WB, A);
    check(n_writebacks == 1 && mem_holds(A, golden[A]), "6: write-back reaches memory");
    // 7. read-clean by c0 from memory, then a clean eviction
    run(0, OP_RC, A);
    check(ac_counts(2, 1, 2, 0) && n_mem_reads == 4, "7: memory read, no snoop");
    run(0, OP_EV, A);
    run(1, OP_RC, A);
    check(ac_counts(2, 1, 2, 0), "8: after the eviction nobody is snooped");
    // 9. stale write-back: c3 read-unique takes B from c2 before c2's write-back is served
    run(2, OP_RU, B);
    begin
      int n_before;
      n_before = n_ac[2];
      start(3, OP_RU, B);
      while (n_ac[2] == n_before) @(negedge clk);
      start(2, OP_WB, B);
      finish(3);
      finish(2);
    end
    check(last_kind[2] == SNP_READ_UNIQUE && n_stale_writebacks == 1 && n_writebacks == 1,
          "9: write-back dropped as stale");
    check(st(3, B) == ST_M, "9: c3 owns B");
    // 10. all four caches read different lines at once
    for (int i = 0; i < N; i++) start(i, OP_RC, laddr_t'(24'h1000 + i * 32));
    for (int i = 0; i < N; i++) finish(i);
    // 11. and a dirty line written back while another cache reads it
    start(3, OP_WB, B);
    start(0, OP_RC, B);
    finish(3);
    finish(0);
    check(mem_holds(B, golden[B]), "11: memory holds B");
    check(st(0, B) == ST_S && st(3, B) == ST_I, "11: c0 shares B, c3 dropped it");
    // 12. read-unique of B by c1: the directory still lists c0 as a sharer
    begin
      int n0, n3;
      n0 = n_ac[0];
      n3 = n_ac[3];
      run(1, OP_RU, B);
      check(n_ac[0] == n0 + 1 && last_kind[0] == SNP_MAKE_INVALID && st(0, B) == ST_I,
            "12: sharer c0 invalidated");
      check(n_ac[3] == n3, "12: c3, which wrote B back, is no longer listed");
    end
    check(n_snoops == n_ac[0] + n_ac[1] + n_ac[2] + n_ac[3], "every snoop answered once");
    $display("snoops=%0d forwarded=%0d mem_reads=%0d writebacks=%0d stale=%0d",
             n_snoops, n_data_fwd, n_mem_reads, n_writebacks, n_stale_writebacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
