// l1_cache_ctrl_tb: one L1 controller with a 1 kB 2-way cache memory (8 sets), driven by a
// core model on the CPU side and by a bus agent that plays the interconnect: it answers AR
// with lines from a reference memory, takes write-backs/evictions and answers B, and injects
// snoops on AC. Directed steps cover load miss and hit, S->M upgrade, store hit, snoop
// downgrade with data, snoop invalidation with data, snoop miss, conflict eviction of dirty
// and clean victims; then a random phase mixes loads, stores and snoops on 6 lines of one set.
// Checks: load data against a byte-exact reference, request kinds on AR/AW, write-back data,
// snoop answers (data_transfer, was_present, CD data), state after a snoop (through the next
// access being a hit or a miss), and the hit latency of 2 cycles.
// The MSI states and the AXI/ACE channel split follow the paper; the transaction sequences
// the bus model expects are this design's own.
module l1_cache_ctrl_tb;
  import rhea_pkg::*;
  localparam int unsigned BYTES = 1024, WAYS = 2, SETS = BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned IDX_W = $clog2(SETS), TAG_W = LADDR_W - IDX_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cpu_req, cpu_we, cpu_ack, cpu_busy;
  logic [ADDR_W-1:0] cpu_addr;
  word_t cpu_wdata, cpu_rdata;
  logic [STRB_W-1:0] cpu_be;
  logic [IDX_W-1:0] a_set, b_set, wr_set;
  logic [TAG_W-1:0] a_tag [WAYS], b_tag [WAYS];
  msi_e a_state [WAYS], b_state [WAYS];
  line_t a_data [WAYS], b_data [WAYS];
  logic wr_en, wr_data_en;
  logic [0:0] wr_way;
  logic [TAG_W-1:0] wr_tag;
  msi_e wr_state;
  line_t wr_data;
  cache_req_t bus_req;
  cache_rsp_t bus_rsp;

  l1_cache_ctrl #(.CACHE_BYTES(BYTES), .WAYS(WAYS)) dut (.*);
  l1_cache_mem  #(.CACHE_BYTES(BYTES), .WAYS(WAYS)) u_mem (
    .clk, .rst_n, .a_set, .a_tag, .a_state, .a_data, .b_set, .b_tag, .b_state, .b_data,
    .wr_en, .wr_set, .wr_way, .wr_tag, .wr_state, .wr_data_en, .wr_data);

  int unsigned checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------------------------------------------------------- reference state
  line_t  memory [laddr_t];   // the interconnect's view (memory + lines written back)
  logic [7:0] ref_b [logic [ADDR_W-1:0]];  // the core's view, byte exact
  function automatic line_t mem_line(laddr_t a);
    line_t l;
    if (memory.exists(a)) return memory[a];
    for (int b = 0; b < BEATS; b++) l[b*DATA_W +: DATA_W] = {a[15:0], 16'(b * 257)};
    return l;
  endfunction
  function automatic word_t ref_word(logic [ADDR_W-1:0] ad);
    word_t wv;
    line_t l;
    l = mem_line(ad[ADDR_W-1:OFFSET_W]);
    wv = l[ad[OFFSET_W-1:2]*DATA_W +: DATA_W];
    for (int b = 0; b < 4; b++) begin
      logic [ADDR_W-1:0] ba;
      ba = {ad[ADDR_W-1:2], 2'(b)};
      if (ref_b.exists(ba)) wv[b*8 +: 8] = ref_b[ba];
    end
    return wv;
  endfunction
  // the value the core expects for a whole line (initial memory pattern plus its stores)
  function automatic line_t ref_line(laddr_t a);
    line_t l;
    for (int wd = 0; wd < BEATS; wd++) l[wd*DATA_W +: DATA_W] = ref_word({a, 4'(wd), 2'b00});
    return l;
  endfunction

  // ---------------------------------------------------------------- bus agent
  // Handshakes are sampled at the clock edge (nonblocking) and acted on at the next falling
  // edge, where all agent outputs change.
  int unsigned n_ar_clean = 0, n_ar_unique = 0, n_wb = 0, n_ev = 0;
  laddr_t      r_addr, w_addr;
  logic        r_busy = 0, w_busy = 0, b_pend = 0;
  int          r_beat = 0, r_delay = 0, w_beat = 0;
  line_t       w_line;
  logic        hs_ar, hs_aw, hs_r, hs_w, hs_b;
  ar_chan_t    s_ar;
  aw_chan_t    s_aw;
  data_chan_t  s_w;

  always @(posedge clk) begin
    hs_ar <= bus_req.ar_valid && bus_rsp.ar_ready;
    hs_aw <= bus_req.aw_valid && bus_rsp.aw_ready;
    hs_r  <= bus_rsp.r_valid && bus_req.r_ready;
    hs_w  <= bus_req.w_valid && bus_rsp.w_ready;
    hs_b  <= bus_rsp.b_valid && bus_req.b_ready;
    s_ar  <= bus_req.ar;
    s_aw  <= bus_req.aw;
    s_w   <= bus_req.w;
  end

  always @(negedge clk) if (rst_n) begin
    if (hs_ar) begin
      r_busy = 1; r_beat = -1; r_delay = $urandom_range(3); r_addr = s_ar.addr;
      if (s_ar.op == AR_READ_CLEAN) n_ar_clean++; else n_ar_unique++;
    end else if (r_busy && r_beat < 0) begin
      if (r_delay == 0) r_beat = 0; else r_delay--;
    end
    if (hs_r) begin
      r_beat++;
      if (r_beat == BEATS) begin r_busy = 0; r_beat = -1; end
    end
    if (hs_aw) begin
      w_addr = s_aw.addr;
      if (s_aw.op == AW_WRITEBACK) begin n_wb++; w_busy = 1; w_beat = 0; end
      else begin n_ev++; b_pend = 1; end
    end
    if (hs_w) begin
      w_line[w_beat*DATA_W +: DATA_W] = s_w.data;
      check(s_w.last == (w_beat == BEATS - 1), "W last flag");
      w_beat++;
      if (w_beat == BEATS) begin
        check(w_line == ref_line(w_addr), "write-back data");
        memory[w_addr] = w_line;
        w_busy = 0; b_pend = 1;
      end
    end
    if (hs_b) b_pend = 0;
    bus_rsp.ar_ready = !r_busy && $urandom_range(1);
    bus_rsp.aw_ready = !w_busy && !b_pend && $urandom_range(1);
    bus_rsp.r_valid  = r_busy && r_beat >= 0;
    bus_rsp.r.data   = line_word(mem_line(r_addr), BEAT_W'(r_beat < 0 ? 0 : r_beat));
    bus_rsp.r.last   = (r_beat == BEATS - 1);
    bus_rsp.w_ready  = w_busy && $urandom_range(1);
    bus_rsp.b_valid  = b_pend;
  end

  // ---------------------------------------------------------------- snoop injection
  task automatic snoop(laddr_t a, snp_e k, bit exp_present, bit exp_data);
    cr_chan_t cr;
    line_t d;
    @(negedge clk);
    bus_rsp.ac_valid = 1; bus_rsp.ac = '{addr: a, snoop: k};
    do @(posedge clk); while (!bus_req.ac_ready);
    @(negedge clk);
    bus_rsp.ac_valid = 0;
    bus_rsp.cr_ready = 1;
    do @(posedge clk); while (!bus_req.cr_valid);
    cr = bus_req.cr;
    @(negedge clk);
    bus_rsp.cr_ready = 0;
    check(cr.was_present == exp_present, "snoop was_present");
    check(cr.data_transfer == exp_data, "snoop data_transfer");
    if (cr.data_transfer) begin
      bus_rsp.cd_ready = 1;
      for (int b = 0; b < BEATS; b++) begin
        do @(posedge clk); while (!bus_req.cd_valid);
        d[b*DATA_W +: DATA_W] = bus_req.cd.data;
        check(bus_req.cd.last == (b == BEATS - 1), "CD last flag");
      end
      @(negedge clk);
      bus_rsp.cd_ready = 0;
      check(d == ref_line(a), "snoop data");
      memory[a] = d;                      // the interconnect writes it to memory
    end
  endtask

  // ---------------------------------------------------------------- core model
  task automatic access(bit we, logic [ADDR_W-1:0] ad, word_t wd, logic [3:0] be,
                        output int unsigned cycles);
    @(negedge clk);
    cpu_req = 1; cpu_we = we; cpu_addr = ad; cpu_wdata = wd; cpu_be = be;
    cycles = 0;
    do begin @(posedge clk); cycles++; #1; end while (!cpu_ack);
    if (!we) check(cpu_rdata == ref_word(ad), $sformatf("load data %h: %h vs %h", ad, cpu_rdata, ref_word(ad)));
    else for (int b = 0; b < 4; b++) if (be[b]) ref_b[{ad[ADDR_W-1:2], 2'(b)}] = wd[b*8 +: 8];
    @(negedge clk);
    cpu_req = 0;
  endtask

  function automatic logic [ADDR_W-1:0] addr_of(int tag, int set, int wd);
    return ADDR_W'(((tag * SETS + set) * LINE_BYTES) + wd * 4);
  endfunction

  int unsigned cyc, c0, u0, wb0, ev0;
  initial begin
    cpu_req = 0; cpu_we = 0; cpu_addr = '0; cpu_wdata = '0; cpu_be = '0;
    bus_rsp = '0; hs_ar = 0; hs_aw = 0; hs_r = 0; hs_w = 0; hs_b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. load miss -> read-clean
    c0 = n_ar_clean;
    access(0, addr_of(1, 2, 3), 0, 0, cyc);
    check(n_ar_clean == c0 + 1, "load miss issues read-clean");
    // 2. load hit, 2 cycles
    c0 = n_ar_clean;
    access(0, addr_of(1, 2, 5), 0, 0, cyc);
    check(n_ar_clean == c0 && cyc == 2, "load hit: no bus request, 2 cycles");
    // 3. store to S -> read-unique upgrade
    u0 = n_ar_unique;
    access(1, addr_of(1, 2, 3), 32'hdeadbeef, 4'b0110, cyc);
    check(n_ar_unique == u0 + 1, "upgrade issues read-unique");
    // 4. store hit on M
    u0 = n_ar_unique;
    access(1, addr_of(1, 2, 4), 32'h01234567, 4'b1111, cyc);
    check(n_ar_unique == u0 && cyc == 2, "store hit on M: no bus request, 2 cycles");
    access(0, addr_of(1, 2, 3), 0, 0, cyc);
    // 5. snoop read-shared on M: data, M->S (next load hits, next store upgrades)
    snoop(laddr_t'(1 * SETS + 2), SNP_READ_SHARED, 1, 1);
    c0 = n_ar_clean; u0 = n_ar_unique;
    access(0, addr_of(1, 2, 4), 0, 0, cyc);
    check(n_ar_clean == c0, "load hit after downgrade");
    access(1, addr_of(1, 2, 0), 32'h55aa55aa, 4'b1001, cyc);
    check(n_ar_unique == u0 + 1, "store after downgrade upgrades");
    // 6. snoop make-invalid on M: data, -> I (next load misses)
    snoop(laddr_t'(1 * SETS + 2), SNP_MAKE_INVALID, 1, 1);
    c0 = n_ar_clean;
    access(0, addr_of(1, 2, 0), 0, 0, cyc);
    check(n_ar_clean == c0 + 1, "load misses after invalidation");
    // 7. snoop on a line not present
    snoop(laddr_t'(7 * SETS + 2), SNP_READ_UNIQUE, 0, 0);
    // 8. snoop on an S line: no data, -> I
    snoop(laddr_t'(1 * SETS + 2), SNP_MAKE_INVALID, 1, 0);
    // 9. conflict evictions in set 5: dirty, then clean victims
    wb0 = n_wb; ev0 = n_ev;
    access(1, addr_of(2, 5, 1), 32'h11111111, 4'b1111, cyc);
    access(1, addr_of(3, 5, 1), 32'h22222222, 4'b1111, cyc);
    access(0, addr_of(4, 5, 1), 0, 0, cyc);          // evicts a dirty line
    check(n_wb == wb0 + 1, "dirty victim written back");
    access(0, addr_of(5, 5, 1), 0, 0, cyc);          // evicts the other dirty line
    access(0, addr_of(6, 5, 1), 0, 0, cyc);          // evicts a clean line
    check(n_ev >= ev0 + 1, "clean victim evicted");
    // 10. random mix on 6 lines of set 6
    for (int i = 0; i < 400; i++) begin
      int t;
      t = 1 + $urandom_range(5);
      case ($urandom_range(4))
        0, 1: access(0, addr_of(t, 6, $urandom_range(15)), 0, 0, cyc);
        2, 3: access(1, addr_of(t, 6, $urandom_range(15)), $urandom, 4'($urandom_range(1, 15)), cyc);
        default: begin
          // snoop the line; expected answer follows from the controller's own tag state
          laddr_t la;
          bit pres, dirty;
          la = laddr_t'(t * SETS + 6);
          pres = 0; dirty = 0;
          for (int w = 0; w < WAYS; w++)
            if (u_mem.states[6][w] != ST_I && u_mem.tags[6][w] == TAG_W'(t)) begin
              pres = 1; dirty = (u_mem.states[6][w] == ST_M);
            end
          snoop(la, snp_e'($urandom_range(2)), pres, dirty);
        end
      endcase
    end
    check(n_wb > wb0 + 10 && n_ev > ev0 + 5, "random phase evicts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
