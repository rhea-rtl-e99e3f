// ar_cr_cd_fsm_tb: the AR+CR+CD FSM with real AR, CR and CD FIFOs and reference models of the
// directory (random grant), memory and four caches around it. For each request the test
// sets up a directory entry and lets the snooped caches answer (with data when the entry says
// they own the line). Cases: read-clean of an uncached line, of an S line, of a line M at
// another cache; read-unique of an S line shared with others (and with the requester, an
// upgrade) and of a line M at another cache.
// Checks: the snoops go to exactly the expected caches with the expected kind; the R burst
// goes to the requester with the right line (memory or forwarded dirty data) and last flag;
// dirty data forwarded for a read-clean is written to memory, for a read-unique it is not;
// the final directory entry; waiting while the other FSM holds the line.
// That an FSM serves read-clean/read-unique with snoops is the paper's; which caches are
// snooped, with which snoop, and the memory update policy are this design's own.
module ar_cr_cd_fsm_tb;
  import rhea_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ar_in_push, cr_in_push, cd_in_push;
  logic [1:0] ar_in_src, cr_in_src, ar_src, cr_src;
  ar_chan_t ar_in, ar_head;
  cr_chan_t cr_in, cr_head;
  data_chan_t cd_in, cd_head;
  logic ar_empty, cr_empty, cd_empty, ar_pop, cr_pop, cd_pop;
  logic dir_req, dir_we, dir_gnt, dir_hit;
  laddr_t dir_addr;
  msi_e dir_wr_state, dir_rd_state;
  logic [N-1:0] dir_wr_sharers, dir_rd_sharers;
  logic lock_valid, other_lock_valid;
  laddr_t lock_line, other_lock_line;
  logic mem_req, mem_we, mem_done;
  laddr_t mem_addr;
  line_t mem_wline, mem_rline;
  logic [N-1:0] r_valid, r_ready, ac_valid, ac_ready;
  data_chan_t r;
  ac_chan_t ac;
  logic [31:0] n_snoops, n_data_fwd, n_mem_reads;

  sync_fifo #(.WIDTH(2 + $bits(ar_chan_t)), .DEPTH(4)) u_arf (
    .clk, .rst_n, .push(ar_in_push), .wdata({ar_in_src, ar_in}), .pop(ar_pop),
    .rdata({ar_src, ar_head}), .empty(ar_empty), .full(), .count());
  sync_fifo #(.WIDTH(2 + $bits(cr_chan_t)), .DEPTH(4)) u_crf (
    .clk, .rst_n, .push(cr_in_push), .wdata({cr_in_src, cr_in}), .pop(cr_pop),
    .rdata({cr_src, cr_head}), .empty(cr_empty), .full(), .count());
  sync_fifo #(.WIDTH($bits(data_chan_t)), .DEPTH(64)) u_cdf (
    .clk, .rst_n, .push(cd_in_push), .wdata(cd_in), .pop(cd_pop),
    .rdata(cd_head), .empty(cd_empty), .full(), .count());

  ar_cr_cd_fsm #(.N_CORES(N)) dut (.*);

  int unsigned checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic line_t pat(int k, int salt);
    line_t l;
    for (int b = 0; b < BEATS; b++) l[b*DATA_W +: DATA_W] = {8'(salt), 8'(k), 16'(b)};
    return l;
  endfunction

  // directory model (read evaluated on the falling edge, written on the rising edge)
  msi_e d_state [laddr_t];
  logic [N-1:0] d_sh [laddr_t];
  logic gnt_rand;
  assign dir_gnt = dir_req && gnt_rand;
  always @(posedge clk) if (rst_n && dir_gnt && dir_we) begin
    if (dir_wr_sharers == '0) begin d_state.delete(dir_addr); d_sh.delete(dir_addr); end
    else begin d_state[dir_addr] = dir_wr_state; d_sh[dir_addr] = dir_wr_sharers; end
  end

  // memory model
  line_t m_line [laddr_t];
  int unsigned m_wait = 0, n_memw = 0, n_memr = 0;
  always @(posedge clk) begin
    mem_done <= 0;
    if (rst_n && mem_req && !mem_done) begin
      if (m_wait == 2) begin
        if (mem_we) begin m_line[mem_addr] = mem_wline; n_memw++; end
        else begin mem_rline <= m_line.exists(mem_addr) ? m_line[mem_addr] : '0; n_memr++; end
        mem_done <= 1; m_wait = 0;
      end else m_wait++;
    end
  end

  // cache models: accept snoops at random, answer after a delay
  logic [N-1:0] hs_ac, hs_r;
  ac_chan_t s_ac;
  data_chan_t s_r;
  always @(posedge clk) begin
    hs_ac <= ac_valid & ac_ready;
    hs_r  <= r_valid & r_ready;
    s_ac  <= ac;
    s_r   <= r;
  end
  logic [N-1:0] owns;            // which caches hold the line dirty in the current case
  line_t        owned_line;
  logic [N-1:0] snooped;
  snp_e         snoop_kind [N];
  int           answer_q [$];
  line_t        r_got;
  int           r_beats, r_to;
  always @(negedge clk) if (rst_n) begin
    gnt_rand       = $urandom_range(2) != 0;
    dir_hit        = d_state.exists(dir_addr);
    dir_rd_state   = dir_hit ? d_state[dir_addr] : ST_I;
    dir_rd_sharers = dir_hit ? d_sh[dir_addr] : '0;
    for (int i = 0; i < N; i++) if (hs_ac[i]) begin
      snooped[i] = 1; snoop_kind[i] = s_ac.snoop; answer_q.push_back(i);
    end
    for (int i = 0; i < N; i++) if (hs_r[i]) begin
      r_got[r_beats*DATA_W +: DATA_W] = s_r.data;
      check(s_r.last == (r_beats == BEATS - 1), "R last flag");
      r_beats++; r_to = i;
    end
    ac_ready = N'($urandom);
    r_ready  = N'($urandom);
    cr_in_push = 0; cd_in_push = 0;
    if (answer_q.size() > 0 && $urandom_range(1)) begin
      int i;
      i = answer_q.pop_front();
      cr_in_push = 1; cr_in_src = 2'(i);
      cr_in = '{data_transfer: owns[i], was_present: 1'b1};
    end
  end
  // CD beats of a dirty answer are queued right behind its CR
  always @(posedge clk) if (rst_n && cr_in_push && cr_in.data_transfer) begin
    fork begin
      for (int b = 0; b < BEATS; b++) begin
        @(negedge clk); #1;
        cd_in_push = 1; cd_in = '{data: owned_line[b*DATA_W +: DATA_W], last: (b == BEATS - 1)};
      end
      @(negedge clk); #1; cd_in_push = 0;
    end join_none
  end

  int unsigned cnt [5];
  initial begin
    ar_in_push = 0; ar_in_src = 0; ar_in = '0; cr_in_push = 0; cr_in_src = 0; cr_in = '0;
    cd_in_push = 0; cd_in = '0; other_lock_valid = 0; other_lock_line = '0; gnt_rand = 1;
    ac_ready = '0; r_ready = '0; owns = '0; snooped = '0; r_beats = 0; r_to = -1;
    hs_ac = '0; hs_r = '0; mem_rline = '0; dir_hit = 0; dir_rd_state = ST_I; dir_rd_sharers = '0;
    for (int i = 0; i < 5; i++) cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      laddr_t a;
      int src, o1, o2, kind, memw0;
      logic [N-1:0] exp_snooped, sb;
      line_t exp_line;
      snp_e exp_kind;
      a = laddr_t'(k * 13 + 5);
      src = $urandom_range(N - 1);
      o1 = (src + 1) % N; o2 = (src + 2) % N;
      sb = N'(1) << src;
      kind = $urandom_range(4);
      m_line[a] = pat(k, 1);
      owned_line = pat(k, 2);
      owns = '0; snooped = '0; r_beats = 0; r_to = -1;
      exp_kind = SNP_MAKE_INVALID;
      case (kind)
        0: begin exp_snooped = '0; exp_line = pat(k, 1); end
        1: begin d_state[a] = ST_M; d_sh[a] = N'(1) << o1; owns = d_sh[a];
                 exp_snooped = owns; exp_kind = SNP_READ_SHARED; exp_line = owned_line; end
        2: begin d_state[a] = ST_S; d_sh[a] = (N'(1) << o1) | (N'(1) << o2) | ($urandom_range(1) ? sb : '0);
                 exp_snooped = d_sh[a] & ~sb; exp_line = pat(k, 1); end
        3: begin d_state[a] = ST_M; d_sh[a] = N'(1) << o2; owns = d_sh[a];
                 exp_snooped = owns; exp_kind = SNP_READ_UNIQUE; exp_line = owned_line; end
        default: begin d_state[a] = ST_S; d_sh[a] = N'(1) << o1; exp_snooped = '0; exp_line = pat(k, 1); end
      endcase
      memw0 = n_memw;
      if (k % 8 == 0) begin other_lock_valid = 1; other_lock_line = a; end
      @(negedge clk);
      ar_in_push = 1; ar_in_src = 2'(src);
      ar_in = '{addr: a, op: (kind == 2 || kind == 3) ? AR_READ_UNIQUE : AR_READ_CLEAN};
      @(negedge clk);
      ar_in_push = 0;
      if (other_lock_valid) begin
        repeat (15) @(negedge clk);
        check(!dut.lock_valid && !ar_empty, "request waits for the other FSM's lock");
        other_lock_valid = 0;
      end
      while (!(r_beats == BEATS && !dut.lock_valid)) @(negedge clk);
      check(r_to == src, "R to the requester");
      check(r_got == exp_line, $sformatf("R line (case %0d)", kind));
      check(snooped == exp_snooped, $sformatf("snooped caches (case %0d)", kind));
      for (int i = 0; i < N; i++) if (snooped[i]) check(snoop_kind[i] == exp_kind, "snoop kind");
      if (kind == 1) check(n_memw == memw0 + 1 && m_line[a] == owned_line, "read-clean writes dirty data back");
      else check(n_memw == memw0, "no memory write");
      if (kind == 2 || kind == 3) check(d_state[a] == ST_M && d_sh[a] == sb, "directory after read-unique");
      else if (kind == 1) check(d_state[a] == ST_S && d_sh[a] == (sb | (N'(1) << o1)), "directory after forwarded read-clean");
      else if (kind == 0) check(d_state[a] == ST_S && d_sh[a] == sb, "directory after uncached read-clean");
      else check(d_state[a] == ST_S && d_sh[a] == (sb | (N'(1) << o1)), "directory after shared read-clean");
      cnt[kind]++;
    end
    for (int i = 0; i < 5; i++) check(cnt[i] > 10, "every case exercised");
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
