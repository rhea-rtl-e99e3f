// aw_w_fsm_tb: the AW+W FSM with real AW and W FIFOs in front of it and reference models of
// the directory (granting at random), the memory port and the B receivers around it (4
// caches). Random evictions and write-backs are issued against directory entries the test
// sets up: the source is the M owner, an S sharer, or no longer listed (a stale write-back).
// Checks after each B: the B went to the requesting cache; a write-back from the owner wrote
// exactly its line to memory and left the line in I; a stale write-back wrote nothing; an
// eviction removed only its source from the sharers (I when none remain). Also checks that
// a request waits while the other FSM holds the same line locked.
// That an FSM serves evicts and write-backs without snooping is the paper's; stale
// write-back handling and the line lock are this design's own.
module aw_w_fsm_tb;
  import rhea_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic aw_in_push, w_in_push, aw_empty, w_empty, aw_pop, w_pop, aw_full, w_full;
  logic [1:0] aw_in_src, aw_src;
  aw_chan_t aw_in, aw_head;
  data_chan_t w_in, w_head;
  logic dir_req, dir_we, dir_gnt, dir_hit;
  laddr_t dir_addr;
  msi_e dir_wr_state, dir_rd_state;
  logic [N-1:0] dir_wr_sharers, dir_rd_sharers;
  logic lock_valid, other_lock_valid;
  laddr_t lock_line, other_lock_line;
  logic mem_req, mem_we, mem_done;
  laddr_t mem_addr;
  line_t mem_wline;
  logic [N-1:0] b_valid, b_ready;
  logic [31:0] n_writebacks, n_stale;

  sync_fifo #(.WIDTH(2 + $bits(aw_chan_t)), .DEPTH(4)) u_awf (
    .clk, .rst_n, .push(aw_in_push), .wdata({aw_in_src, aw_in}), .pop(aw_pop),
    .rdata({aw_src, aw_head}), .empty(aw_empty), .full(aw_full), .count());
  sync_fifo #(.WIDTH($bits(data_chan_t)), .DEPTH(64)) u_wf (
    .clk, .rst_n, .push(w_in_push), .wdata(w_in), .pop(w_pop),
    .rdata(w_head), .empty(w_empty), .full(w_full), .count());

  aw_w_fsm #(.N_CORES(N)) dut (.*);

  int unsigned checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // directory model: combinational read, write on the edge, random grant
  msi_e d_state [laddr_t];
  logic [N-1:0] d_sh [laddr_t];
  logic gnt_rand;
  assign dir_gnt = dir_req && gnt_rand;
  always @(posedge clk) if (rst_n && dir_req && dir_gnt && dir_we) begin
    if (dir_wr_sharers == '0) begin d_state.delete(dir_addr); d_sh.delete(dir_addr); end
    else begin d_state[dir_addr] = dir_wr_state; d_sh[dir_addr] = dir_wr_sharers; end
  end
  // the FSM's address only changes on the rising edge, so the read is evaluated on the
  // falling edge
  always @(negedge clk) begin
    gnt_rand       = $urandom_range(2) != 0;
    dir_hit        = d_state.exists(dir_addr);
    dir_rd_state   = dir_hit ? d_state[dir_addr] : ST_I;
    dir_rd_sharers = dir_hit ? d_sh[dir_addr] : '0;
  end

  // memory model
  line_t m_line [laddr_t];
  int unsigned m_wait = 0, n_memw = 0;
  always @(posedge clk) begin
    mem_done <= 0;
    if (rst_n && mem_req && !mem_done) begin
      if (m_wait == 3) begin
        check(mem_we, "memory access is a write");
        m_line[mem_addr] = mem_wline; n_memw++; mem_done <= 1; m_wait = 0;
      end else m_wait++;
    end
  end

  // B receivers accept at random
  always @(negedge clk) b_ready = N'($urandom);

  function automatic line_t pat(int k);
    line_t l;
    for (int b = 0; b < BEATS; b++) l[b*DATA_W +: DATA_W] = {16'(k), 16'(b)};
    return l;
  endfunction

  task automatic request(int src, laddr_t a, aw_op_e op, line_t l);
    @(negedge clk);
    aw_in_push = 1; aw_in_src = 2'(src); aw_in = '{addr: a, op: op};
    @(negedge clk);
    aw_in_push = 0;
    if (op == AW_WRITEBACK)
      for (int b = 0; b < BEATS; b++) begin
        w_in_push = 1; w_in = '{data: l[b*DATA_W +: DATA_W], last: (b == BEATS - 1)};
        @(negedge clk);
      end
    w_in_push = 0;
  endtask

  task automatic wait_b(int src);
    int unsigned t;
    t = 0;
    do begin @(negedge clk); #1; t++; end while (!(b_valid[src] && b_ready[src]) && t < 1000);
    check(b_valid == (N'(1) << src), "B to the requesting cache only");
    @(posedge clk);
  endtask

  int unsigned wb_ok = 0, wb_stale = 0, evicts = 0, lock_waits = 0;
  initial begin
    aw_in_push = 0; w_in_push = 0; aw_in_src = 0; aw_in = '0; w_in = '0;
    other_lock_valid = 0; other_lock_line = '0; gnt_rand = 1; b_ready = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      laddr_t a;
      int src, other, kind, memw0;
      a = laddr_t'(k * 7 + 100);
      src = $urandom_range(N - 1);
      other = (src + 1 + $urandom_range(N - 2)) % N;
      kind = $urandom_range(3);
      memw0 = n_memw;
      case (kind)
        0: begin d_state[a] = ST_M; d_sh[a] = N'(1) << src; end              // owner
        1: begin d_state[a] = ST_M; d_sh[a] = N'(1) << other; end            // stale
        2: begin d_state[a] = ST_S; d_sh[a] = (N'(1) << src) | (N'(1) << other); end
        default: begin d_state[a] = ST_S; d_sh[a] = N'(1) << src; end        // last sharer
      endcase
      if (k % 10 == 0) begin             // the other FSM holds this line for a while
        other_lock_valid = 1; other_lock_line = a;
      end
      request(src, a, (kind < 2) ? AW_WRITEBACK : AW_EVICT, pat(k));
      if (other_lock_valid) begin
        repeat (20) @(posedge clk);
        #1;
        check(!dut.lock_valid && !aw_empty, "request waits for the other FSM's lock");
        lock_waits++;
        @(negedge clk);
        other_lock_valid = 0;
      end
      wait_b(src);
      case (kind)
        0: begin
          check(n_memw == memw0 + 1 && m_line[a] == pat(k), "owner write-back reaches memory");
          check(!d_state.exists(a), "line is I after the owner's write-back");
          wb_ok++;
        end
        1: begin
          check(n_memw == memw0, "stale write-back dropped");
          check(d_state.exists(a) && d_sh[a] == (N'(1) << other) && d_state[a] == ST_M,
                "stale write-back leaves the entry");
          wb_stale++;
        end
        2: begin
          check(d_state.exists(a) && d_sh[a] == (N'(1) << other) && d_state[a] == ST_S,
                "eviction removes its source only");
          evicts++;
        end
        default: begin
          check(!d_state.exists(a), "last sharer's eviction frees the entry");
          evicts++;
        end
      endcase
    end
    check(wb_ok > 20 && wb_stale > 20 && evicts > 40 && lock_waits > 10, "all cases exercised");
    check(n_writebacks == wb_ok && n_stale == wb_stale, "event counters");
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

