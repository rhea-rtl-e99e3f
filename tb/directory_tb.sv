// directory_tb: random directory updates against an associative-array reference model, with
// 2 caches, 4 sets and 2 L1 ways (4 directory ways per set). Lines are drawn from 6 per set,
// and a new line is only added to a set that holds fewer than 4, as the L1 caches guarantee.
// Checks the combinational read (hit, state, sharers) of random lines every cycle, entry
// freeing on an empty sharer set and that no allocation ever overflows.
// The paper's directory keeps state and sharers per line; the sparse organisation and the
// free-on-empty rule checked here are this design's own.
module directory_tb;
  import rhea_pkg::*;
  localparam int unsigned N = 2, SETS = 4, L1W = 2, WAYS = N * L1W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req, we, hit, overflow;
  laddr_t addr;
  msi_e wr_state, rd_state;
  logic [N-1:0] wr_sharers, rd_sharers;
  int unsigned checks = 0, failures = 0, frees = 0, allocs = 0;
  msi_e        m_state   [laddr_t];
  logic [N-1:0] m_sharers [laddr_t];
  int unsigned live [SETS];

  directory #(.N_CORES(N), .SETS(SETS), .L1_WAYS(L1W)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic laddr_t pick();
    return laddr_t'(($urandom_range(5) << 2) | $urandom_range(SETS - 1));
  endfunction

  initial begin
    req = 0; we = 0; addr = '0; wr_state = ST_I; wr_sharers = '0;
    for (int s = 0; s < SETS; s++) live[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      addr = pick();
      req  = 1;
      we   = 0;
      #1;
      check(hit == m_state.exists(addr), "hit");
      if (m_state.exists(addr)) begin
        check(rd_state == m_state[addr], "state");
        check(rd_sharers == m_sharers[addr], "sharers");
      end else begin
        check(rd_state == ST_I && rd_sharers == '0, "miss reads as I");
      end
      // random update of the same line
      wr_sharers = N'($urandom_range((1 << N) - 1));
      wr_state   = (wr_sharers == '0) ? ST_I : msi_e'(1 + $urandom_range(1));
      if (!m_state.exists(addr) && wr_sharers != '0 && live[addr % SETS] == WAYS)
        wr_sharers = '0;   // set full: only existing lines may be updated
      if (wr_sharers == '0) wr_state = ST_I;
      we = 1;
      #1;
      check(!overflow, "overflow");
      @(posedge clk);
      if (wr_sharers == '0) begin
        if (m_state.exists(addr)) begin
          m_state.delete(addr); m_sharers.delete(addr); live[addr % SETS]--; frees++;
        end
      end else begin
        if (!m_state.exists(addr)) begin live[addr % SETS]++; allocs++; end
        m_state[addr] = wr_state; m_sharers[addr] = wr_sharers;
      end
    end
    check(frees > 100 && allocs > 100, "enough allocations and frees");
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
