// dir_arbiter_tb: both FSM clients request the directory at random with random fields.
// Checks every cycle: the grant goes to a requesting client, never to both; with both
// requesting, grants alternate; the directory sees exactly the granted client's address,
// write enable and write data; nothing is requested when no client asks.
// The paper names a directory arbiter between the two FSMs; the alternation checked here is
// this design's own policy.
module dir_arbiter_tb;
  import rhea_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] req, we, gnt;
  laddr_t addr [2];
  msi_e wr_state [2];
  logic [N-1:0] wr_sharers [2];
  logic dir_req, dir_we;
  laddr_t dir_addr;
  msi_e dir_wr_state;
  logic [N-1:0] dir_wr_sharers;
  int unsigned checks = 0, failures = 0, both = 0;
  int last_both = -1;

  dir_arbiter #(.N_CORES(N)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    req = '0; we = '0;
    for (int i = 0; i < 2; i++) begin addr[i] = '0; wr_state[i] = ST_I; wr_sharers[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      req = 2'($urandom);
      we  = 2'($urandom);
      for (int i = 0; i < 2; i++) begin
        addr[i] = laddr_t'($urandom); wr_state[i] = msi_e'($urandom_range(2));
        wr_sharers[i] = N'($urandom);
      end
      #1;
      check(dir_req == (req != '0), "dir_req");
      check($countones(gnt) == (req != '0 ? 1 : 0), "exactly one grant when requested");
      check((gnt & ~req) == '0, "grant to a requester");
      for (int i = 0; i < 2; i++)
        if (gnt[i]) check(dir_addr == addr[i] && dir_we == we[i] && dir_wr_state == wr_state[i]
                          && dir_wr_sharers == wr_sharers[i], "granted client's fields");
      if (req == 2'b11) begin
        both++;
        if (last_both >= 0) check(!gnt[last_both], "alternation under contention");
        last_both = gnt[1] ? 1 : 0;
      end else if (req != '0) last_both = gnt[1] ? 1 : 0;
      @(posedge clk);
    end
    check(both > 300, "contention exercised");
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
