// mem_arbiter_tb: both FSM clients issue random line reads and writes, holding each request
// until their own done. A small memory-controller stand-in answers after a random number
// of cycles with a line derived from the address. Checks: only one request reaches the
// controller at a time and it is a requesting client's (address, we, data); the grant is
// kept until done; done goes only to the granted client, with the right read data; both
// clients are served under contention.
// The paper names a memory arbiter between the two FSMs; holding the grant for a whole line
// is this design's own policy.
module mem_arbiter_tb;
  import rhea_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] req, we, done;
  laddr_t addr [2];
  line_t wline [2];
  line_t rline;
  logic mc_req, mc_we, mc_done;
  laddr_t mc_addr;
  line_t mc_wline, mc_rline;
  int unsigned checks = 0, failures = 0, served [2];
  int unsigned mc_busy_cnt;
  logic mc_busy;
  int owner;
  logic [1:0] got;

  mem_arbiter dut (.*);

  function automatic line_t pattern(laddr_t a);
    return {16{word_t'(a) ^ 32'h5a5a0000}};
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // memory controller stand-in: takes a request, answers 2..6 cycles later
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mc_busy <= 0; mc_done <= 0; mc_rline <= '0; mc_busy_cnt <= 0;
    end else begin
      mc_done <= 0;
      if (!mc_busy && mc_req && !mc_done) begin
        mc_busy <= 1; mc_busy_cnt <= 2 + $urandom_range(4);
        mc_rline <= pattern(mc_addr);
      end else if (mc_busy) begin
        if (mc_busy_cnt == 1) begin mc_busy <= 0; mc_done <= 1; end
        mc_busy_cnt <= mc_busy_cnt - 1;
      end
    end
  end

  initial begin
    req = '0; we = '0; got = '0; owner = -1; served[0] = 0; served[1] = 0;
    for (int i = 0; i < 2; i++) begin addr[i] = '0; wline[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      req = req & ~got;          // a client drops its request after its done
      for (int i = 0; i < 2; i++)
        if (!req[i] && $urandom_range(2) == 0) begin
          req[i] = 1; we[i] = 1'($urandom); addr[i] = laddr_t'($urandom);
          wline[i] = {16{$urandom}};
        end
      #1;
      if (mc_req) begin
        int c;
        c = dut.cur;
        check(req[c], "forwarded client is requesting");
        check(mc_addr == addr[c] && mc_we == we[c] && mc_wline == wline[c], "forwarded fields");
        if (mc_busy) check(c == owner, "grant held until done");
        owner = c;
      end
      check($countones(done) <= 1, "done to one client");
      for (int i = 0; i < 2; i++)
        if (done[i]) begin
          check(i == owner, "done to the owner");
          if (!we[i]) check(rline == pattern(addr[i]), "read data");
          served[i]++;
        end
      got = done;
      @(posedge clk);
    end
    check(served[0] > 50 && served[1] > 50, "both clients served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
