// main_memory_tb: random writes and reads against a reference model on a 64 kB instance (the
// default is the paper's 1 GB; a smaller array keeps the run short, the logic is the same).
// Checks: mem_ready always high; a read's word comes back exactly one cycle later with
// mem_rvalid; mem_rvalid never follows a write or an idle cycle; the word is the last one
// written to that address (words never written are not compared).
// The 1 GB size is the paper's; the one-cycle, always-ready port is this design's own.
module main_memory_tb;
  import rhea_pkg::*;
  localparam longint unsigned BYTES = 64'd65536;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic mem_valid, mem_ready, mem_we, mem_rvalid;
  logic [WORD_AW-1:0] mem_addr;
  word_t mem_wdata, mem_rdata;

  main_memory #(.MEM_BYTES(BYTES)) dut (.*);

  int unsigned checks = 0, failures = 0, n_rd = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  word_t model [logic [WORD_AW-1:0]];
  logic  exp_rv;
  logic  exp_known;
  word_t exp_data;

  initial begin
    mem_valid = 0; mem_we = 0; mem_addr = '0; mem_wdata = '0;
    exp_rv = 0; exp_known = 0; exp_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      // outputs of the previous cycle's request
      check(mem_rvalid == exp_rv, "rvalid one cycle after a read only");
      if (exp_rv && exp_known) check(mem_rdata == exp_data, "read data");
      check(mem_ready, "always ready");
      mem_valid = $urandom_range(3) != 0;
      mem_we    = 1'($urandom_range(1));
      mem_addr  = WORD_AW'($urandom_range(255));      // small address pool: many rereads
      if ($urandom_range(1) != 0) mem_addr = WORD_AW'($urandom_range(int'(BYTES / 4) - 1));
      mem_wdata = $urandom;
      exp_rv    = mem_valid && !mem_we;
      exp_known = model.exists(mem_addr);
      exp_data  = exp_known ? model[mem_addr] : '0;
      if (mem_valid && mem_we) model[mem_addr] = mem_wdata;
      if (exp_rv && exp_known) n_rd++;
    end
    check(n_rd > 500, "enough reads of written words");
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
