// memory_controller_tb: writes random lines to random line addresses through the memory
// controller into the main memory model, then reads them back in random order. Checks every
// word the controller presents to memory (address = line address * 16 + beat, lowest word
// first, data = that word of the line), that each read returns the line last written,
// and the cycle counts: a write needs at least 16 cycles, a read at least 16 memory latencies.
// Line serialization into 32-bit words follows the paper; the word-port handshake and beat
// order are this design's own.
module memory_controller_tb;
  import rhea_pkg::*;
  localparam int unsigned LAT = 3, NL = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req, we, done;
  laddr_t addr;
  line_t wline, rline;
  logic mem_valid, mem_ready, mem_we, mem_rvalid;
  logic [WORD_AW-1:0] mem_addr;
  word_t mem_wdata, mem_rdata;
  int unsigned nr, nw, checks = 0, failures = 0;
  laddr_t lines [NL];
  line_t  data [NL];

  memory_controller dut (.*);
  main_memory_model #(.LATENCY(LAT), .READY_PCT(70)) u_mem (
    .clk, .rst_n, .mem_valid, .mem_ready, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid,
    .mem_rdata, .n_reads(nr), .n_writes(nw));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // every accepted memory write must be the expected word of the line being written
  always @(posedge clk) if (rst_n && mem_valid && mem_ready && mem_we) begin
    check(mem_addr[WORD_AW-1:BEAT_W] == addr, "write word address (line)");
    check(mem_wdata == wline[mem_addr[BEAT_W-1:0]*DATA_W +: DATA_W], "write word data");
  end

  task automatic line_op(bit w, int k);
    int unsigned cycles;
    @(negedge clk);
    req = 1; we = w; addr = lines[k]; wline = data[k];
    cycles = 0;
    do begin @(posedge clk); #1; cycles++; end while (!done);
    @(negedge clk);
    req = 0;
    if (w) check(cycles >= BEATS, "write takes at least BEATS cycles");
    else begin
      check(cycles >= BEATS * LAT, "read takes at least BEATS latencies");
      check(rline == data[k], "read line data");
    end
    @(negedge clk);
  endtask

  initial begin
    req = 0; we = 0; addr = '0; wline = '0;
    for (int k = 0; k < NL; k++) begin
      lines[k] = laddr_t'($urandom) ^ laddr_t'(k);
      for (int b = 0; b < BEATS; b++) data[k][b*DATA_W +: DATA_W] = $urandom;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NL; k++) line_op(1, k);
    for (int r = 0; r < 3 * NL; r++) begin
      int k;
      k = $urandom_range(NL - 1);
      if ($urandom_range(3) == 0) begin
        for (int b = 0; b < BEATS; b++) data[k][b*DATA_W +: DATA_W] = $urandom;
        line_op(1, k);
      end else line_op(0, k);
    end
    check(nw >= NL * BEATS, "memory writes counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
