// l1_cache_mem_tb: random writes (tag and state alone, or with a whole line) to a 1 kB
// 2-way cache memory, checked against a reference array through both read ports, which
// look at independent random sets every cycle. Also checks that every state is I after reset.
// Size and associativity are the paper's (scaled down here for speed: 1 kB, 2-way); the
// two read ports and the write-port rules are this design's own.
module l1_cache_mem_tb;
  import rhea_pkg::*;
  localparam int unsigned BYTES = 1024, WAYS = 2, SETS = BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned IDX_W = $clog2(SETS), TAG_W = LADDR_W - IDX_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [IDX_W-1:0] a_set, b_set, wr_set;
  logic [TAG_W-1:0] a_tag [WAYS], b_tag [WAYS];
  msi_e a_state [WAYS], b_state [WAYS];
  line_t a_data [WAYS], b_data [WAYS];
  logic wr_en, wr_data_en;
  logic [0:0] wr_way;
  logic [TAG_W-1:0] wr_tag;
  msi_e wr_state;
  line_t wr_data;
  logic [TAG_W-1:0] m_tag [SETS][WAYS];
  msi_e m_state [SETS][WAYS];
  line_t m_data [SETS][WAYS];
  logic m_dv [SETS][WAYS];
  int unsigned checks = 0, failures = 0;

  l1_cache_mem #(.CACHE_BYTES(BYTES), .WAYS(WAYS)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    wr_en = 0; wr_data_en = 0; wr_set = '0; wr_way = '0; wr_tag = '0; wr_state = ST_I; wr_data = '0;
    a_set = '0; b_set = '0;
    for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) begin
      m_state[s][w] = ST_I; m_dv[s][w] = 0; m_tag[s][w] = '0; m_data[s][w] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk); a_set = IDX_W'(s); #1;
      for (int w = 0; w < WAYS; w++) check(a_state[w] == ST_I, "reset state");
    end
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      a_set = IDX_W'($urandom); b_set = IDX_W'($urandom);
      #1;
      for (int w = 0; w < WAYS; w++) begin
        check(a_state[w] == m_state[a_set][w] && b_state[w] == m_state[b_set][w], "state");
        if (m_dv[a_set][w]) check(a_tag[w] == m_tag[a_set][w] && a_data[w] == m_data[a_set][w], "port A tag/data");
        if (m_dv[b_set][w]) check(b_tag[w] == m_tag[b_set][w] && b_data[w] == m_data[b_set][w], "port B tag/data");
      end
      wr_en = 1'($urandom); wr_data_en = 1'($urandom); wr_set = IDX_W'($urandom);
      wr_way = 1'($urandom); wr_tag = TAG_W'($urandom); wr_state = msi_e'($urandom_range(2));
      for (int b = 0; b < BEATS; b++) wr_data[b*DATA_W +: DATA_W] = $urandom;
      @(posedge clk);
      if (wr_en) begin
        m_state[wr_set][wr_way] = wr_state;
        m_tag[wr_set][wr_way] = wr_tag;
        if (wr_data_en) begin m_data[wr_set][wr_way] = wr_data; m_dv[wr_set][wr_way] = 1; end
      end
    end
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
