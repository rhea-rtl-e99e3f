// main_memory_model: behavioural model of the word-wide main memory behind the memory
// controller (simulation only, not synthesizable).
//
// Sparse storage in an associative array, so the whole 1 GB address space can be modelled;
// a word never written reads as zero. A request is accepted when mem_valid && mem_ready;
// mem_ready is high with probability READY_PCT percent in each cycle. A read returns its word
// with mem_rvalid LATENCY cycles after it is accepted (at most one read in flight, which is
// all the memory controller issues).
// The paper's main memory is a 1 GB gem5 DDR3 model; latency and ready rate here are
// arbitrary testbench choices.
module main_memory_model
  import rhea_pkg::*;
#(
  parameter int unsigned LATENCY   = 3,
  parameter int unsigned READY_PCT = 75
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               mem_valid,
  output logic               mem_ready,
  input  logic               mem_we,
  input  logic [WORD_AW-1:0] mem_addr,
  input  word_t              mem_wdata,
  output logic               mem_rvalid,
  output word_t              mem_rdata,
  output int unsigned        n_reads,
  output int unsigned        n_writes
);
  word_t       store [logic [WORD_AW-1:0]];
  int unsigned wait_cnt;
  logic        pending;
  logic [WORD_AW-1:0] pend_addr;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_ready  <= 1'b0;
      mem_rvalid <= 1'b0;
      mem_rdata  <= '0;
      pending    <= 1'b0;
      wait_cnt   <= 0;
      pend_addr  <= '0;
      n_reads    <= 0;
      n_writes   <= 0;
    end else begin
      mem_ready  <= ($urandom_range(99) < READY_PCT);
      mem_rvalid <= 1'b0;
      if (mem_valid && mem_ready) begin
        if (mem_we) begin
          store[mem_addr] = mem_wdata;
          n_writes <= n_writes + 1;
        end else begin
          pending   <= 1'b1;
          pend_addr <= mem_addr;
          wait_cnt  <= LATENCY;
          n_reads   <= n_reads + 1;
        end
      end
      if (pending) begin
        if (wait_cnt <= 1) begin
          pending    <= 1'b0;
          mem_rvalid <= 1'b1;
          mem_rdata  <= store.exists(pend_addr) ? store[pend_addr] : '0;
        end else begin
          wait_cnt <= wait_cnt - 1;
        end
      end
    end
  end
endmodule
