// main_memory: the subsystem's main memory, a word-wide synchronous RAM of MEM_BYTES bytes
// behind the interconnect's memory controller.
//
// Port: a request is mem_valid with mem_we, a word address and, for a write, mem_wdata. The
// memory is always ready (mem_ready = 1); a write takes effect at the clock edge, a read
// returns its word one cycle later with mem_rvalid/mem_rdata. The array is not reset, like a
// DRAM: a word never written reads whatever the array held.
// Following the paper: the memory is part of the subsystem, below the interconnect, sized
// 1 GB in the evaluated configurations. Own choices: the single-cycle, always-ready word port
// (the paper gives no timing for it) and the 32-bit word organisation.
module main_memory
  import rhea_pkg::*;
#(
  parameter longint unsigned MEM_BYTES = 64'd1 << ADDR_W,
  localparam longint unsigned WORDS    = MEM_BYTES / 64'(STRB_W),
  localparam int unsigned     MAW      = $clog2(WORDS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               mem_valid,
  output logic               mem_ready,
  input  logic               mem_we,
  input  logic [WORD_AW-1:0] mem_addr,
  input  word_t              mem_wdata,
  output logic               mem_rvalid,
  output word_t              mem_rdata
);
  word_t ram [WORDS];

  logic [MAW-1:0] waddr;
  assign waddr     = mem_addr[MAW-1:0];
  assign mem_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (mem_valid && mem_we) ram[waddr] <= mem_wdata;
    mem_rdata <= ram[waddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mem_rvalid <= 1'b0;
    else        mem_rvalid <= mem_valid && !mem_we;
  end
endmodule
