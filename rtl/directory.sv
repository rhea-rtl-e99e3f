// directory: records, for every cache line present in the L1 caches, its MSI state and the
// set of caches that hold it (one sharer bit per cache; in state M the single set bit is the
// owner).
//
// Paper: "The directory tracks cache lines present in the system and the state and sharers of
// each cache line." Its organisation is not given. This design uses a sparse directory with
// the same number of sets as one L1 cache (same index bits) and N_CORES * L1_WAYS ways per
// set: each L1 set can hold at most L1_WAYS lines, so the directory can never run out of room
// and never has to recall a line. An address with no entry is in state I.
// Interface: one access port. Reads are combinational: hit/rd_state/rd_sharers describe
// `addr` in the same cycle. A write (req && we) takes effect at the next clock edge: a
// non-zero sharer set updates the entry (allocating the first free way on a miss), an empty
// sharer set frees the entry.
module directory
  import rhea_pkg::*;
#(
  parameter int unsigned N_CORES  = 16,
  parameter int unsigned SETS     = 32,
  parameter int unsigned L1_WAYS  = 4,
  localparam int unsigned WAYS    = N_CORES * L1_WAYS,
  localparam int unsigned IDX_W   = $clog2(SETS),
  localparam int unsigned TAG_W   = LADDR_W - IDX_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req,
  input  logic               we,
  input  laddr_t             addr,
  input  msi_e               wr_state,
  input  logic [N_CORES-1:0] wr_sharers,
  output logic               hit,
  output msi_e               rd_state,
  output logic [N_CORES-1:0] rd_sharers,
  output logic               overflow    // write needed a free way and found none
);
  typedef struct packed {
    logic               valid;
    logic [TAG_W-1:0]   tag;
    msi_e               state;
    logic [N_CORES-1:0] sharers;
  } dir_entry_t;

  dir_entry_t entries [SETS][WAYS];

  logic [IDX_W-1:0] idx;
  logic [TAG_W-1:0] tag;
  logic [$clog2(WAYS)-1:0] hit_way, free_way;
  logic             has_free;

  assign idx = addr[IDX_W-1:0];
  assign tag = addr[LADDR_W-1:IDX_W];

  always_comb begin
    hit      = 1'b0;
    hit_way  = '0;
    has_free = 1'b0;
    free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (entries[idx][w].valid && entries[idx][w].tag == tag) begin
        hit     = 1'b1;
        hit_way = w[$clog2(WAYS)-1:0];
      end
      if (!entries[idx][w].valid) begin
        has_free = 1'b1;
        free_way = w[$clog2(WAYS)-1:0];
      end
    end
    rd_state   = hit ? entries[idx][hit_way].state   : ST_I;
    rd_sharers = hit ? entries[idx][hit_way].sharers : '0;
  end

  assign overflow = req && we && !hit && (wr_sharers != '0) && !has_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++)
          entries[s][w].valid <= 1'b0;
    end else if (req && we) begin
      if (hit) begin
        entries[idx][hit_way].valid   <= (wr_sharers != '0);
        entries[idx][hit_way].state   <= wr_state;
        entries[idx][hit_way].sharers <= wr_sharers;
      end else if (wr_sharers != '0 && has_free) begin
        entries[idx][free_way] <= '{valid: 1'b1, tag: tag, state: wr_state, sharers: wr_sharers};
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !overflow)
    else $error("directory: no free way");
endmodule
