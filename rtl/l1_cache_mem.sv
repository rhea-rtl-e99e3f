// l1_cache_mem: storage of one private L1 cache: the tag array (tag and MSI state per line)
// and the data of the M ways (Fig. 3 of the design: "Tag", "Way 1 ... Way M").
//
// Organisation: SETS sets of WAYS lines of LINE_BYTES bytes; SETS follows from the capacity
// and associativity (8 kB, 4 ways and 64-byte lines give 32 sets).
// Two read ports, both combinational and returning a whole set (every way's tag, state and
// line): port A serves the controller's CPU side, port B its snoop (ACE) side.
// One write port, registered: it writes the tag and state of one way and, when wr_data_en is
// set, its whole line. States reset to I; tags and data are not reset.
// Paper: cache size and associativity are design-time parameters (8 kB, 4-way in the
// evaluated systems). Line size, port count and read timing are this design's choices.
module l1_cache_mem
  import rhea_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 8192,
  parameter int unsigned WAYS        = 4,
  localparam int unsigned SETS       = CACHE_BYTES / (LINE_BYTES * WAYS),
  localparam int unsigned IDX_W      = $clog2(SETS),
  localparam int unsigned TAG_W      = LADDR_W - IDX_W,
  localparam int unsigned WAY_W      = $clog2(WAYS > 1 ? WAYS : 2)
) (
  input  logic             clk,
  input  logic             rst_n,
  // read port A
  input  logic [IDX_W-1:0] a_set,
  output logic [TAG_W-1:0] a_tag   [WAYS],
  output msi_e             a_state [WAYS],
  output line_t            a_data  [WAYS],
  // read port B
  input  logic [IDX_W-1:0] b_set,
  output logic [TAG_W-1:0] b_tag   [WAYS],
  output msi_e             b_state [WAYS],
  output line_t            b_data  [WAYS],
  // write port
  input  logic             wr_en,
  input  logic [IDX_W-1:0] wr_set,
  input  logic [WAY_W-1:0] wr_way,
  input  logic [TAG_W-1:0] wr_tag,
  input  msi_e             wr_state,
  input  logic             wr_data_en,
  input  line_t            wr_data
);
  logic [TAG_W-1:0] tags   [SETS][WAYS];
  msi_e             states [SETS][WAYS];
  line_t            data   [SETS][WAYS];

  always_comb begin
    for (int w = 0; w < WAYS; w++) begin
      a_tag[w]   = tags[a_set][w];
      a_state[w] = states[a_set][w];
      a_data[w]  = data[a_set][w];
      b_tag[w]   = tags[b_set][w];
      b_state[w] = states[b_set][w];
      b_data[w]  = data[b_set][w];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++)
          states[s][w] <= ST_I;
    end else if (wr_en) begin
      states[wr_set][wr_way] <= wr_state;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) tags[wr_set][wr_way] <= wr_tag;
    if (wr_en && wr_data_en) data[wr_set][wr_way] <= wr_data;
  end
endmodule
