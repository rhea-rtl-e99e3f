// cr_cd_arbiter: round-robin arbiter of the N snoop-response channel pairs (ACE CR and CD).
//
// Snooped caches answer on CR; one answering with data_transfer also sends its line as BEATS
// beats on CD. One CR is chosen round-robin, accepted and pushed into the CR FIFO with its
// source index. If it announces data, the arbiter locks onto that source and moves its CD
// beats into the CD FIFO until the last beat, so the CD FIFO holds whole lines in the same
// order as the CR entries that announce them. Paper: one arbiter for CR and CD together
// (Fig. 4 "CR+CD arbiter"); the locking rule is this design's own.
module cr_cd_arbiter
  import rhea_pkg::*;
#(
  parameter int unsigned N_CORES = 16,
  localparam int unsigned IW = $clog2(N_CORES > 1 ? N_CORES : 2)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic       [N_CORES-1:0] cr_valid,
  input  cr_chan_t                 cr [N_CORES],
  output logic       [N_CORES-1:0] cr_ready,
  input  logic       [N_CORES-1:0] cd_valid,
  input  data_chan_t               cd [N_CORES],
  output logic       [N_CORES-1:0] cd_ready,
  input  logic                     cr_fifo_full,
  output logic                     cr_push,
  output logic       [IW-1:0]      cr_push_src,
  output cr_chan_t                 cr_push_data,
  input  logic                     cd_fifo_full,
  output logic                     cd_push,
  output data_chan_t               cd_push_data
);
  logic          in_cd;
  logic [IW-1:0] cd_src;
  logic [N_CORES-1:0] gnt;

  rr_arbiter #(.N(N_CORES)) u_rr (
    .clk, .rst_n, .req(in_cd ? '0 : cr_valid), .advance(cr_push), .gnt, .gnt_idx(cr_push_src)
  );

  assign cr_push      = !in_cd && (cr_valid != '0) && !cr_fifo_full;
  assign cr_ready     = cr_push ? gnt : '0;
  assign cr_push_data = cr[cr_push_src];

  assign cd_push      = in_cd && cd_valid[cd_src] && !cd_fifo_full;
  assign cd_push_data = cd[cd_src];
  always_comb begin
    cd_ready = '0;
    if (in_cd && !cd_fifo_full) cd_ready[cd_src] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_cd  <= 1'b0;
      cd_src <= '0;
    end else if (!in_cd) begin
      if (cr_push && cr_push_data.data_transfer) begin
        in_cd  <= 1'b1;
        cd_src <= cr_push_src;
      end
    end else if (cd_push && cd_push_data.last) begin
      in_cd <= 1'b0;
    end
  end
endmodule
