// aw_w_arbiter: round-robin arbiter of the N AW+W channel pairs of the coherent interconnect.
//
// In the address phase one requester with aw_valid is chosen round-robin, its AW request
// (evict or write-back) is accepted and pushed into the AW FIFO with its source index. A
// write-back carries a line of BEATS data beats on W: the arbiter then stays locked on that
// source and moves its W beats into the W FIFO until the beat marked last, so the beats of
// different caches never interleave and the W FIFO holds whole lines in AW order.
// Paper: one arbiter serves AW and W together (Fig. 4 "AW+W arbiter"). The locking rule is
// this design's own.
module aw_w_arbiter
  import rhea_pkg::*;
#(
  parameter int unsigned N_CORES = 16,
  localparam int unsigned IW = $clog2(N_CORES > 1 ? N_CORES : 2)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic       [N_CORES-1:0] aw_valid,
  input  aw_chan_t                 aw [N_CORES],
  output logic       [N_CORES-1:0] aw_ready,
  input  logic       [N_CORES-1:0] w_valid,
  input  data_chan_t               w [N_CORES],
  output logic       [N_CORES-1:0] w_ready,
  input  logic                     aw_fifo_full,
  output logic                     aw_push,
  output logic       [IW-1:0]      aw_push_src,
  output aw_chan_t                 aw_push_data,
  input  logic                     w_fifo_full,
  output logic                     w_push,
  output data_chan_t               w_push_data
);
  logic          in_w;      // locked on w_src, moving W beats
  logic [IW-1:0] w_src;
  logic [N_CORES-1:0] gnt;

  rr_arbiter #(.N(N_CORES)) u_rr (
    .clk, .rst_n, .req(in_w ? '0 : aw_valid), .advance(aw_push), .gnt, .gnt_idx(aw_push_src)
  );

  assign aw_push      = !in_w && (aw_valid != '0) && !aw_fifo_full;
  assign aw_ready     = aw_push ? gnt : '0;
  assign aw_push_data = aw[aw_push_src];

  assign w_push      = in_w && w_valid[w_src] && !w_fifo_full;
  assign w_push_data = w[w_src];
  always_comb begin
    w_ready = '0;
    if (in_w && !w_fifo_full) w_ready[w_src] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_w  <= 1'b0;
      w_src <= '0;
    end else if (!in_w) begin
      if (aw_push && aw_push_data.op == AW_WRITEBACK) begin
        in_w  <= 1'b1;
        w_src <= aw_push_src;
      end
    end else if (w_push && w_push_data.last) begin
      in_w <= 1'b0;
    end
  end
endmodule
