// ar_arbiter: round-robin arbiter of the N AR channels of the coherent interconnect.
//
// Each L1 controller raises ar_valid with a read-clean or read-unique request. Every cycle in
// which the AR FIFO has room, one valid requester is chosen in round-robin order, its request
// is accepted (ar_ready for one cycle) and pushed into the AR FIFO tagged with the source
// index. Paper: three round-robin arbiters serialize the caches' requests towards FIFOs.
// Own choice: the grant is combinational, so a request is accepted in the cycle it is seen.
module ar_arbiter
  import rhea_pkg::*;
#(
  parameter int unsigned N_CORES = 16,
  localparam int unsigned IW = $clog2(N_CORES > 1 ? N_CORES : 2)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic     [N_CORES-1:0] ar_valid,
  input  ar_chan_t               ar [N_CORES],
  output logic     [N_CORES-1:0] ar_ready,
  input  logic                   fifo_full,
  output logic                   push,
  output logic     [IW-1:0]      push_src,
  output ar_chan_t               push_ar
);
  logic [N_CORES-1:0] gnt;

  rr_arbiter #(.N(N_CORES)) u_rr (
    .clk, .rst_n, .req(ar_valid), .advance(push), .gnt, .gnt_idx(push_src)
  );

  assign push     = (ar_valid != '0) && !fifo_full;
  assign ar_ready = fifo_full ? '0 : gnt;
  assign push_ar  = ar[push_src];
endmodule
