// dir_arbiter: directory arbiter between the AW+W FSM (client 0) and the AR+CR+CD FSM
// (client 1) of the interconnect.
//
// Each directory access takes one cycle. Among the clients requesting in a cycle one is
// granted in round-robin order; its address and write data reach the directory and the
// directory's combinational read result is returned to both clients (only the granted one
// uses it). A read-check-update done by one FSM within its grant cycle is therefore atomic
// with respect to the other FSM. Paper: "The memory and directory arbiters manage concurrent
// accesses to the memory and the directory by the two FSMs"; round-robin is this design's
// choice.
module dir_arbiter
  import rhea_pkg::*;
#(
  parameter int unsigned N_CORES = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [1:0]         req,
  input  logic [1:0]         we,
  input  laddr_t             addr       [2],
  input  msi_e               wr_state   [2],
  input  logic [N_CORES-1:0] wr_sharers [2],
  output logic [1:0]         gnt,
  output logic               dir_req,
  output logic               dir_we,
  output laddr_t             dir_addr,
  output msi_e               dir_wr_state,
  output logic [N_CORES-1:0] dir_wr_sharers
);
  logic sel;

  rr_arbiter #(.N(2)) u_rr (.clk, .rst_n, .req, .advance(1'b1), .gnt, .gnt_idx(sel));

  assign dir_req        = (req != '0);
  assign dir_we         = dir_req && we[sel];
  assign dir_addr       = addr[sel];
  assign dir_wr_state   = wr_state[sel];
  assign dir_wr_sharers = wr_sharers[sel];
endmodule
