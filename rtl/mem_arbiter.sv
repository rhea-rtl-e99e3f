// mem_arbiter: memory arbiter between the AW+W FSM (client 0) and the AR+CR+CD FSM
// (client 1) of the interconnect.
//
// A client raises req with a whole-line read or write and keeps it up until done. When the
// memory controller is free one requesting client is granted in round-robin order; the grant
// is kept until the memory controller reports done, which is routed back to that client only
// (together with the read line, valid in the done cycle). Paper: the memory arbiter manages
// concurrent memory accesses by the two FSMs; round-robin and the hold-until-done rule are
// this design's choices.
module mem_arbiter
  import rhea_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] req,
  input  logic [1:0] we,
  input  laddr_t     addr  [2],
  input  line_t      wline [2],
  output logic [1:0] done,
  output line_t      rline,
  // towards the memory controller
  output logic       mc_req,
  output logic       mc_we,
  output laddr_t     mc_addr,
  output line_t      mc_wline,
  input  logic       mc_done,
  input  line_t      mc_rline
);
  logic       busy, owner;
  logic [1:0] gnt;
  logic       gnt_idx;

  rr_arbiter #(.N(2)) u_rr (
    .clk, .rst_n, .req(busy ? 2'b00 : req), .advance(!busy), .gnt, .gnt_idx
  );

  // while busy the owner's request is forwarded; otherwise the new winner's
  logic cur;
  assign cur      = busy ? owner : gnt_idx;
  assign mc_req   = busy ? req[owner] : (req != '0);
  assign mc_we    = we[cur];
  assign mc_addr  = addr[cur];
  assign mc_wline = wline[cur];
  assign rline    = mc_rline;
  always_comb begin
    done      = '0;
    done[cur] = mc_done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      owner <= 1'b0;
    end else if (!busy) begin
      if (req != '0 && !mc_done) begin
        busy  <= 1'b1;
        owner <= gnt_idx;
      end
    end else if (mc_done) begin
      busy <= 1'b0;
    end
  end
endmodule
