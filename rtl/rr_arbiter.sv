// rr_arbiter: round-robin arbiter used by every arbiter of the interconnect.
//
// gnt is a one-hot (or zero) vector chosen combinationally from req, starting the search
// just after the requester granted last. The pointer moves only when `advance` is high, so
// a client may keep its grant over several cycles (a burst) by holding advance low.
// The paper asks for round-robin arbitration; this fixed-priority-after-last-grant scheme
// and the pointer reset value are this design's own choice.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] last;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      logic [IW-1:0] i;
      i = IW'((int'(last) + k) % N);
      if (req[i] && gnt == '0) begin
        gnt[i]  = 1'b1;
        gnt_idx = i;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(N - 1);
    else if (advance && req != '0) last <= gnt_idx;
  end
endmodule
